// tb_svm_classifier: random check of the default (WESAD, 25 features, 10-bit)
// linear SVM against the integer reference.
//
// Both class scores and the predicted class are compared for 3000 random
// feature vectors plus the all-zero and all-one vectors; both classes must
// be predicted at least once.
module tb_svm_classifier;
  import stress_pkg::*;
  import stress_ref_pkg::*;
  localparam int NF = 25, FW = 10;
  localparam int SW = 2 * FW + $clog2(NF + 1);

  int checks = 0, failures = 0;
  int seen [N_CLASSES];

  logic [NF-1:0][FW-1:0] features;
  logic [0:0] pred;
  logic signed [N_CLASSES-1:0][SW-1:0] score;

  svm_classifier u_dut (.features(features), .pred_class(pred), .score(score));

  task automatic check(longint got, longint exp_v, string what);
    checks++;
    if (got != exp_v) begin
      failures++;
      if (failures < 10) $display("%s: got %0d exp %0d", what, got, exp_v);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int f[];
    longint es[];
    int ec;
    f = new[NF];
    seen = '{default: 0};
    for (int t = 0; t < 3002; t++) begin
      for (int i = 0; i < NF; i++) begin
        f[i] = (t == 0) ? 0 : (t == 1) ? (1 << FW) - 1 : int'($urandom_range(0, (1 << FW) - 1));
        features[i] = FW'(f[i]);
      end
      #1;
      ec = svm_ref(model_seed(WESAD, MODEL_SVM), FW, FW, f, es);
      for (int c = 0; c < N_CLASSES; c++) check(longint'($signed(score[c])), es[c], "score");
      check(longint'(pred), ec, "class");
      seen[ec]++;
    end
    for (int c = 0; c < N_CLASSES; c++) begin
      $display("class %0d predicted %0d times", c, seen[c]);
      checks++;
      if (seen[c] == 0) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
