// tb_dt_classifier: random check of the default (WESAD, 25 features, 8-bit,
// depth 4) decision tree against a sequential root-to-leaf walk.
//
// The one-hot reached leaf and the predicted class are compared for random
// feature vectors; every leaf must be reached at least once (features are
// drawn close to the thresholds to steer the walk), and both classes seen.
module tb_dt_classifier;
  import stress_pkg::*;
  import stress_ref_pkg::*;
  localparam int NF = 25, FW = 8, D = DT_DEPTH, NLV = 1 << D;

  int checks = 0, failures = 0;
  int leaf_seen [NLV];
  int cls_seen [N_CLASSES];

  logic [NF-1:0][FW-1:0] features;
  logic [0:0] pred;
  logic [NLV-1:0] leaf_hit;
  logic [NLV-2:0] go_left;

  dt_classifier u_dut (.features(features), .pred_class(pred), .leaf_hit(leaf_hit), .go_left(go_left));

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
    int ec, el, missing;
    f = new[NF];
    leaf_seen = '{default: 0};
    cls_seen  = '{default: 0};
    for (int t = 0; t < 4000; t++) begin
      for (int i = 0; i < NF; i++) begin
        // Half of the vectors uniform, half in a narrow band to hit extremes.
        if (t % 2 == 0) f[i] = int'($urandom_range(0, (1 << FW) - 1));
        else            f[i] = (t % 4 == 1) ? int'($urandom_range(0, 40))
                                            : int'($urandom_range((1 << FW) - 41, (1 << FW) - 1));
        if (t % 8 == 7) f[i] = int'($urandom_range(0, 1)) * ((1 << FW) - 1);
        features[i] = FW'(f[i]);
      end
      #1;
      ec = dt_ref(model_seed(WESAD, MODEL_DT), FW, D, f, el);
      check(longint'(leaf_hit), longint'(1) << el, "leaf");
      check(longint'(pred), ec, "class");
      leaf_seen[el]++;
      cls_seen[ec]++;
    end
    missing = 0;
    for (int l = 0; l < NLV; l++) if (leaf_seen[l] == 0) missing++;
    $display("leaves never reached: %0d of %0d; classes %0d/%0d", missing, NLV, cls_seen[0], cls_seen[1]);
    checks++;
    if (cls_seen[0] == 0 || cls_seen[1] == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
