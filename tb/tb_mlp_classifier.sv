// tb_mlp_classifier: random check of the default (WESAD, 25 features, 10-bit,
// 90% pruned) MLP against the integer reference.
//
// Hidden activations, class scores and the predicted class are compared for
// random feature vectors of three kinds (uniform, sparse, all-or-nothing).
// The run must see ReLU clamping, saturation of a
// hidden activation and both classes, and the weights must be pruned close to
// the configured 90%.
module tb_mlp_classifier;
  import stress_pkg::*;
  import stress_ref_pkg::*;
  localparam int NF = 25, FW = 10, NH = MLP_HIDDEN;
  localparam int SW = 2 * FW + $clog2(NH + 1);

  int checks = 0, failures = 0;
  int seen [N_CLASSES];

  logic [NF-1:0][FW-1:0] features;
  logic [0:0] pred;
  logic signed [N_CLASSES-1:0][SW-1:0] score;
  logic [NH-1:0][FW-1:0] hidden;

  mlp_classifier u_dut (.features(features), .pred_class(pred), .score(score), .hidden(hidden));

  task automatic check(longint got, longint exp_v, string what);
    checks++;
    if (got != exp_v) begin
      failures++;
      if (failures < 10) $display("%s: got %0d exp %0d", what, got, exp_v);
    end
  endtask

  task automatic need(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("not exercised: %s", what);
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
    int eh[];
    longint es[];
    int ec, zp;
    f = new[NF];
    seen = '{default: 0};
    for (int t = 0; t < 3002; t++) begin
      for (int i = 0; i < NF; i++) begin
        // Mix of uniform, sparse (a quarter of the features nonzero) and
        // all-or-nothing feature vectors.
        case (t % 3)
          0: f[i] = int'($urandom_range(0, (1 << FW) - 1));
          1: f[i] = ($urandom_range(0, 3) == 0) ? int'($urandom_range(0, (1 << FW) - 1)) : 0;
          default: f[i] = int'($urandom_range(0, 1)) * ((1 << FW) - 1);
        endcase
        if (t < 2) f[i] = (t == 0) ? 0 : (1 << FW) - 1;
        features[i] = FW'(f[i]);
      end
      #1;
      ec = mlp_ref(model_seed(WESAD, MODEL_MLP), FW, FW, FW - 2, NH, sparsity_pct(WESAD), f, eh, es);
      for (int h = 0; h < NH; h++) check(longint'(hidden[h]), longint'(eh[h]), "hidden");
      for (int c = 0; c < N_CLASSES; c++) check(longint'($signed(score[c])), es[c], "score");
      check(longint'(pred), ec, "class");
      seen[ec]++;
    end
    zp = mlp_zero_pct(model_seed(WESAD, MODEL_MLP), FW, NF, NH, sparsity_pct(WESAD));
    $display("classes %0d/%0d, relu clamps %0d, saturations %0d, pruned %0d%%",
             seen[0], seen[1], n_relu_clamp, n_saturate, zp);
    need(seen[0] > 0 && seen[1] > 0, "both classes");
    need(n_relu_clamp > 0, "ReLU clamp");
    need(n_saturate > 0, "activation saturation");
    need(zp >= 75 && zp <= 95, "pruning near 90% in the hidden layer");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
