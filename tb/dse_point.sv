// dse_point: one point of the design-space sweep, checked against the
// reference model.
//
// Instantiates one classifier core (MODEL) with NF features, P-bit features
// and coefficients and, for the MLP, SP percent pruning, all coefficients
// from the placeholder generator with SEED. On each rising edge of `step` it
// applies a new random feature vector (uniform, sparse or all-or-nothing in
// turn) and compares the predicted class with the reference. Counts are
// outputs so the enclosing testbench can total them.
module dse_point import stress_pkg::*; import stress_ref_pkg::*; #(
  parameter model_e      MODEL = MODEL_DT,
  parameter int          NF    = 5,
  parameter int          P     = 4,
  parameter int          SP    = 20,
  parameter int unsigned SEED  = 1
) (
  input  logic step,
  output int   checks,
  output int   failures,
  output int   ones
);
  logic [NF-1:0][P-1:0] features;
  logic [0:0]           pred;

  if (MODEL == MODEL_DT) begin : g_dt
    dt_classifier #(.N_FEATURES(NF), .FEAT_W(P), .SEED(SEED)) u_core (
      .features, .pred_class(pred), .leaf_hit(), .go_left());
  end else if (MODEL == MODEL_SVM) begin : g_svm
    svm_classifier #(.N_FEATURES(NF), .FEAT_W(P), .COEF_W(P), .SEED(SEED)) u_core (
      .features, .pred_class(pred), .score());
  end else begin : g_mlp
    mlp_classifier #(.N_FEATURES(NF), .FEAT_W(P), .COEF_W(P), .SPARSITY(SP), .SEED(SEED)) u_core (
      .features, .pred_class(pred), .score(), .hidden());
  end

  int f[];
  int k = 0;

  initial begin
    checks = 0; failures = 0; ones = 0;
    features = '0;
    f = new[NF];
  end

  initial forever begin : p_step
    int exp_c, leaf;
    int hid[];
    longint score[];
    @(posedge step);
    for (int i = 0; i < NF; i++) begin
      case (k % 3)
        0: f[i] = int'($urandom_range(0, (1 << P) - 1));
        1: f[i] = ($urandom_range(0, 3) == 0) ? int'($urandom_range(0, (1 << P) - 1)) : 0;
        default: f[i] = int'($urandom_range(0, 1)) * ((1 << P) - 1);
      endcase
      features[i] = P'(f[i]);
    end
    k++;
    #1;
    case (MODEL)
      MODEL_DT:  exp_c = dt_ref(SEED, P, DT_DEPTH, f, leaf);
      MODEL_SVM: exp_c = svm_ref(SEED, P, P, f, score);
      default:   exp_c = mlp_ref(SEED, P, P, P - 2, MLP_HIDDEN, SP, f, hid, score);
    endcase
    checks++;
    if (int'(pred) != exp_c) begin
      failures++;
      if (failures < 4)
        $display("[%s NF=%0d P=%0d] class %0d expected %0d", MODEL.name(), NF, P, pred, exp_c);
    end
    ones += exp_c;
  end
endmodule
