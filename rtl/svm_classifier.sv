// svm_classifier: fully-parallel bespoke linear support vector machine.
//
// A linear kernel reduces the SVM to weighted sums of the features. As in
// one-vs-rest classification, every class has its own weighted sum (its own
// weight vector and bias, a bespoke weighted_sum each) and the class with the
// largest score is predicted (argmax, ties to the lower index). All weights
// and biases are hardwired parameters; weights that are zero cost nothing.
//
// The defaults (N_FEATURES, FEAT_W = COEF_W) are the most accurate WESAD SVM:
// 25 features at 10-bit precision. The coefficient values are placeholders
// (stress_pkg::placeholder_coef with SEED); the trained ones were not
// published. Fixed-point formats are those of weighted_sum.
//
// Interface: features in, class index and all class scores out. Purely
// combinational.
module svm_classifier import stress_pkg::*; #(
  parameter int N_FEATURES = 25,
  parameter int FEAT_W     = 10,
  parameter int COEF_W     = 10,
  parameter int N_CLS      = N_CLASSES,
  parameter int unsigned SEED = model_seed(WESAD, MODEL_SVM),
  localparam int BIAS_W  = FEAT_W + COEF_W,
  localparam int SCORE_W = BIAS_W + $clog2(N_FEATURES + 1),
  localparam int CLS_W   = (N_CLS > 1) ? $clog2(N_CLS) : 1,
  parameter logic signed [N_CLS-1:0][N_FEATURES-1:0][COEF_W-1:0] W = (N_CLS*N_FEATURES*COEF_W)'(coef_vec(SEED, 0, N_CLS, N_FEATURES, COEF_W, 0)),
  parameter logic signed [N_CLS-1:0][BIAS_W-1:0] BIAS = (N_CLS*BIAS_W)'(bias_vec(SEED, 1, N_CLS, BIAS_W))
) (
  input  logic        [N_FEATURES-1:0][FEAT_W-1:0] features,
  output logic        [CLS_W-1:0]                  pred_class,
  output logic signed [N_CLS-1:0][SCORE_W-1:0]     score
);

  for (genvar c = 0; c < N_CLS; c++) begin : g_cls
    weighted_sum #(
      .N_IN(N_FEATURES), .FEAT_W(FEAT_W), .COEF_W(COEF_W),
      .W(W[c]), .BIAS(BIAS[c])
    ) u_sum (
      .x(features),
      .y(score[c])
    );
  end

  argmax #(.N(N_CLS), .W(SCORE_W)) u_argmax (.score(score), .idx(pred_class));

endmodule
