// mlp_classifier: fully-parallel bespoke multilayer perceptron.
//
// One hidden layer of N_HIDDEN ReLU neurons and an output layer of one neuron
// per class, followed by argmax. Every neuron is a bespoke weighted_sum: one
// constant multiplier per unpruned weight, an adder tree over those products,
// and a hardwired bias. Unstructured pruning sets weights to zero, which
// removes their multipliers and adder-tree operands at elaboration.
//
// Between the layers each hidden sum goes through ReLU (negative -> 0) and is
// requantized to the input format: shifted right by COEF_FRAC bits (the
// fraction bits of the weights) and saturated to FEAT_W unsigned bits, i.e.
// clipped to [0,1). The output sums are compared at full width.
//
// The defaults are the most accurate WESAD MLP: 25 features, 10-bit precision,
// 90% sparsity. The placeholder coefficients apply that sparsity to the hidden
// layer and leave the 2x16 output weights dense: pruned at 90% the output
// layer would keep about three weights and predict one class only. N_HIDDEN, COEF_FRAC, the requantization and the
// coefficient values (placeholders from stress_pkg with SEED) are this
// design's choices; the published text gives none of them.
//
// Interface: features in, class index, class scores and hidden activations
// out. Purely combinational.
module mlp_classifier import stress_pkg::*; #(
  parameter int N_FEATURES = 25,
  parameter int FEAT_W     = 10,
  parameter int COEF_W     = 10,
  parameter int COEF_FRAC  = COEF_W - 2,
  parameter int N_HIDDEN   = MLP_HIDDEN,
  parameter int N_CLS      = N_CLASSES,
  parameter int SPARSITY   = sparsity_pct(WESAD),
  parameter int unsigned SEED = model_seed(WESAD, MODEL_MLP),
  localparam int BIAS_W  = FEAT_W + COEF_W,
  localparam int HSUM_W  = BIAS_W + $clog2(N_FEATURES + 1),
  localparam int SCORE_W = BIAS_W + $clog2(N_HIDDEN + 1),
  localparam int CLS_W   = (N_CLS > 1) ? $clog2(N_CLS) : 1,
  parameter logic signed [N_HIDDEN-1:0][N_FEATURES-1:0][COEF_W-1:0] W1 = (N_HIDDEN*N_FEATURES*COEF_W)'(coef_vec(SEED, 0, N_HIDDEN, N_FEATURES, COEF_W, SPARSITY)),
  parameter logic signed [N_HIDDEN-1:0][BIAS_W-1:0] B1 = (N_HIDDEN*BIAS_W)'(bias_vec(SEED, 2, N_HIDDEN, BIAS_W)),
  parameter logic signed [N_CLS-1:0][N_HIDDEN-1:0][COEF_W-1:0] W2 = (N_CLS*N_HIDDEN*COEF_W)'(coef_vec(SEED, 1, N_CLS, N_HIDDEN, COEF_W, 0)),
  parameter logic signed [N_CLS-1:0][BIAS_W-1:0] B2 = (N_CLS*BIAS_W)'(bias_vec(SEED, 3, N_CLS, BIAS_W))
) (
  input  logic        [N_FEATURES-1:0][FEAT_W-1:0] features,
  output logic        [CLS_W-1:0]                  pred_class,
  output logic signed [N_CLS-1:0][SCORE_W-1:0]     score,
  output logic        [N_HIDDEN-1:0][FEAT_W-1:0]   hidden
);

  localparam logic [HSUM_W-1:0] ACT_MAX = HSUM_W'((1 << FEAT_W) - 1);

  logic signed [N_HIDDEN-1:0][HSUM_W-1:0] hsum;

  for (genvar h = 0; h < N_HIDDEN; h++) begin : g_hid
    logic signed [HSUM_W-1:0] shifted;

    weighted_sum #(
      .N_IN(N_FEATURES), .FEAT_W(FEAT_W), .COEF_W(COEF_W),
      .W(W1[h]), .BIAS(B1[h])
    ) u_neuron (
      .x(features),
      .y(hsum[h])
    );

    // ReLU, rescale and saturate to the unsigned FEAT_W-bit input format.
    always_comb begin
      shifted = $signed(hsum[h]) >>> COEF_FRAC;
      if ($signed(hsum[h]) <= 0)           hidden[h] = '0;
      else if (shifted > $signed(ACT_MAX)) hidden[h] = '1;
      else                                 hidden[h] = FEAT_W'(shifted);
    end
  end

  for (genvar c = 0; c < N_CLS; c++) begin : g_out
    weighted_sum #(
      .N_IN(N_HIDDEN), .FEAT_W(FEAT_W), .COEF_W(COEF_W),
      .W(W2[c]), .BIAS(B2[c])
    ) u_neuron (
      .x(hidden),
      .y(score[c])
    );
  end

  argmax #(.N(N_CLS), .W(SCORE_W)) u_argmax (.score(score), .idx(pred_class));

endmodule
