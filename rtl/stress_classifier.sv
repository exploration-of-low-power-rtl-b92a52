// stress_classifier: top of the flexible stress-monitoring classifier.
//
// The patch's sensors, ADCs and feature extractor deliver one vector of
// normalised, quantized features per sample; this block predicts
// baseline/rest (0) or stress (1). DATASET and MODEL choose one of six
// published configurations (the most accurate decision tree, linear SVM and
// MLP for the WESAD and AffectiveROAD datasets), which fixes the number of
// features, the precision and the classifier that is built. Exactly one
// bespoke classifier is generated; the default is the WESAD decision tree, the
// smallest and lowest-power design that also reaches the top WESAD accuracy.
//
// The classifier itself is purely combinational. Around it sit a feature
// register and a result register clocked by the 2 kHz system clock. The
// published latency of the larger classifiers exceeds one 500 us period, so
// the top holds the feature register for EVAL_CYCLES periods (default: the
// published latency rounded up to whole periods, stress_pkg::eval_cycles)
// before it samples the prediction, and refuses new samples meanwhile.
// The registers, the handshake and the multicycle wait are this design's
// choices; the published text only gives the clock rate and the latencies.
//
// Interface and timing:
//   in_valid/in_ready : a sample is taken on a rising clk edge with both high.
//   out_valid         : one-cycle pulse, EVAL_CYCLES cycles after that edge;
//                       stress_class holds the prediction until the next one.
//   rst_n             : asynchronous, active low.
module stress_classifier import stress_pkg::*; #(
  parameter dataset_e DATASET     = WESAD,
  parameter model_e   MODEL       = MODEL_DT,
  parameter int       EVAL_CYCLES = eval_cycles(DATASET, MODEL),
  localparam int N_FEATURES = n_features(DATASET, MODEL),
  localparam int FEAT_W     = precision(DATASET, MODEL),
  localparam int CLS_W      = (N_CLASSES > 1) ? $clog2(N_CLASSES) : 1,
  localparam int CNT_W      = $clog2(EVAL_CYCLES + 1)
) (
  input  logic                             clk,
  input  logic                             rst_n,
  input  logic                             in_valid,
  output logic                             in_ready,
  input  logic [N_FEATURES-1:0][FEAT_W-1:0] features,
  output logic                             out_valid,
  output logic [CLS_W-1:0]                 stress_class
);

  typedef enum logic {
    S_IDLE = 1'b0,   // waiting for a sample
    S_EVAL = 1'b1    // classifier settling on the registered sample
  } state_e;

  state_e                           state_q;
  logic [CNT_W-1:0]                 cnt_q;
  logic [N_FEATURES-1:0][FEAT_W-1:0] feat_q;
  logic [CLS_W-1:0]                 pred;

  assign in_ready = (state_q == S_IDLE);

  // ---------------------------------------------------------------- classifier
  if (MODEL == MODEL_DT) begin : g_dt
    dt_classifier #(
      .N_FEATURES(N_FEATURES), .FEAT_W(FEAT_W),
      .SEED(model_seed(DATASET, MODEL))
    ) u_dt (
      .features(feat_q), .pred_class(pred), .leaf_hit(), .go_left()
    );
  end else if (MODEL == MODEL_SVM) begin : g_svm
    localparam int SCORE_W = 2 * FEAT_W + $clog2(N_FEATURES + 1);
    logic signed [N_CLASSES-1:0][SCORE_W-1:0] score;
    svm_classifier #(
      .N_FEATURES(N_FEATURES), .FEAT_W(FEAT_W), .COEF_W(FEAT_W),
      .SEED(model_seed(DATASET, MODEL))
    ) u_svm (
      .features(feat_q), .pred_class(pred), .score(score)
    );
  end else begin : g_mlp
    localparam int SCORE_W = 2 * FEAT_W + $clog2(MLP_HIDDEN + 1);
    logic signed [N_CLASSES-1:0][SCORE_W-1:0] score;
    logic [MLP_HIDDEN-1:0][FEAT_W-1:0]        hidden;
    mlp_classifier #(
      .N_FEATURES(N_FEATURES), .FEAT_W(FEAT_W), .COEF_W(FEAT_W),
      .SPARSITY(sparsity_pct(DATASET)),
      .SEED(model_seed(DATASET, MODEL))
    ) u_mlp (
      .features(feat_q), .pred_class(pred), .score(score), .hidden(hidden)
    );
  end

  // ------------------------------------------------------ sample / result regs
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q      <= S_IDLE;
      cnt_q        <= '0;
      feat_q       <= '0;
      out_valid    <= 1'b0;
      stress_class <= '0;
    end else begin
      out_valid <= 1'b0;
      case (state_q)
        S_IDLE:
          if (in_valid) begin
            feat_q  <= features;
            cnt_q   <= CNT_W'(EVAL_CYCLES - 1);
            state_q <= S_EVAL;
          end
        S_EVAL:
          if (cnt_q == '0) begin
            stress_class <= pred;
            out_valid    <= 1'b1;
            state_q      <= S_IDLE;
          end else begin
            cnt_q <= cnt_q - 1'b1;
          end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  // A result is only produced after a sample was taken.
  a_out_after_eval: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid |-> $past(state_q == S_EVAL));

endmodule
