// tb_stress_classifier: end-to-end test of all six published configurations
// of the top (decision tree, linear SVM and MLP for WESAD and AffectiveROAD).
//
// Six stress_tb_runner instances share clock and reset and run concurrently.
// Besides the per-sample checks (prediction against the reference, latency of
// EVAL_CYCLES periods, refusal of samples while busy) the test requires every
// mechanism of the design to occur: each model type predicting both classes,
// a multicycle evaluation (EVAL_CYCLES > 1), a refused sample (stall), MLP
// ReLU clamping, hidden-activation saturation and pruned weights, and a
// reset in the middle of an evaluation that must abandon it.
module tb_stress_classifier;
  import stress_pkg::*;
  import stress_ref_pkg::*;

  localparam int NCFG = 6;
  localparam int NS   = 60;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic done [NCFG];
  int   chk [NCFG], fl [NCFG], st [NCFG];
  int   cs [NCFG][N_CLASSES];

  stress_tb_runner #(.DATASET(WESAD),          .MODEL(MODEL_DT),  .N_SAMPLES(NS)) r0 (.clk, .rst_n, .done(done[0]), .checks(chk[0]), .failures(fl[0]), .stalls(st[0]), .class_seen(cs[0]));
  stress_tb_runner #(.DATASET(WESAD),          .MODEL(MODEL_SVM), .N_SAMPLES(NS)) r1 (.clk, .rst_n, .done(done[1]), .checks(chk[1]), .failures(fl[1]), .stalls(st[1]), .class_seen(cs[1]));
  stress_tb_runner #(.DATASET(WESAD),          .MODEL(MODEL_MLP), .N_SAMPLES(5*NS)) r2 (.clk, .rst_n, .done(done[2]), .checks(chk[2]), .failures(fl[2]), .stalls(st[2]), .class_seen(cs[2]));
  stress_tb_runner #(.DATASET(AFFECTIVE_ROAD), .MODEL(MODEL_DT),  .N_SAMPLES(NS)) r3 (.clk, .rst_n, .done(done[3]), .checks(chk[3]), .failures(fl[3]), .stalls(st[3]), .class_seen(cs[3]));
  stress_tb_runner #(.DATASET(AFFECTIVE_ROAD), .MODEL(MODEL_SVM), .N_SAMPLES(NS)) r4 (.clk, .rst_n, .done(done[4]), .checks(chk[4]), .failures(fl[4]), .stalls(st[4]), .class_seen(cs[4]));
  stress_tb_runner #(.DATASET(AFFECTIVE_ROAD), .MODEL(MODEL_MLP), .N_SAMPLES(NS)) r5 (.clk, .rst_n, .done(done[5]), .checks(chk[5]), .failures(fl[5]), .stalls(st[5]), .class_seen(cs[5]));

  // Separate instance for the reset-during-evaluation check.
  logic        rv, rr, ro;
  logic [0:0]  rc;
  logic        rst2_n = 0;
  logic [n_features(WESAD, MODEL_MLP)-1:0][precision(WESAD, MODEL_MLP)-1:0] rf;
  stress_classifier #(.DATASET(WESAD), .MODEL(MODEL_MLP)) u_rst (
    .clk, .rst_n(rst2_n), .in_valid(rv), .in_ready(rr), .features(rf), .out_valid(ro), .stress_class(rc)
  );

  int checks = 0, failures = 0;

  task automatic need(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("not exercised: %s", what);
    end
  endtask

  initial begin
    #50_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Reset in the middle of an evaluation: the result must never appear.
  int n_abandoned = 0;
  initial begin
    rv = 0; rf = '1;
    repeat (3) @(negedge clk);
    rst2_n = 1;
    @(negedge clk);
    rv = 1;
    @(negedge clk);
    rv = 0;
    repeat (eval_cycles(WESAD, MODEL_MLP) / 2) @(negedge clk);
    checks++;
    if (rr) begin failures++; $display("reset test: not busy mid-evaluation"); end
    rst2_n = 0;
    @(negedge clk);
    rst2_n = 1;
    checks++;
    if (!rr || ro) begin failures++; $display("reset test: not idle after reset"); end
    repeat (3 * eval_cycles(WESAD, MODEL_MLP)) begin
      @(negedge clk);
      if (ro) begin failures++; $display("reset test: abandoned result appeared"); end
    end
    checks++;
    n_abandoned++;
  end

  initial begin
    bit all_done;
    int multicycle, stall_total, zp;
    multicycle = 0;
    stall_total = 0;
    repeat (4) @(negedge clk);
    rst_n = 1;
    do begin
      @(negedge clk);
      all_done = 1;
      for (int k = 0; k < NCFG; k++) all_done &= done[k];
    end while (!all_done);
    repeat (4 * eval_cycles(WESAD, MODEL_MLP)) @(negedge clk);

    for (int k = 0; k < NCFG; k++) begin
      checks += chk[k];
      failures += fl[k];
      stall_total += st[k];
      $display("config %0d: %0d checks, %0d failures, %0d stalls, classes %0d/%0d",
               k, chk[k], fl[k], st[k], cs[k][0], cs[k][1]);
    end
    for (int d = 0; d < 2; d++)
      for (int m = 0; m < 3; m++)
        if (eval_cycles(dataset_e'(d), model_e'(m)) > 1) multicycle++;
    zp = mlp_zero_pct(model_seed(WESAD, MODEL_MLP), precision(WESAD, MODEL_MLP),
                      n_features(WESAD, MODEL_MLP), MLP_HIDDEN, sparsity_pct(WESAD));
    $display("multicycle configs %0d, stalls %0d, relu clamps %0d, saturations %0d, MLP zero weights %0d%%, resets mid-evaluation %0d",
             multicycle, stall_total, n_relu_clamp, n_saturate, zp, n_abandoned);
    need(cs[0][0] > 0 && cs[0][1] > 0 && cs[3][0] > 0 && cs[3][1] > 0, "decision trees predicting both classes");
    need(cs[1][0] > 0 && cs[1][1] > 0 && cs[4][0] > 0 && cs[4][1] > 0, "SVMs predicting both classes");
    need(cs[2][0] > 0 && cs[2][1] > 0 && cs[5][0] > 0 && cs[5][1] > 0, "MLPs predicting both classes");
    need(multicycle > 0, "multicycle evaluation");
    need(stall_total > 0, "sample refused while busy");
    need(n_relu_clamp > 0, "ReLU clamp");
    need(n_saturate > 0, "hidden activation saturation");
    need(zp > 50, "pruned MLP weights");
    need(n_abandoned > 0, "reset during evaluation");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
