// tb_stress_full: the top at its default configuration (WESAD decision tree,
// 25 features, 8-bit, one-cycle evaluation), no parameter overrides.
//
// After reset, 2000 random samples are classified back to back; each
// prediction is compared with the reference tree walk and each latency with
// eval_cycles(). Both classes must occur.
module tb_stress_full;
  import stress_pkg::*;
  import stress_ref_pkg::*;

  localparam int NF = n_features(WESAD, MODEL_DT);
  localparam int FW = precision(WESAD, MODEL_DT);
  localparam int EC = eval_cycles(WESAD, MODEL_DT);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                  in_valid, in_ready, out_valid;
  logic [NF-1:0][FW-1:0] features;
  logic [0:0]            stress_class;

  stress_classifier u_dut (
    .clk, .rst_n, .in_valid, .in_ready, .features, .out_valid, .stress_class
  );

  int checks = 0, failures = 0;
  int seen [N_CLASSES];

  initial begin
    #10_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int f[];
    int exp_c, n;
    f = new[NF];
    seen = '{default: 0};
    in_valid = 0;
    features = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int s = 0; s < 2000; s++) begin
      for (int i = 0; i < NF; i++) f[i] = int'($urandom_range(0, (1 << FW) - 1));
      exp_c = predict(WESAD, MODEL_DT, f);
      @(negedge clk);
      while (!in_ready) @(negedge clk);
      for (int i = 0; i < NF; i++) features[i] = FW'(f[i]);
      in_valid = 1;
      n = 0;
      do begin
        @(negedge clk);
        in_valid = 0;
        n++;
      end while (!out_valid && n < EC + 10);
      checks += 2;
      if (n != EC + 1) begin
        failures++;
        $display("latency %0d, expected %0d", n - 1, EC);
      end
      if (int'(stress_class) != exp_c) begin
        failures++;
        if (failures < 10) $display("sample %0d: class %0d expected %0d", s, stress_class, exp_c);
      end
      seen[exp_c]++;
    end
    $display("classes %0d/%0d", seen[0], seen[1]);
    checks++;
    if (seen[0] == 0 || seen[1] == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
