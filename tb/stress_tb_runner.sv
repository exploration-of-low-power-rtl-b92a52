// stress_tb_runner: drives one stress_classifier configuration and checks it.
//
// Used by the end-to-end testbench, once per (DATASET, MODEL). For each of
// N_SAMPLES random feature vectors it waits for in_ready, offers the sample,
// and counts clock cycles to out_valid, which must be EVAL_CYCLES (the
// published latency in 2 kHz periods). Every other sample keeps in_valid high
// with different features while the classifier is busy: in_ready must stay
// low and the result must belong to the accepted sample (stall count). The
// prediction is compared with the integer reference model. Feature vectors
// mix uniform, sparse and all-or-nothing values so both classes occur.
module stress_tb_runner import stress_pkg::*; import stress_ref_pkg::*; #(
  parameter dataset_e DATASET   = WESAD,
  parameter model_e   MODEL     = MODEL_DT,
  parameter int       N_SAMPLES = 100
) (
  input  logic clk,
  input  logic rst_n,
  output logic done,
  output int   checks,
  output int   failures,
  output int   stalls,
  output int   class_seen [N_CLASSES]
);
  localparam int NF = n_features(DATASET, MODEL);
  localparam int FW = precision(DATASET, MODEL);
  localparam int EC = eval_cycles(DATASET, MODEL);

  logic                  in_valid, in_ready, out_valid;
  logic [NF-1:0][FW-1:0] features;
  logic [0:0]            stress_class;

  stress_classifier #(.DATASET(DATASET), .MODEL(MODEL)) u_dut (
    .clk, .rst_n, .in_valid, .in_ready, .features, .out_valid, .stress_class
  );

  initial begin
    int f[];
    int exp_c, n;
    f = new[NF];
    done = 0; checks = 0; failures = 0; stalls = 0;
    class_seen = '{default: 0};
    in_valid = 0;
    features = '0;
    @(posedge rst_n);
    for (int s = 0; s < N_SAMPLES; s++) begin
      for (int i = 0; i < NF; i++) begin
        case (s % 3)
          0: f[i] = int'($urandom_range(0, (1 << FW) - 1));
          1: f[i] = ($urandom_range(0, 3) == 0) ? int'($urandom_range(0, (1 << FW) - 1)) : 0;
          default: f[i] = int'($urandom_range(0, 1)) * ((1 << FW) - 1);
        endcase
      end
      exp_c = predict(DATASET, MODEL, f);
      @(negedge clk);
      while (!in_ready) @(negedge clk);
      for (int i = 0; i < NF; i++) features[i] = FW'(f[i]);
      in_valid = 1;
      n = 0;
      do begin
        @(negedge clk);
        n++;
        if (s % 2 == 1 && !out_valid) begin
          // Offer a different sample while busy: it must be refused.
          features = ~features;
          checks++;
          if (in_ready) begin
            failures++;
            $display("[%s/%s] in_ready high while busy", DATASET.name(), MODEL.name());
          end
          stalls++;
        end else begin
          in_valid = 0;
        end
      end while (!out_valid && n < EC + 10);
      in_valid = 0;
      checks += 2;
      if (n != EC + 1) begin
        failures++;
        $display("[%s/%s] latency %0d cycles, expected %0d", DATASET.name(), MODEL.name(), n - 1, EC);
      end
      if (int'(stress_class) != exp_c) begin
        failures++;
        $display("[%s/%s] sample %0d: class %0d expected %0d", DATASET.name(), MODEL.name(), s,
                 stress_class, exp_c);
      end
      class_seen[exp_c]++;
    end
    done = 1;
  end
endmodule
