// tb_bespoke_mul: exhaustive check of the constant multiplier.
//
// Five multipliers with hardwired coefficients of different signs and bit
// patterns (including zero, i.e. a pruned weight, and the most negative
// 8-bit value) see every 8-bit input; each product must equal x*COEF worked
// out in integer arithmetic.
module tb_bespoke_mul;
  localparam int FW = 8, CW = 8, PW = FW + CW;
  localparam int NM = 5;
  localparam logic signed [CW-1:0] C [NM] = '{8'sd45, -8'sd77, 8'sd0, -8'sd128, 8'sd127};

  int checks = 0, failures = 0;
  logic [FW-1:0] x;
  logic signed [PW-1:0] p [NM];

  for (genvar i = 0; i < NM; i++) begin : g_dut
    bespoke_mul #(.FEAT_W(FW), .COEF_W(CW), .COEF(C[i])) u_dut (.x(x), .p(p[i]));
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < (1 << FW); v++) begin
      x = FW'(v);
      #1;
      for (int i = 0; i < NM; i++) begin
        int exp_p;
        exp_p = v * int'(C[i]);
        checks++;
        if (int'(p[i]) != exp_p) begin
          failures++;
          if (failures < 10) $display("mismatch x=%0d coef=%0d got %0d exp %0d", v, C[i], p[i], exp_p);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
