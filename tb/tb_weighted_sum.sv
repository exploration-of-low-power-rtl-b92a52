// tb_weighted_sum: random check of bespoke weighted sums.
//
// u_ex is the default 5-input neuron (weights 53, 0, 37, -19, 0 from index 0
// up, bias -300: the pruned-neuron example, two of five weights zero).
// u_big has 25 inputs at 10-bit precision with weights drawn from the
// placeholder generator at 60% sparsity, and u_none has every weight pruned
// and only a bias. Each output is compared with a sum over all weights.
module tb_weighted_sum;
  import stress_pkg::*;
  int checks = 0, failures = 0;

  localparam int N_BIG = 25, FW_BIG = 10, CW_BIG = 10;

  function automatic logic signed [N_BIG-1:0][CW_BIG-1:0] big_w();
    for (int i = 0; i < N_BIG; i++) big_w[i] = CW_BIG'(placeholder_coef(7, 0, 0, i, CW_BIG, 60));
  endfunction
  localparam logic signed [N_BIG-1:0][CW_BIG-1:0] W_BIG = big_w();
  localparam logic signed [19:0] B_BIG = 20'sd12345;

  logic [4:0][7:0] x_ex;               logic signed [18:0] y_ex;
  logic [N_BIG-1:0][FW_BIG-1:0] x_big; logic signed [24:0] y_big;
  logic [3:0][7:0] x_none;             logic signed [18:0] y_none;

  weighted_sum u_ex (.x(x_ex), .y(y_ex));
  weighted_sum #(.N_IN(N_BIG), .FEAT_W(FW_BIG), .COEF_W(CW_BIG), .W(W_BIG), .BIAS(B_BIG))
    u_big (.x(x_big), .y(y_big));
  weighted_sum #(.N_IN(4), .FEAT_W(8), .COEF_W(8), .W('0), .BIAS(-16'sd77))
    u_none (.x(x_none), .y(y_none));

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
    int zeros = 0;
    for (int i = 0; i < N_BIG; i++) if (placeholder_coef(7, 0, 0, i, CW_BIG, 60) == 0) zeros++;
    $display("u_big: %0d of %0d weights pruned", zeros, N_BIG);
    for (int t = 0; t < 3000; t++) begin
      longint e;
      for (int i = 0; i < 5; i++) x_ex[i] = (t < 2) ? (t == 0 ? 8'h00 : 8'hFF) : 8'($urandom);
      for (int i = 0; i < N_BIG; i++) x_big[i] = (t < 2) ? (t == 0 ? '0 : '1) : FW_BIG'($urandom);
      for (int i = 0; i < 4; i++) x_none[i] = 8'($urandom);
      #1;
      e = -300 + 53 * longint'(x_ex[0]) + 0 * longint'(x_ex[1]) + 37 * longint'(x_ex[2])
               - 19 * longint'(x_ex[3]) + 0 * longint'(x_ex[4]);
      check(longint'(y_ex), e, "example neuron");
      e = 12345;
      for (int i = 0; i < N_BIG; i++)
        e += longint'(x_big[i]) * placeholder_coef(7, 0, 0, i, CW_BIG, 60);
      check(longint'(y_big), e, "25-input sum");
      check(longint'(y_none), -77, "fully pruned");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
