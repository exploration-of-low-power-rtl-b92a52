// tb_adder_tree: random check of adder trees of 1, 2, 5 and 25 operands.
//
// Each operand is a random signed 16-bit value (extremes included); every
// tree's output must equal the integer sum of its operands.
module tb_adder_tree;
  localparam int W = 16;
  int checks = 0, failures = 0;

  logic signed [0:0][W-1:0]  in1;  logic signed [W-1:0]   s1;
  logic signed [1:0][W-1:0]  in2;  logic signed [W:0]     s2;
  logic signed [4:0][W-1:0]  in5;  logic signed [W+2:0]   s5;
  logic signed [24:0][W-1:0] in25; logic signed [W+4:0]   s25;

  adder_tree #(.N(1),  .W_IN(W)) u1  (.in(in1),  .sum(s1));
  adder_tree #(.N(2),  .W_IN(W)) u2  (.in(in2),  .sum(s2));
  adder_tree #(.N(5),  .W_IN(W)) u5  (.in(in5),  .sum(s5));
  adder_tree #(.N(25), .W_IN(W)) u25 (.in(in25), .sum(s25));

  function automatic logic [W-1:0] rnd();
    case ($urandom_range(0, 7))
      0: return 16'h8000;
      1: return 16'h7FFF;
      default: return W'($urandom);
    endcase
  endfunction

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
    for (int t = 0; t < 2000; t++) begin
      longint e1, e2, e5, e25;
      e2 = 0; e5 = 0; e25 = 0;
      in1[0] = rnd(); e1 = longint'($signed(in1[0]));
      for (int i = 0; i < 2; i++)  begin in2[i]  = rnd(); e2  += longint'($signed(in2[i]));  end
      for (int i = 0; i < 5; i++)  begin in5[i]  = rnd(); e5  += longint'($signed(in5[i]));  end
      for (int i = 0; i < 25; i++) begin in25[i] = rnd(); e25 += longint'($signed(in25[i])); end
      #1;
      check(longint'(s1), e1, "N=1");
      check(longint'(s2), e2, "N=2");
      check(longint'(s5), e5, "N=5");
      check(longint'(s25), e25, "N=25");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
