// tb_argmax: random and tie cases for argmax of 2 and 5 signed scores.
//
// The expected index is the first position holding the maximum, found by a
// separate scan; ties are forced often by drawing from a small value range.
module tb_argmax;
  localparam int W = 12;
  int checks = 0, failures = 0;

  logic signed [1:0][W-1:0] s2; logic       i2;
  logic signed [4:0][W-1:0] s5; logic [2:0] i5;

  argmax #(.N(2), .W(W)) u2 (.score(s2), .idx(i2));
  argmax #(.N(5), .W(W)) u5 (.score(s5), .idx(i5));

  function automatic int first_max(int v[]);
    int m = v[0], k = 0;
    for (int i = 1; i < v.size(); i++) if (v[i] > m) begin m = v[i]; k = i; end
    return k;
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int v2[];
    int v5[];
    v2 = new[2];
    v5 = new[5];
    for (int t = 0; t < 3000; t++) begin
      bit narrow = (t % 2 == 0);
      for (int i = 0; i < 2; i++) begin
        v2[i] = narrow ? $urandom_range(0, 4) - 2 : $urandom_range(0, 4095) - 2048;
        s2[i] = W'(v2[i]);
      end
      for (int i = 0; i < 5; i++) begin
        v5[i] = narrow ? $urandom_range(0, 4) - 2 : $urandom_range(0, 4095) - 2048;
        s5[i] = W'(v5[i]);
      end
      #1;
      checks += 2;
      if (int'(i2) != first_max(v2)) begin failures++; $display("N=2 got %0d exp %0d", i2, first_max(v2)); end
      if (int'(i5) != first_max(v5)) begin failures++; $display("N=5 got %0d exp %0d", i5, first_max(v5)); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
