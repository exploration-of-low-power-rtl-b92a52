// argmax: index of the largest of N signed class scores.
//
// A linear scan keeps the first maximum, so a tie goes to the lower class
// index (for the binary stress task: a tie predicts baseline/rest). Used after
// the per-class weighted sums of the SVM and the output layer of the MLP.
//
// Interface: score holds N signed W-bit scores; idx is the winning index.
// Purely combinational.
//
// Picking the class with the largest score follows from the per-class sums
// of the reference design; the tie rule is this implementation's choice.
module argmax #(
  parameter int N = 2,
  parameter int W = 16,
  localparam int IDX_W = (N > 1) ? $clog2(N) : 1
) (
  input  logic signed [N-1:0][W-1:0] score,
  output logic        [IDX_W-1:0]    idx
);

  logic signed [W-1:0] best;

  always_comb begin
    idx  = '0;
    best = $signed(score[0]);
    for (int i = 1; i < N; i++)
      if ($signed(score[i]) > best) begin
        best = $signed(score[i]);
        idx  = IDX_W'(i);
      end
  end

endmodule
