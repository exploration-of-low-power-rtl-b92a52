// weighted_sum: bespoke, fully-parallel weighted sum plus bias, the shared
// arithmetic of an MLP neuron and of a linear-SVM class score.
//
// y = BIAS + sum_i x[i]*W[i], with all W[i] and BIAS hardwired parameters.
// At elaboration the module counts the nonzero (unpruned) weights, places one
// bespoke_mul for each of them only, and feeds those products, plus the bias
// when it is nonzero, to one adder_tree. A pruned weight thus removes both its
// multiplier and one adder-tree operand: with 5 inputs and W[1] = W[4] = 0 the
// circuit is x0*W0 + x2*W2 + x3*W3 + BIAS, three multipliers and a 4-operand
// tree. The default weights reproduce that 5-input example.
//
// Number format: x is unsigned with FEAT_W fraction bits (features
// normalised to [0,1)); W is signed COEF_W-bit fixed point; BIAS is given in
// the product's scale (FEAT_W+COEF_W bits). y is exact (no rounding).
// Interface: x in, y out; purely combinational.
//
// Hardwired weights and bias, one multiplier per unpruned weight and a
// shortened adder tree follow the reference design; the bias scaling and the
// exact (unrounded) result are this implementation's choices.
module weighted_sum #(
  parameter int N_IN   = 5,
  parameter int FEAT_W = 8,
  parameter int COEF_W = 8,
  parameter logic signed [N_IN-1:0][COEF_W-1:0] W = {8'sd0, -8'sd19, 8'sd37, 8'sd0, 8'sd53},
  parameter logic signed [FEAT_W+COEF_W-1:0] BIAS = -16'sd300,
  localparam int PROD_W = FEAT_W + COEF_W,
  localparam int SUM_W  = PROD_W + $clog2(N_IN + 1)
) (
  input  logic        [N_IN-1:0][FEAT_W-1:0] x,
  output logic signed [SUM_W-1:0]            y
);

  function automatic int count_nonzero();
    int n = 0;
    for (int i = 0; i < N_IN; i++) if (W[i] != 0) n++;
    return n;
  endfunction

  // Position of the k-th nonzero weight.
  function automatic int nz_index(int k);
    int n = 0;
    for (int i = 0; i < N_IN; i++)
      if (W[i] != 0) begin
        if (n == k) return i;
        n++;
      end
    return 0;
  endfunction

  localparam int NNZ     = count_nonzero();
  localparam bit HAS_B   = (BIAS != 0);
  localparam int N_TERMS = NNZ + (HAS_B ? 1 : 0);

  if (N_TERMS == 0) begin : g_empty
    assign y = '0;
  end else begin : g_sum
    localparam int TREE_W = PROD_W + $clog2(N_TERMS);

    logic signed [N_TERMS-1:0][PROD_W-1:0] terms;
    logic signed [TREE_W-1:0]              tree_sum;

    for (genvar k = 0; k < NNZ; k++) begin : g_mul
      localparam int IDX = nz_index(k);
      bespoke_mul #(.FEAT_W(FEAT_W), .COEF_W(COEF_W), .COEF(W[IDX])) u_mul (
        .x(x[IDX]),
        .p(terms[k])
      );
    end

    if (HAS_B) begin : g_bias
      assign terms[N_TERMS-1] = BIAS;
    end

    adder_tree #(.N(N_TERMS), .W_IN(PROD_W)) u_tree (.in(terms), .sum(tree_sum));

    assign y = SUM_W'(tree_sum);
  end

endmodule
