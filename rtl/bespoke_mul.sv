// bespoke_mul: multiplier of one unsigned input feature by one hardwired,
// signed coefficient.
//
// The coefficient is a parameter, so the multiplier is built as a sum of
// shifted copies of the input, one per set bit of |COEF|, followed by a
// negation when COEF is negative. Its size therefore depends on the
// coefficient's value, not only on its width, which is the property that
// makes bespoke (coefficient-specific) circuits small. A pruned coefficient
// (COEF = 0) leaves no hardware: the product is the constant zero.
//
// Interface: x is an unsigned FEAT_W-bit feature (fixed point, FEAT_W
// fraction bits, range [0,1)); p is the signed FEAT_W+COEF_W-bit exact product
// x*COEF. Purely combinational.
//
// One constant multiplier per unpruned weight, with pruned weights costing
// nothing, is the reference architecture; the shift-and-add form and the
// number formats are this implementation's choice.
module bespoke_mul #(
  parameter int FEAT_W = 8,
  parameter int COEF_W = 8,
  parameter logic signed [COEF_W-1:0] COEF = 8'sd45,
  localparam int PROD_W = FEAT_W + COEF_W
) (
  input  logic        [FEAT_W-1:0] x,
  output logic signed [PROD_W-1:0] p
);

  // |COEF| fits in COEF_W bits when seen as unsigned (covers -2^(COEF_W-1)).
  localparam logic [COEF_W-1:0] MAG = (COEF < 0) ? COEF_W'(-COEF) : COEF_W'(COEF);
  localparam bit NEG = (COEF < 0);

  logic [PROD_W-1:0] mag_prod;

  always_comb begin
    mag_prod = '0;
    for (int b = 0; b < COEF_W; b++)
      if (MAG[b]) mag_prod = mag_prod + (PROD_W'(x) << b);
  end

  assign p = NEG ? -$signed(mag_prod) : $signed(mag_prod);

endmodule
