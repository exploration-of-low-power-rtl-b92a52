// adder_tree: balanced tree of two-input adders summing N signed operands.
//
// Level 0 holds the N operands. Each further level adds neighbouring pairs of
// the level below (an unpaired last operand is passed up unchanged) and is one
// bit wider, so after ceil(log2 N) levels one node is left and the sum has
// W_IN+clog2(N) bits and cannot overflow. The bespoke weighted sums feed it
// only the products of unpruned coefficients, so pruning shortens the tree.
//
// Interface: in holds N signed W_IN-bit operands; sum is their exact sum.
// Purely combinational; depth ceil(log2 N) adders.
//
// An adder tree over the bespoke products is the reference architecture; its
// balanced shape and growing widths are this implementation's choice.
module adder_tree #(
  parameter int N    = 5,
  parameter int W_IN = 16,
  localparam int LEVELS = $clog2(N),
  localparam int W_OUT  = W_IN + LEVELS
) (
  input  logic signed [N-1:0][W_IN-1:0] in,
  output logic signed [W_OUT-1:0]       sum
);

  // Number of nodes on level l.
  function automatic int nodes(int l);
    int n = N;
    for (int i = 0; i < l; i++) n = (n + 1) / 2;
    return n;
  endfunction

  for (genvar l = 0; l <= LEVELS; l++) begin : g_lvl
    localparam int NL = nodes(l);
    localparam int WL = W_IN + l;
    logic [NL-1:0][WL-1:0] node;

    if (l == 0) begin : g_in
      assign node = in;
    end else begin : g_add
      localparam int NB = nodes(l - 1);
      for (genvar j = 0; j < NL; j++) begin : g_node
        if (2 * j + 1 < NB) begin : g_pair
          assign node[j] = WL'($signed(g_lvl[l-1].node[2*j]))
                         + WL'($signed(g_lvl[l-1].node[2*j+1]));
        end else begin : g_pass
          assign node[j] = WL'($signed(g_lvl[l-1].node[2*j]));
        end
      end
    end
  end

  assign sum = $signed(g_lvl[LEVELS].node[0]);

endmodule
