// dt_classifier: fully-parallel bespoke decision tree.
//
// The tree is stored as a complete binary tree of depth DEPTH in heap order:
// internal node n (0 .. 2^DEPTH-2) has children 2n+1 (taken when
// feature[FEAT_IDX[n]] <= THRESH[n]) and 2n+2 (taken otherwise), and the
// 2^DEPTH leaves each carry a class. A shallower or unbalanced trained tree
// maps onto this form by giving both subtrees of a cut-off node the same leaf
// classes; synthesis then removes the comparators that cannot matter.
//
// Nothing is evaluated sequentially. All node comparators, each a comparison
// of one feature with a hardwired threshold, work in parallel; a leaf is
// reached when every comparator on its root-to-leaf path points its way
// (AND of DEPTH comparator outputs), exactly one leaf is reached, and the
// prediction is the OR of the reached leaf's class bits.
//
// The defaults are the most accurate WESAD tree: 25 features at 8-bit
// precision. DEPTH and the node contents (placeholders from stress_pkg with
// SEED) are this design's choices; the trained tree was not published.
//
// Interface: features in; class index, the one-hot reached leaf and the
// comparator outputs out. Purely combinational.
module dt_classifier import stress_pkg::*; #(
  parameter int N_FEATURES = 25,
  parameter int FEAT_W     = 8,
  parameter int DEPTH      = DT_DEPTH,
  parameter int N_CLS      = N_CLASSES,
  parameter int unsigned SEED = model_seed(WESAD, MODEL_DT),
  localparam int N_NODES  = (1 << DEPTH) - 1,
  localparam int N_LEAVES = 1 << DEPTH,
  localparam int IDX_W    = (N_FEATURES > 1) ? $clog2(N_FEATURES) : 1,
  localparam int CLS_W    = (N_CLS > 1) ? $clog2(N_CLS) : 1,
  parameter logic [N_NODES-1:0][IDX_W-1:0]  FEAT_IDX   = (N_NODES*IDX_W)'(dt_idx_vec(SEED, N_NODES, N_FEATURES, IDX_W)),
  parameter logic [N_NODES-1:0][FEAT_W-1:0] THRESH     = (N_NODES*FEAT_W)'(dt_thr_vec(SEED, N_NODES, FEAT_W)),
  parameter logic [N_LEAVES-1:0][CLS_W-1:0] LEAF_CLASS = (N_LEAVES*CLS_W)'(dt_leaf_vec(SEED, N_LEAVES, CLS_W, N_CLS))
) (
  input  logic [N_FEATURES-1:0][FEAT_W-1:0] features,
  output logic [CLS_W-1:0]                  pred_class,
  output logic [N_LEAVES-1:0]               leaf_hit,
  output logic [N_NODES-1:0]                go_left
);

  // Comparator bank: one bespoke comparison per node, all in parallel.
  for (genvar n = 0; n < N_NODES; n++) begin : g_cmp
    assign go_left[n] = (features[FEAT_IDX[n]] <= THRESH[n]);
  end

  // Path decode: leaf l's bits, MSB first, are the turns taken from the root
  // (0 = left). The node met at level k is 2^k-1 + (l >> (DEPTH-k)).
  for (genvar l = 0; l < N_LEAVES; l++) begin : g_leaf
    logic [DEPTH-1:0] on_path;
    for (genvar k = 0; k < DEPTH; k++) begin : g_lvl
      localparam int NODE = (1 << k) - 1 + (l >> (DEPTH - k));
      localparam bit TURN_RIGHT = ((l >> (DEPTH - 1 - k)) & 1) == 1;
      assign on_path[k] = TURN_RIGHT ? !go_left[NODE] : go_left[NODE];
    end
    assign leaf_hit[l] = &on_path;
  end

  always_comb begin
    pred_class = '0;
    for (int l = 0; l < N_LEAVES; l++)
      if (leaf_hit[l]) pred_class = pred_class | LEAF_CLASS[l];
  end

endmodule
