// arbiter_tree: time-domain argmax over the outputs of all PDLs.
//
// A binary tree of arbiters. Leaf k carries the PDL of class
// N_CLASSES-1-k; leaves beyond N_CLASSES are tied to a constant equal to
// the level the PDL outputs had before the current transition (~phase_i),
// so they never arrive and the tree stays symmetric. For three classes
// this gives the arrangement of two first-level arbiters (classes 2/1 and
// class 0/constant) and one root arbiter. Each arbiter above the first
// level races the completion signals of its two children, so the root
// completion changes when the earliest PDL output has arrived.
// The winning leaf is decoded from the arbiter outputs: the root output
// picks a subtree, that subtree's arbiter output picks the next, and so
// on; the leaf index is then mapped back to a class. class_o is valid
// once completion_o has taken the level of phase_i, and stays valid until
// the next transition starts. The tree and the constant inputs follow the
// paper; the leaf order and the decoder are this design's choices.
module arbiter_tree
  import tm_pkg::*;
#(
  parameter int unsigned N_CLASSES = N_CLASSES_DEF,
  localparam int unsigned CW = (N_CLASSES > 1) ? $clog2(N_CLASSES) : 1
) (
  input  logic                 phase_i,
  input  logic [N_CLASSES-1:0] pdl_i,
  output logic                 completion_o,
  output logic [CW-1:0]        class_o
);
  timeunit 1ps;
  timeprecision 100fs;

  localparam int unsigned LEAVES = tree_leaves(N_CLASSES);
  localparam int unsigned LEVELS = $clog2(LEAVES);

  // Heap numbering: node 1 is the root, node i has children 2i and 2i+1,
  // leaves are nodes LEAVES .. 2*LEAVES-1.
  logic [2*LEAVES-1:1] node_sig;   // completion of a node / leaf signal
  logic [LEAVES-1:1]   node_out;   // arbiter output of internal nodes

  for (genvar k = 0; k < LEAVES; k++) begin : g_leaf
    if (k < N_CLASSES) begin : g_pdl
      assign node_sig[LEAVES+k] = pdl_i[N_CLASSES-1-k];
    end else begin : g_const
      assign node_sig[LEAVES+k] = ~phase_i;
    end
  end

  for (genvar i = 1; i < LEAVES; i++) begin : g_arb
    arbiter u_arb (
      .phase_i   (phase_i),
      .input_up  (node_sig[2*i]),
      .input_lo  (node_sig[2*i+1]),
      .completion(node_sig[i]),
      .output_o  (node_out[i])
    );
  end

  assign completion_o = node_sig[1];

  // Decode: follow the winning branch from the root to a leaf.
  always_comb begin
    int unsigned idx;
    idx = 1;
    for (int unsigned l = 0; l < LEVELS; l++) begin
      idx = 2 * idx + int'(node_out[idx]);
    end
    idx = idx - LEAVES;
    if (idx < N_CLASSES) class_o = CW'(N_CLASSES - 1 - idx);
    else                 class_o = '0;
  end
endmodule
