// me_tree -- the bufferless Merge (ME) tree.
//
// A complete binary tree of log2(M) levels of me_switch nodes. Leaf j takes
// the ME packet of SPU j every cycle; the root delivers, log2(M) cycles
// later, one packet carrying the sum of all partial currents that the SPUs
// sent for that neuron in the same cycle. Invalid packets fill empty slots,
// and the end packets that all SPUs send in the same cycle merge into one.
// The tree shape follows the architecture; node numbering is internal.
module me_tree
  import supra_pkg::*;
#(
  parameter int unsigned M    = 16,
  parameter int unsigned W_LI = 7,
  parameter int unsigned W_M  = 5
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [M-1:0][W_LI-1:0] leaf_idx,
  input  logic [M-1:0][W_M-1:0]  leaf_cur,
  output logic [W_LI-1:0]       root_idx,
  output logic [W_M-1:0]        root_cur
);
  localparam int unsigned LEVELS = $clog2(M);

  // Heap order: node 1 is the root output, node n combines 2n and 2n+1,
  // nodes M..2M-1 are the leaf inputs.
  logic [W_LI-1:0] n_idx [2*M];
  logic [W_M-1:0]  n_cur [2*M];

  assign n_idx[0] = W_LI'(invalid_index(W_LI));  // unused heap slot
  assign n_cur[0] = '0;
  for (genvar j = 0; j < M; j++) begin : g_leaf
    assign n_idx[M + j] = leaf_idx[j];
    assign n_cur[M + j] = leaf_cur[j];
  end

  for (genvar n = 1; n < M; n++) begin : g_node
    me_switch #(.W_LI(W_LI), .W_M(W_M)) u_sw (
      .clk, .rst_n,
      .l_idx(n_idx[2*n]),   .l_cur(n_cur[2*n]),
      .r_idx(n_idx[2*n+1]), .r_cur(n_cur[2*n+1]),
      .o_idx(n_idx[n]),     .o_cur(n_cur[n]));
  end

  assign root_idx = n_idx[1];
  assign root_cur = n_cur[1];

  if (LEVELS == 0) begin : g_check
    $error("me_tree needs M >= 2");
  end
endmodule
