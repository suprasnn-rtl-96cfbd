// mc_tree -- the Multi-Cast (MC) tree that carries packets to the SPUs.
//
// A complete binary tree of log2(M) levels of mc_switch nodes. The root is
// loaded every cycle with the packet and M-bit routing bitstring produced by
// the Routing Unit. At every node the bitstring is halved: the left child
// takes the upper half, the right child the lower half, and a child is only
// loaded when its half has a set bit. The last level drives the M leaves:
// leaf j (SPU j, counted from the left) sees the packet when bit M-1-j of the
// bitstring was set and an invalid packet (ctrl = 00) otherwise. Packets
// are never stalled: the tree is a synchronous pipeline, and a packet
// reaches the leaves exactly log2(M) cycles after it enters the root.
// The tree shape and the halving rule follow the architecture; the heap
// numbering of the nodes is internal to this file.
module mc_tree
  import supra_pkg::*;
#(
  parameter int unsigned M     = 16,
  parameter int unsigned IDX_W = 10
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  mc_ctrl_e                  root_ctrl,
  input  logic [IDX_W-1:0]          root_idx,
  input  logic [M-1:0]              root_bs,
  output mc_ctrl_e                  leaf_ctrl [M],
  output logic [M-1:0][IDX_W-1:0]   leaf_idx
);
  localparam int unsigned LEVELS = $clog2(M);

  // Inputs of every node in heap order: node 1 is the root, node n has
  // children 2n and 2n+1, nodes M..2M-1 are the leaves. Bitstrings are kept
  // M bits wide; a node at level l uses the low M>>l bits.
  mc_ctrl_e         n_ctrl [2*M];
  logic [IDX_W-1:0] n_idx  [2*M];
  logic [M-1:0]     n_bs   [2*M];
  logic             n_en   [2*M];
  logic             n_clr  [2*M];

  assign n_ctrl[1] = root_ctrl;
  assign n_idx[1]  = root_idx;
  assign n_bs[1]   = root_bs;
  assign n_en[1]   = 1'b1;
  assign n_clr[1]  = 1'b0;
  assign n_ctrl[0] = CTRL_INVALID;  // unused heap slot
  assign n_idx[0]  = '0;
  assign n_bs[0]   = '0;
  assign n_en[0]   = 1'b0;
  assign n_clr[0]  = 1'b0;

  for (genvar l = 0; l < LEVELS; l++) begin : g_level
    localparam int unsigned W = M >> l;  // bitstring width at this level
    for (genvar i = 0; i < (1 << l); i++) begin : g_node
      localparam int unsigned N = (1 << l) + i;
      logic [W/2-1:0] lbs, rbs;
      mc_ctrl_e       octrl;
      logic [IDX_W-1:0] oidx;
      logic           len, lclr, ren, rclr;

      mc_switch #(.M(W), .IDX_W(IDX_W)) u_sw (
        .clk, .rst_n,
        .in_en(n_en[N]), .in_clr(n_clr[N]),
        .in_ctrl(n_ctrl[N]), .in_idx(n_idx[N]), .in_bs(n_bs[N][W-1:0]),
        .out_ctrl(octrl), .out_idx(oidx),
        .left_bs(lbs), .right_bs(rbs),
        .left_en(len), .left_clr(lclr), .right_en(ren), .right_clr(rclr));

      assign n_ctrl[2*N]   = octrl;
      assign n_ctrl[2*N+1] = octrl;
      assign n_idx[2*N]    = oidx;
      assign n_idx[2*N+1]  = oidx;
      assign n_bs[2*N]     = M'(lbs);
      assign n_bs[2*N+1]   = M'(rbs);
      assign n_en[2*N]     = len;
      assign n_en[2*N+1]   = ren;
      assign n_clr[2*N]    = lclr;
      assign n_clr[2*N+1]  = rclr;
    end
  end

  for (genvar j = 0; j < M; j++) begin : g_leaf
    assign leaf_ctrl[j] = n_en[M + j] ? n_ctrl[M + j] : CTRL_INVALID;
    assign leaf_idx[j]  = n_idx[M + j];
  end
endmodule
