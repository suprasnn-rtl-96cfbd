// mc_switch -- one node of the Multi-Cast (MC) tree.
//
// The node holds one MC packet register: ctrl header, neuron index and the
// routing bitstring of the M SPUs below this node. The register loads when
// its parent asserts en and is cleared to an invalid packet (ctrl = 00, zero
// bitstring) when the parent asserts clr. Its outputs feed the two children:
// both see the same ctrl and index, the left child gets bitstring[M-1:M/2]
// and the right child bitstring[M/2-1:0]. An OR reduction of each half gives
// that child's en and its inverse the child's clr, so a packet only travels
// towards subtrees that hold at least one targeted SPU. This structure
// follows the MC switch of the architecture; giving clr priority over en and
// resetting the register to an invalid packet are this design's choices.
// Timing: one register per node, so each tree level adds one cycle.
module mc_switch
  import supra_pkg::*;
#(
  parameter int unsigned M     = 16,  // SPUs in this subtree (power of two, >= 2)
  parameter int unsigned IDX_W = 10   // global neuron index width
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_en,
  input  logic             in_clr,
  input  mc_ctrl_e         in_ctrl,
  input  logic [IDX_W-1:0] in_idx,
  input  logic [M-1:0]     in_bs,
  output mc_ctrl_e         out_ctrl,
  output logic [IDX_W-1:0] out_idx,
  output logic [M/2-1:0]   left_bs,
  output logic [M/2-1:0]   right_bs,
  output logic             left_en,
  output logic             left_clr,
  output logic             right_en,
  output logic             right_clr
);
  logic [M-1:0] bs_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_ctrl <= CTRL_INVALID;
      out_idx  <= '0;
      bs_q     <= '0;
    end else if (in_clr) begin
      out_ctrl <= CTRL_INVALID;
      out_idx  <= '0;
      bs_q     <= '0;
    end else if (in_en) begin
      out_ctrl <= in_ctrl;
      out_idx  <= in_idx;
      bs_q     <= in_bs;
    end
  end

  assign left_bs   = bs_q[M-1:M/2];
  assign right_bs  = bs_q[M/2-1:0];
  assign left_en   = |left_bs;
  assign left_clr  = ~left_en;
  assign right_en  = |right_bs;
  assign right_clr = ~right_en;
endmodule
