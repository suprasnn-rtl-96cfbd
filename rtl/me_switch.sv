// me_switch -- one node of the Merge (ME) tree.
//
// Each cycle the node takes one ME packet {local index, current} from its
// left and one from its right subtree and registers one packet for its
// parent:
//   * same valid index on both sides: the currents are added;
//   * one side carries the invalid index: the other packet passes unchanged
//     (index-select MUX: 0 = left, 1 = right);
//   * both sides carry the end index: one end packet goes on;
//   * otherwise (both invalid): an invalid packet goes on.
// Two different valid indices cannot occur under a correct schedule, which
// makes all partial currents of a neuron leave the SPUs in the same cycle;
// an assertion flags it and the node then emits an invalid packet. The node
// has no buffer: it is one register stage, one cycle of latency.
// The comparison, adder and index MUX follow the ME switch of the
// architecture; saturating the sum and the treatment of illegal input
// combinations are this design's choices.
module me_switch
  import supra_pkg::*;
#(
  parameter int unsigned W_LI = 7,  // local index width
  parameter int unsigned W_M  = 5   // current width
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [W_LI-1:0] l_idx,
  input  logic [W_M-1:0]  l_cur,
  input  logic [W_LI-1:0] r_idx,
  input  logic [W_M-1:0]  r_cur,
  output logic [W_LI-1:0] o_idx,
  output logic [W_M-1:0]  o_cur
);
  localparam logic [W_LI-1:0] LI_END = W_LI'(end_index(W_LI));
  localparam logic [W_LI-1:0] LI_INV = W_LI'(invalid_index(W_LI));

  logic l_inv, r_inv, l_end, r_end, l_val, r_val;
  assign l_inv = (l_idx == LI_INV);
  assign r_inv = (r_idx == LI_INV);
  assign l_end = (l_idx == LI_END);
  assign r_end = (r_idx == LI_END);
  assign l_val = !l_inv && !l_end;
  assign r_val = !r_inv && !r_end;

  // Control unit
  logic            pkt_en, pkt_init, sel_right, do_add;
  always_comb begin
    pkt_en = 1'b1; pkt_init = 1'b0; sel_right = 1'b0; do_add = 1'b0;
    if (l_val && r_val && (l_idx == r_idx)) do_add = 1'b1;
    else if (l_val && r_inv)                sel_right = 1'b0;
    else if (r_val && l_inv)                sel_right = 1'b1;
    else if (l_end && r_end)                sel_right = 1'b0;
    else                                    pkt_init = 1'b1;
  end

  logic [W_M-1:0] sum;
  assign sum = W_M'(sat_add(32'(l_cur), 32'(r_cur), W_M));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      o_idx <= LI_INV;
      o_cur <= '0;
    end else if (pkt_init) begin
      o_idx <= LI_INV;
      o_cur <= '0;
    end else if (pkt_en) begin
      o_idx <= sel_right ? r_idx : l_idx;
      o_cur <= do_add ? sum : (sel_right ? r_cur : l_cur);
    end
  end

  a_aligned: assert property (@(posedge clk) disable iff (!rst_n)
      !(l_val && r_val && (l_idx != r_idx)))
    else $error("me_switch: two different neurons meet (schedule not aligned)");
  a_end_aligned: assert property (@(posedge clk) disable iff (!rst_n) (l_end == r_end))
    else $error("me_switch: end packets not aligned");
endmodule
