// tb_mc_switch -- self-checking test of one Multi-Cast tree node (8 SPUs
// below it). Random enable, clear and packets; one cycle later the node must
// hold the packet (or an invalid packet after clear, or the old packet when
// neither is asserted), split the bitstring into halves and derive each
// child's enable from the OR of its half and its clear from the inverse.
`timescale 1ns/1ps
module tb_mc_switch;
  import supra_pkg::*;
  localparam int M = 8, IDX_W = 10;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_en = 0, in_clr = 0;
  mc_ctrl_e in_ctrl = CTRL_INVALID, out_ctrl;
  logic [IDX_W-1:0] in_idx = '0, out_idx;
  logic [M-1:0] in_bs = '0;
  logic [M/2-1:0] left_bs, right_bs;
  logic left_en, left_clr, right_en, right_clr;
  mc_switch #(.M(M), .IDX_W(IDX_W)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  mc_ctrl_e m_ctrl = CTRL_INVALID;
  logic [IDX_W-1:0] m_idx = '0;
  logic [M-1:0] m_bs = '0;
  int holds = 0, clears = 0;
  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      in_en = $urandom % 4 != 0; in_clr = $urandom % 6 == 0;
      in_ctrl = mc_ctrl_e'($urandom % 4); in_idx = IDX_W'($urandom);
      in_bs = ($urandom % 3 == 0) ? M'($urandom % 16) : M'($urandom);
      if (in_clr) begin m_ctrl = CTRL_INVALID; m_idx = '0; m_bs = '0; clears++; end
      else if (in_en) begin m_ctrl = in_ctrl; m_idx = in_idx; m_bs = in_bs; end
      else holds++;
      @(posedge clk); #1;
      check(out_ctrl == m_ctrl && out_idx == m_idx, $sformatf("cycle %0d: packet %0d/%0d expected %0d/%0d", i, out_ctrl, out_idx, m_ctrl, m_idx));
      check(left_bs == m_bs[M-1:M/2] && right_bs == m_bs[M/2-1:0], "bitstring halves");
      check(left_en == |m_bs[M-1:M/2] && left_clr == !(|m_bs[M-1:M/2]), "left en/clr");
      check(right_en == |m_bs[M/2-1:0] && right_clr == !(|m_bs[M/2-1:0]), "right en/clr");
    end
    check(holds > 0 && clears > 0, "hold and clear exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
