// tb_routing_unit -- self-checking test of the Routing Unit (16 SPUs, 910
// neurons). Writes random bitstrings for the first NB neurons through
// select/data packets (two 10-bit data packets per bitstring, low bits
// first), checks that data sent while another unit is selected is ignored,
// then sends random packets and checks, one cycle later, the forwarded
// packet and its bitstring: the stored one for a spike, all ones for the end
// packet and for select/data, all zeros for invalid or no input.
`timescale 1ns/1ps
module tb_routing_unit;
  import supra_pkg::*;
  localparam int M = 16, N = 910, IDX_W = 10, NB = 60, ID = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0;
  mc_ctrl_e in_ctrl = CTRL_INVALID, out_ctrl;
  logic [IDX_W-1:0] in_idx = '0, out_idx;
  logic [M-1:0] out_bs;
  routing_unit #(.M(M), .N(N), .UNIT_ID(ID)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  task automatic put(input bit v, input mc_ctrl_e c, input int x);
    @(negedge clk); in_valid = v; in_ctrl = c; in_idx = IDX_W'(x);
  endtask

  logic [M-1:0] bs [NB];
  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    put(1, CTRL_SELECT, ID);
    for (int g = 0; g < NB; g++) begin
      bs[g] = M'($urandom);
      if (g == 5) bs[g] = '0;
      put(1, CTRL_DATA, bs[g][9:0]);
      put(1, CTRL_DATA, {4'd0, bs[g][15:10]});
    end
    // another unit selected: its data must not reach the bitstring memory
    put(1, CTRL_SELECT, 7);
    for (int g = 0; g < 8; g++) put(1, CTRL_DATA, 10'h3FF);
    put(0, CTRL_INVALID, 0);
    for (int i = 0; i < 3000; i++) begin
      bit v;
      mc_ctrl_e c;
      int x;
      logic [M-1:0] eb;
      v = $urandom % 8 != 0;
      c = ($urandom % 4 == 0) ? mc_ctrl_e'($urandom % 4) : CTRL_SPIKE;
      x = ($urandom % 10 == 0) ? 1023 : int'($urandom % NB);
      if (c == CTRL_SELECT) x = ($urandom % 2) ? 100 : 200;   // never re-select this unit
      put(v, c, x);
      if (!v || c == CTRL_INVALID) eb = '0;
      else if (c == CTRL_SPIKE) eb = (x == 1023) ? '1 : bs[x];
      else eb = '1;
      @(posedge clk); #1;
      check(out_ctrl == (v ? c : CTRL_INVALID) && (!v || out_idx == IDX_W'(x)) && out_bs == eb,
            $sformatf("in %0d/%0d/%0d: out %0d/%0d bs %h expected bs %h", v, c, x, out_ctrl, out_idx, out_bs, eb));
    end
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
