// tb_spike_handler -- self-checking test of the Spike Handler.
// Random Neuron Unit packets, external packets (with end packets), buffer
// full and step pulses; every cycle the buffer write and ext_ready are
// compared with a model: Neuron Unit packets always win, the external side
// is stalled while the Neuron Unit writes, while the buffer is full and
// after an external end packet until step.
`timescale 1ns/1ps
module tb_spike_handler;
  import supra_pkg::*;
  localparam int IDX_W = 10;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic nu_valid = 0, ext_valid = 0, step = 0, buf_full = 0, ext_ready, buf_push;
  mc_ctrl_e nu_ctrl = CTRL_INVALID, ext_ctrl = CTRL_INVALID;
  logic [IDX_W-1:0] nu_idx = '0, ext_idx = '0;
  logic [IDX_W+1:0] buf_din;
  spike_handler #(.IDX_W(IDX_W)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  bit done = 0;
  int n_nu = 0, n_ext = 0, n_block_nu = 0, n_block_full = 0, n_block_end = 0;
  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 4000; i++) begin
      bit er, take;
      @(negedge clk);
      buf_full  = $urandom % 8 == 0;
      nu_valid  = !buf_full && ($urandom % 3 == 0);
      nu_ctrl   = CTRL_SPIKE; nu_idx = ($urandom % 10 == 0) ? 10'h3FF : IDX_W'($urandom % 900);
      ext_valid = $urandom % 4 != 0;
      ext_ctrl  = mc_ctrl_e'(1 + $urandom % 3);
      ext_idx   = ($urandom % 12 == 0) ? 10'h3FF : IDX_W'($urandom % 900);
      step      = $urandom % 20 == 0;
      #1;
      er   = !nu_valid && !buf_full && !done;
      take = ext_valid && er;
      check(ext_ready == er, $sformatf("cycle %0d: ext_ready %0d expected %0d", i, ext_ready, er));
      check(buf_push == (nu_valid || take), "buffer write");
      if (nu_valid) begin
        n_nu++;
        check(buf_din == {nu_ctrl, nu_idx}, "Neuron Unit packet written");
      end else if (take) begin
        n_ext++;
        check(buf_din == {ext_ctrl, ext_idx}, "external packet written");
      end
      if (ext_valid && nu_valid) n_block_nu++;
      if (ext_valid && buf_full) n_block_full++;
      if (ext_valid && done && !nu_valid && !buf_full) n_block_end++;
      if (take && ext_ctrl == CTRL_SPIKE && ext_idx == 10'h3FF) done = 1;
      else if (step) done = 0;
    end
    check(n_nu > 0 && n_ext > 0 && n_block_nu > 0 && n_block_full > 0 && n_block_end > 0,
          "all arbitration cases exercised");
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
