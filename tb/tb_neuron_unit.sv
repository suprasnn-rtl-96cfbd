// tb_neuron_unit -- self-checking test of the Neuron Unit (default size:
// 126 post-neurons, 5-bit potentials, 10-bit global indices).
// Initializes the state of NN neurons (random potential, global index and
// output flag) through select/data packets, then runs timesteps in which a
// random subset of neurons receives one merged current each, with invalid
// packets in between, followed by the end packet. Outputs are compared
// with a LIF model (V <- sat(V - (V >>> shift) + I); spike when V > V_th,
// then V <- V_reset) at the exact pipeline latency: the packet for an input
// presented at clock edge n appears after edge n+3.
`timescale 1ns/1ps
module tb_neuron_unit;
  import supra_pkg::*;
  localparam int N = 910, NP = 126, IDX_W = 10, W_LI = 7, W_MP = 5, NN = 50, ID = 33, LAT = 4;
  localparam int VTH = 3, VRST = -2, SH = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [W_LI-1:0] me_idx = 7'd126;
  logic [W_MP-1:0] me_cur = '0;
  mc_ctrl_e mc_ctrl = CTRL_INVALID, int_ctrl, out_ctrl;
  logic [IDX_W-1:0] mc_idx = '0, int_idx, out_idx;
  logic int_valid, out_valid;
  neuron_unit #(.N(N), .NP(NP), .UNIT_ID(ID)) dut (
    .clk, .rst_n, .me_idx, .me_cur, .mc_ctrl, .mc_idx,
    .v_reset(W_MP'(VRST)), .v_th(W_MP'(VTH)), .shift(3'(SH)),
    .int_valid, .int_ctrl, .int_idx, .out_valid, .out_ctrl, .out_idx);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  int vm [NN], gidx [NN];
  bit oflag [NN];
  // expected outputs per cycle: -1 none, -2 end, else global index; plus out flag
  int q_i [$];
  bit q_o [$];
  int spikes = 0, filtered = 0, resets = 0, sats = 0;

  function automatic int sat(int v); return v > 15 ? 15 : (v < -16 ? -16 : v); endfunction

  task automatic cycle(input int li, input int cur);
    int ei, ci;
    bit eo;
    @(negedge clk);
    ci = q_i.pop_front(); eo = q_o.pop_front();
    if (ci == -1) check(!int_valid && !out_valid, "no output expected");
    else if (ci == -2) check(int_valid && int_idx == 10'h3FF && out_valid && out_idx == 10'h3FF &&
                             int_ctrl == CTRL_SPIKE && out_ctrl == CTRL_SPIKE, "end packet on both outputs");
    else begin
      check(int_valid && int_ctrl == CTRL_SPIKE && int_idx == IDX_W'(ci),
            $sformatf("spike of %0d expected, got %0d/%0d", ci, int_valid, int_idx));
      check(out_valid == eo && (!eo || out_idx == IDX_W'(ci)), "output-buffer copy follows the output flag");
    end
    me_idx = W_LI'(li); me_cur = W_MP'(cur);
    ei = -1; eo = 0;
    if (li == 127) ei = -2;
    else if (li < NN) begin
      int raw, upd;
      raw = vm[li] - (vm[li] >>> SH) + cur;
      upd = sat(raw);
      if (upd != raw) sats++;
      if (upd > VTH) begin
        ei = gidx[li]; eo = oflag[li]; vm[li] = VRST; spikes++; resets++;
        if (!eo) filtered++;
      end else vm[li] = upd;
    end
    q_i.push_back(ei); q_o.push_back(eo);
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk); mc_ctrl = CTRL_SELECT; mc_idx = ID;
    for (int l = 0; l < NN; l++) begin
      logic [15:0] w;
      vm[l] = int'($urandom % 32) - 16; gidx[l] = 100 + 7 * l; oflag[l] = $urandom % 2;
      w = {5'(vm[l]), 10'(gidx[l]), oflag[l]};
      @(negedge clk); mc_ctrl = CTRL_DATA; mc_idx = w[9:0];
      @(negedge clk); mc_ctrl = CTRL_DATA; mc_idx = {4'd0, w[15:10]};
    end
    @(negedge clk); mc_ctrl = CTRL_SELECT; mc_idx = 10'd999;
    @(negedge clk); mc_ctrl = CTRL_INVALID;
    for (int k = 0; k < LAT; k++) begin q_i.push_back(-1); q_o.push_back(0); end
    for (int t = 0; t < 40; t++) begin
      for (int l = 0; l < NN; l++) begin
        if ($urandom % 3 != 0) cycle(l, int'($urandom % 17) - 6);
        if ($urandom % 4 == 0) cycle(126, 0);
      end
      cycle(127, 0);
    end
    repeat (LAT) cycle(126, 0);
    check(spikes > 0 && filtered > 0 && sats > 0, "spikes, filtered spikes and saturation occurred");
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
