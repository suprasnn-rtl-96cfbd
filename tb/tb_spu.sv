// tb_spu -- self-checking test of one Synapse Processing Unit, at a reduced
// size (64 neurons, 16 post-neurons, 16-line Unified Memory, 24-entry
// Operation Table, 4-bit weights, K = 3).
// The Operation Table is filled with random synapses and NOPs; Pre End and
// Post End mark the last entry of each pre- and post-neuron. Each timestep
// random spikes are sent (including back-to-back spikes into the same
// Spike Memory row and repeated spikes), then the end packet. A sequential
// model walks the table: the weight is added to the post-neuron's partial
// current when the pre-neuron's spike bit is set, the bit is cleared on Pre
// End, and on Post End the current is sent and reset to zero. The ME packet
// of entry i must appear exactly 2*i + 4 cycles after the end packet was
// taken (two cycles per entry), invalid packets everywhere else, the end
// packet after the last entry, and ready must be low during the compute
// phase.
`timescale 1ns/1ps
module tb_spu;
  import supra_pkg::*;
  localparam int N = 64, NP = 16, S_UM = 16, S_OT = 24, W_W = 4, K = 3, W_SM = 4, ID = 3;
  localparam int IDX_W = 6, W_LI = 4, W_PA = 4, W_WA = 6, W_PC = 8, NPOST = 4, NPRE = 20, T = 12;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  mc_ctrl_e mc_ctrl = CTRL_INVALID;
  logic [IDX_W-1:0] mc_idx = '0;
  logic ready;
  logic [W_LI-1:0] me_idx;
  logic [W_PC-1:0] me_cur;
  spu #(.N(N), .NP(NP), .S_UM(S_UM), .S_OT(S_OT), .W_W(W_W), .K(K), .W_SM(W_SM), .SPU_ID(ID)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  task automatic put(input mc_ctrl_e c, input int x);
    @(negedge clk); mc_ctrl = c; mc_idx = IDX_W'(x);
  endtask

  // table
  int e_pre [S_OT], e_post [S_OT], e_w [S_OT];   // e_pre = -1: NOP
  bit e_pe [S_OT], e_qe [S_OT];
  int wv [6];
  int li [NPOST];
  bit sbit [N];
  int pc [NPOST];
  int n_nop = 0, n_clear = 0, n_skip = 0;

  function automatic int sat8(int v); return v > 127 ? 127 : (v < -128 ? -128 : v); endfunction

  initial begin
    int exp_cyc [$], exp_li [$], exp_cur [$];
    for (int i = 0; i < 6; i++) wv[i] = int'($urandom % 15) - 7;
    for (int p = 0; p < NPOST; p++) li[p] = 2 + 3 * p;
    for (int i = 0; i < S_OT; i++) begin
      if (i % 5 == 2 || $urandom % 6 == 0) e_pre[i] = -1;
      else e_pre[i] = int'($urandom % NPRE);
      e_post[i] = $urandom % NPOST; e_w[i] = $urandom % 6;
    end
    for (int i = 0; i < S_OT; i++) begin
      e_pe[i] = e_pre[i] >= 0; e_qe[i] = e_pre[i] >= 0;
      for (int j = i + 1; j < S_OT; j++) if (e_pre[j] >= 0) begin
        if (e_pre[j] == e_pre[i]) e_pe[i] = 0;
        if (e_post[j] == e_post[i]) e_qe[i] = 0;
      end
    end
    for (int n = 0; n < N; n++) sbit[n] = 0;
    for (int p = 0; p < NPOST; p++) pc[p] = 0;

    repeat (2) @(posedge clk);
    @(negedge clk); rst_n = 1;
    // Spike Memory clear sweep: ready stays low for one cycle per row
    @(negedge clk);
    check(!ready, "ready low during the clear sweep after reset");
    while (!ready) @(negedge clk);
    // Operation Table: {post addr, weight addr {line, sel}, spike addr, pre end, post end}
    put(CTRL_SELECT, 2 * ID);
    for (int i = 0; i < S_OT; i++) begin
      logic [17:0] en;
      if (e_pre[i] < 0) en = {4'd0, 6'd0, 6'd62, 2'b00};
      else en = {4'(2 + e_post[i]), 4'(e_w[i] / 3), 2'(e_w[i] % 3), 6'(e_pre[i]), e_pe[i], e_qe[i]};
      put(CTRL_DATA, en[5:0]); put(CTRL_DATA, en[11:6]); put(CTRL_DATA, en[17:12]);
    end
    // Unified Memory: lines 0-1 weights, lines 2.. post-neurons {local index, current}
    put(CTRL_SELECT, 2 * ID + 1);
    for (int l = 0; l < 2; l++) begin
      logic [11:0] line;
      line = {4'(wv[3*l + 2]), 4'(wv[3*l + 1]), 4'(wv[3*l])};
      put(CTRL_DATA, line[5:0]); put(CTRL_DATA, line[11:6]);
    end
    for (int p = 0; p < NPOST; p++) begin
      logic [11:0] line;
      line = {4'(li[p]), 8'd0};
      put(CTRL_DATA, line[5:0]); put(CTRL_DATA, line[11:6]);
    end
    // another SPU's table: must be ignored
    put(CTRL_SELECT, 0);
    for (int i = 0; i < 9; i++) put(CTRL_DATA, 6'h15);
    put(CTRL_INVALID, 0);

    for (int t = 0; t < T; t++) begin
      int ns, cyc;
      ns = $urandom % 12;
      for (int s = 0; s < ns; s++) begin
        int x;
        x = (s > 0 && $urandom % 3 == 0) ? ((int'(mc_idx) & ~3) | int'($urandom % 4)) : int'($urandom % NPRE);
        put(CTRL_SPIKE, x);
        sbit[x] = 1;
        check(ready, "ready during the spike phase");
      end
      if (t == 0) begin put(CTRL_SPIKE, 62); end   // invalid index: ignored
      // model of the compute phase
      exp_cyc.delete(); exp_li.delete(); exp_cur.delete();
      for (int i = 0; i < S_OT; i++) begin
        int p;
        if (e_pre[i] < 0) begin n_nop++; continue; end
        p = e_post[i];
        if (sbit[e_pre[i]]) pc[p] = sat8(pc[p] + wv[e_w[i]]);
        else n_skip++;
        if (e_pe[i]) begin if (sbit[e_pre[i]]) n_clear++; sbit[e_pre[i]] = 0; end
        if (e_qe[i]) begin
          exp_cyc.push_back(2 * i + 4); exp_li.push_back(li[p]); exp_cur.push_back(pc[p]);
          pc[p] = 0;
        end
      end
      put(CTRL_SPIKE, 63);
      @(negedge clk); mc_ctrl = CTRL_INVALID;
      // cyc = c: outputs registered c clock edges after the edge that took the end packet
      cyc = 0;
      while (1) begin
        if (me_idx == 4'd15) break;
        if (exp_cyc.size() && exp_cyc[0] == cyc) begin
          check(int'(me_idx) == exp_li[0] && int'($signed(me_cur)) == exp_cur[0],
                $sformatf("step %0d cycle %0d: ME %0d/%0d expected %0d/%0d", t, cyc, me_idx, $signed(me_cur), exp_li[0], exp_cur[0]));
          void'(exp_cyc.pop_front()); void'(exp_li.pop_front()); void'(exp_cur.pop_front());
        end else check(me_idx == 4'd14, $sformatf("step %0d cycle %0d: unexpected ME packet %0d", t, cyc, me_idx));
        check(!ready, "ready low during the compute phase");
        @(negedge clk); cyc++;
        if (cyc > 2 * S_OT + 20) break;
      end
      check(me_idx == 4'd15 && cyc == 2 * S_OT + 4, $sformatf("step %0d: end packet at cycle %0d (expected %0d)", t, cyc, 2 * S_OT + 4));
      check(exp_cyc.size() == 0, "every Post End produced an ME packet");
      @(negedge clk);
      check(ready, "ready again after the compute phase");
    end
    check(n_nop > 0 && n_clear > 0 && n_skip > 0, $sformatf("NOPs (%0d), spike-bit clears (%0d) and inactive synapses (%0d) occurred", n_nop, n_clear, n_skip));
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
