// tb_supra_snn_mnist -- the core at its default size running a network of
// the size of its main workload: a 784-116-10 feedforward network whose
// synapses survive with probability DENS_PCT % (about 10,400 non-zero
// synapses, the count of the quantized MNIST network), weights in +-1..3
// (two Unified Memory weight lines, leaving 126 post lines per SPU),
// an excitatory-biased output layer, alpha = 0.25, over T timesteps of
// random rate-coded input (25 % of the pixels spike per timestep).
//
// The synapses of every neuron are dealt round-robin over the 16 SPUs (a
// balanced partition); a greedy scheduler then gives every post-neuron an
// ME slot and puts each SPU's synapses of that neuron in earlier free slots
// of its 661-entry Operation Table, the last one in the slot itself. With
// this many synapses the 5-bit partial currents saturate, so the reference
// model reproduces the hardware's order of operations: each SPU's
// saturating accumulation in table order, the ME tree's saturating merges
// in tree order, then the LIF update (shift leak, saturating 5-bit
// potential, strict '>' threshold). Output spikes are compared per
// timestep; the compute-phase length, merges, NOPs, spike-bit clears,
// input stalls, filtered spikes and neuron spikes are checked and counted.
`timescale 1ns/1ps
module tb_supra_snn_mnist;
  import supra_pkg::*;

  localparam int M = 16, N = 910, NP = 126, S_OT = 661, IDX_W = 10, W_LI = 7, W_MP = 5;
  localparam int NIN = 784, NHID = 116, NOUT = 10, NH = NHID + NOUT, T = 6, DENS_PCT = 11;
  localparam int SHIFT = 2;           // alpha = 0.25
  localparam int VTH = 4, VRESET = 0;
  localparam int MAXSLOT = S_OT;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic             ext_valid = 0, ext_ready;
  mc_ctrl_e         ext_ctrl = CTRL_INVALID;
  logic [IDX_W-1:0] ext_idx = '0;
  logic             obuf_pop, obuf_empty, obuf_overflow;
  mc_ctrl_e         obuf_ctrl;
  logic [IDX_W-1:0] obuf_idx;
  logic [31:0]      timestep;

  supra_snn_top dut (
    .clk, .rst_n, .ext_valid, .ext_ready, .ext_ctrl, .ext_idx,
    .obuf_pop, .obuf_empty, .obuf_ctrl, .obuf_idx, .obuf_overflow,
    .v_reset(W_MP'(VRESET)), .v_th(W_MP'(VTH)), .shift(3'(SHIFT)), .timestep);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // ------------------------------------------------------------- network
  // Neurons 0..NIN-1 are inputs, NIN..NIN+NH-1 hidden (local index h).
  int syn_pre [$], syn_post [$], syn_w [$], syn_spu [$];
  bit is_out [NH];

  // schedule: per SPU, per slot: synapse id or -1 (NOP)
  int slot_syn [M][MAXSLOT];
  int nslots;

  function automatic int sat5(input int v);
    if (v > 15) return 15;
    if (v < -16) return -16;
    return v;
  endfunction

  task automatic build_network();
    int rr = 0;
    for (int h = 0; h < NH; h++) begin
      int npre;
      is_out[h] = (h >= NHID);
      npre = (h < NHID) ? NIN : NHID;
      for (int p = 0; p < npre; p++) if ($urandom % 100 < DENS_PCT) begin
        int w;
        do w = int'($urandom % 7) - 3; while (w == 0);
        if (h >= NHID && $urandom % 4 != 0) w = 1 + int'($urandom % 3);   // excitatory-biased output layer
        syn_pre.push_back((h < NHID) ? p : NIN + p); syn_post.push_back(h); syn_w.push_back(w);
        syn_spu.push_back(rr % M); rr++;
      end
    end
  endtask

  task automatic schedule();
    int last_t = -1;
    for (int s = 0; s < M; s++) for (int t = 0; t < MAXSLOT; t++) slot_syn[s][t] = -1;
    for (int h = 0; h < NH; h++) begin
      int cnt [M];
      int tp;
      bit ok;
      for (int s = 0; s < M; s++) cnt[s] = 0;
      foreach (syn_post[e]) if (syn_post[e] == h) cnt[syn_spu[e]]++;
      // smallest slot after the previous post-neuron with enough free slots before it
      tp = last_t + 1;
      do begin
        ok = 1;
        for (int s = 0; s < M; s++) if (cnt[s] > 0) begin
          int fr = 0;
          for (int t = 0; t < tp; t++) if (slot_syn[s][t] < 0) fr++;
          if (fr < cnt[s] - 1) ok = 0;
        end
        if (!ok) tp++;
      end while (!ok);
      for (int s = 0; s < M; s++) if (cnt[s] > 0) begin
        int placed = 0;
        foreach (syn_post[e]) if (syn_post[e] == h && syn_spu[e] == s) begin
          if (placed == 0) slot_syn[s][tp] = e;
          else begin
            for (int t = 0; t < tp; t++) if (slot_syn[s][t] < 0) begin slot_syn[s][t] = e; break; end
          end
          placed++;
        end
      end
      last_t = tp;
    end
    nslots = last_t + 1;
  endtask

  // ----------------------------------------------------- memory images
  int um_nw [M];                 // weight count per SPU (distinct values)
  int um_wval [M][16];
  int post_line [M][NH];         // Unified Memory line of post-neuron h on SPU s, -1 if none
  int n_ops = 0, n_nops = 0;

  function automatic int weight_addr(int s, int w);
    for (int i = 0; i < um_nw[s]; i++) if (um_wval[s][i] == w) return ((i / 3) << 2) | (i % 3);
    return -1;
  endfunction

  task automatic build_images();
    for (int s = 0; s < M; s++) begin
      int nl;
      um_nw[s] = 0;
      foreach (syn_spu[e]) if (syn_spu[e] == s) begin
        bit found = 0;
        for (int i = 0; i < um_nw[s]; i++) if (um_wval[s][i] == syn_w[e]) found = 1;
        if (!found) begin um_wval[s][um_nw[s]] = syn_w[e]; um_nw[s]++; end
      end
      nl = (um_nw[s] + 2) / 3;
      for (int h = 0; h < NH; h++) post_line[s][h] = -1;
      foreach (syn_spu[e]) if (syn_spu[e] == s && post_line[s][syn_post[e]] < 0) begin
        post_line[s][syn_post[e]] = nl; nl++;
      end
    end
  endtask

  function automatic logic [27:0] ot_entry(int s, int t);
    int e = slot_syn[s][t];
    bit pre_end = 1, post_end;
    if (e < 0) return {7'd0, 9'd0, 10'd1022, 1'b0, 1'b0};
    post_end = 1;
    for (int u = t + 1; u < S_OT; u++) begin
      int f = slot_syn[s][u];
      if (f >= 0 && syn_pre[f] == syn_pre[e]) pre_end = 0;
      if (f >= 0 && syn_post[f] == syn_post[e]) post_end = 0;
    end
    return {7'(post_line[s][syn_post[e]]), 9'(weight_addr(s, syn_w[e])), 10'(syn_pre[e]), pre_end, post_end};
  endfunction

  // ------------------------------------------------------- input driver
  int stalls = 0;
  task automatic send(input mc_ctrl_e c, input int idx);
    // Drive and sample at the falling edge; the packet is taken at the next rising edge.
    @(negedge clk);
    ext_valid = 1; ext_ctrl = c; ext_idx = IDX_W'(idx);
    while (!ext_ready) begin stalls++; @(negedge clk); end
    @(posedge clk);
    ext_valid <= 0; ext_ctrl <= CTRL_INVALID;
  endtask

  task automatic send_words(input logic [29:0] v, input int nw);
    for (int i = 0; i < nw; i++) send(CTRL_DATA, int'(v[i*10 +: 10]));
  endtask

  // ---------------------------------------------------- reference model
  bit ext_sp [T][NIN];
  bit fired  [T][NH];
  int n_sat = 0, n_out_fired = 0;   // saturating additions, output spikes in the reference
  function automatic int spike_of(int k, int g);
    if (g < NIN) return ext_sp[k][g];
    return (k > 0) && fired[k-1][g - NIN];
  endfunction

  task automatic reference();
    int v [NH];
    bit has_in [NH];
    for (int h = 0; h < NH; h++) begin v[h] = 0; has_in[h] = 0; end
    foreach (syn_post[e]) has_in[syn_post[e]] = 1;
    for (int k = 0; k < T; k++) begin
      int pc [M][NH], part [M][NH];
      bit pv [M][NH];
      for (int s = 0; s < M; s++) for (int h = 0; h < NH; h++) begin pc[s][h] = 0; pv[s][h] = 0; end
      // every SPU in table order
      for (int s = 0; s < M; s++) for (int t = 0; t < S_OT; t++) begin
        int e, h;
        e = slot_syn[s][t];
        if (e < 0) continue;
        h = syn_post[e];
        if (spike_of(k, syn_pre[e])) begin
          if (sat5(pc[s][h] + syn_w[e]) != pc[s][h] + syn_w[e]) n_sat++;
          pc[s][h] = sat5(pc[s][h] + syn_w[e]);
        end
        if (ot_entry(s, t) & 1) begin part[s][h] = pc[s][h]; pv[s][h] = 1; pc[s][h] = 0; end
      end
      for (int h = 0; h < NH; h++) begin
        int nv [2*M];
        bit nb [2*M];
        int cur;
        fired[k][h] = 0;
        if (!has_in[h]) continue;
        // ME tree in heap order: node n merges 2n and 2n+1, leaves M..2M-1
        for (int j = 0; j < M; j++) begin nv[M + j] = part[j][h]; nb[M + j] = pv[j][h]; end
        for (int n = M - 1; n >= 1; n--) begin
          nb[n] = nb[2*n] || nb[2*n+1];
          nv[n] = (nb[2*n] && nb[2*n+1]) ? sat5(nv[2*n] + nv[2*n+1]) : (nb[2*n] ? nv[2*n] : nv[2*n+1]);
          if (nb[2*n] && nb[2*n+1] && nv[n] != nv[2*n] + nv[2*n+1]) n_sat++;
        end
        cur = nv[1];
        begin
          int upd;
          upd = sat5(v[h] - (v[h] >>> SHIFT) + cur);
          fired[k][h] = (upd > VTH);
          if (fired[k][h] && is_out[h]) n_out_fired++;
          v[h] = fired[k][h] ? VRESET : upd;
        end
      end
    end
  endtask

  // ------------------------------------------------------ output monitor
  bit got [T][NH];
  int got_end = 0, bad_idx = 0, dup = 0;
  assign obuf_pop = !obuf_empty;
  always @(posedge clk) if (rst_n && !obuf_empty) begin
    if (obuf_ctrl == CTRL_SPIKE && obuf_idx == 10'h3FF) got_end <= got_end + 1;
    else if (obuf_ctrl == CTRL_SPIKE && int'(obuf_idx) >= NIN && int'(obuf_idx) < NIN + NH && got_end < T) begin
      if (got[got_end][int'(obuf_idx) - NIN]) dup++;
      got[got_end][int'(obuf_idx) - NIN] = 1;
    end else bad_idx++;
  end

  // --------------------------------------------------- mechanism counters
  int merges = 0, nops_seen = 0, clears = 0, filtered = 0, nu_spikes = 0;
  always @(posedge clk) if (rst_n) begin
    for (int a = 0; a < M; a++) for (int b = a + 1; b < M; b++)
      if (dut.spu_me_idx[a] == dut.spu_me_idx[b] && dut.spu_me_idx[a] < 7'(NP)) begin
        merges++; break;
      end
    if (dut.nu_int_valid && dut.nu_int_idx != 10'h3FF) begin
      nu_spikes++;
      if (!dut.nu_out_valid) filtered++;
    end
  end
  for (genvar j = 0; j < M; j++) begin : g_mon
    always @(posedge clk) if (rst_n) begin
      if (dut.g_spu[j].u_spu.v_d && dut.g_spu[j].u_spu.d_nop) nops_seen++;
      if (dut.g_spu[j].u_spu.v_d && !dut.g_spu[j].u_spu.d_nop && dut.g_spu[j].u_spu.op_d.pre_end) clears++;
    end
  end

  // compute-phase length: end packet issued -> Neuron Unit end packet
  int step_cyc = 0, phase_len [$];
  int cyc = 0;
  always @(posedge clk) begin
    cyc++;
    if (dut.step) step_cyc = cyc;
    if (rst_n && dut.nu_int_valid && dut.nu_int_idx == 10'h3FF) phase_len.push_back(cyc - step_cyc);
  end

  // --------------------------------------------------------------- main
  initial begin
    void'($urandom(32'd12345));
    build_network();
    schedule();
    build_images();
    for (int k = 0; k < T; k++) for (int i = 0; i < NIN; i++) ext_sp[k][i] = ($urandom % 100) < 25;
    reference();
    for (int k = 0; k < T; k++) for (int h = 0; h < NH; h++) got[k][h] = 0;
    $display("network: %0d synapses, schedule length %0d slots", syn_pre.size(), nslots);
    $display("reference: %0d saturating additions, %0d output spikes", n_sat, n_out_fired);
    check(nslots <= S_OT, "schedule fits the Operation Table");
    check(n_sat > 0 && n_out_fired > 0, "workload saturates partial currents and drives the outputs");

    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    // Operation Tables and Unified Memories
    for (int s = 0; s < M; s++) begin
      send(CTRL_SELECT, 2 * s);
      for (int t = 0; t < S_OT; t++) begin
        logic [27:0] en;
        en = ot_entry(s, t);
        if (slot_syn[s][t] < 0) n_nops++; else n_ops++;
        send_words(30'(en), 3);
      end
      send(CTRL_SELECT, 2 * s + 1);
      for (int l = 0; l < (um_nw[s] + 2) / 3; l++) begin
        logic [11:0] line;
        line = '0;
        for (int k = 0; k < 3; k++) if (3 * l + k < um_nw[s]) line[k*4 +: 4] = 4'(um_wval[s][3*l + k]);
        send_words(30'(line), 2);
      end
      for (int h = 0; h < NH; h++) if (post_line[s][h] >= 0) begin
        // lines are written in order, so pad up to the post line
        send_words(30'({7'(h), 5'd0}), 2);
      end
    end
    // Routing Unit: bitstring of every neuron up to the last one used
    send(CTRL_SELECT, 2 * M);
    for (int g = 0; g < NIN + NH; g++) begin
      logic [15:0] bs;
      bs = '0;
      foreach (syn_pre[e]) if (syn_pre[e] == g) bs[M - 1 - syn_spu[e]] = 1'b1;
      send_words(30'(bs), 2);
    end
    // Neuron Unit
    send(CTRL_SELECT, 2 * M + 1);
    for (int h = 0; h < NH; h++) send_words(30'({5'(0), 10'(NIN + h), is_out[h]}), 2);
    send(CTRL_SELECT, 1000);   // deselect everything

    // timesteps
    for (int k = 0; k < T; k++) begin
      for (int i = 0; i < NIN; i++) if (ext_sp[k][i]) send(CTRL_SPIKE, i);
      send(CTRL_SPIKE, 10'h3FF);
    end
    wait (got_end == T);
    repeat (20) @(posedge clk);

    for (int k = 0; k < T; k++) for (int h = 0; h < NH; h++)
      check(got[k][h] == (fired[k][h] && is_out[h]),
            $sformatf("step %0d neuron %0d: got %0d expected %0d", k, NIN + h, got[k][h], fired[k][h] && is_out[h]));
    check(bad_idx == 0 && dup == 0, "no unexpected or duplicated output packets");
    check(!obuf_overflow, "output buffer never overflowed");
    check(timestep == T, $sformatf("timestep counter %0d", timestep));
    foreach (phase_len[i])
      check(phase_len[i] >= 2 * S_OT && phase_len[i] <= 2 * S_OT + 40,
            $sformatf("compute phase %0d took %0d cycles (2*S_OT = %0d)", i, phase_len[i], 2 * S_OT));
    check(phase_len.size() == T, "one Neuron Unit end packet per timestep");
    $display("mechanisms: merges=%0d nops=%0d preend_clears=%0d input_stalls=%0d filtered_spikes=%0d nu_spikes=%0d timesteps=%0d",
             merges, nops_seen, clears, stalls, filtered, nu_spikes, timestep);
    check(merges > 0, "ME tree merged partial currents");
    check(nops_seen > 0, "SPUs executed NOPs");
    check(clears > 0, "Pre End cleared spike bits");
    check(stalls > 0, "input interface was stalled");
    check(filtered > 0, "spikes of non-output neurons stayed out of the output buffer");
    check(nu_spikes > 0, "neurons fired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
