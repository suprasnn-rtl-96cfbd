// tb_packet_injector -- self-checking test of the Packet Injector.
// The Internal Buffer is modelled as a queue filled with random spikes,
// initialization packets and end packets (one end per source and timestep),
// and the SPUs as a ready signal that drops DROP cycles after the injector
// sends the end packet and rises again BUSY cycles later. Checks: packets
// leave in order, one cycle after their pop; nothing is popped while the
// SPUs are busy or while the injector waits for them to leave ready; end
// packets are absorbed, and one end packet, one step pulse and one timestep
// increment are issued per two of them (per one after reset).
`timescale 1ns/1ps
module tb_packet_injector;
  import supra_pkg::*;
  localparam int IDX_W = 10, DROP = 3, BUSY = 25;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic buf_empty, buf_pop, spu_ready, out_valid, step;
  logic [IDX_W+1:0] buf_dout;
  mc_ctrl_e out_ctrl;
  logic [IDX_W-1:0] out_idx;
  logic [31:0] timestep;
  packet_injector #(.IDX_W(IDX_W)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  logic [IDX_W+1:0] bq [$];      // Internal Buffer contents
  logic [IDX_W+1:0] exp_q [$];   // packets expected at the output
  bit hold = 0;                  // test stalls the buffer (empty) sometimes
  assign buf_empty = (bq.size() == 0) || hold;
  assign buf_dout  = bq.size() ? bq[0] : '0;

  // SPU model
  int cnt = -1;
  bit rdy = 1;
  assign spu_ready = rdy;
  int n_end_out = 0, n_steps = 0, pop_busy = 0, wait_cycles = 0;
  int ends_in_buf = 0;
  bit credit = 1;
  always @(posedge clk) if (rst_n) begin
    bit pp, pr;
    // sample what the injector sees at this edge, update the models just after it
    pp = buf_pop; pr = spu_ready;
    #1;
    // model of the barrier rule, evaluated on what was popped
    if (pp) begin
      logic [IDX_W+1:0] p;
      p = bq.pop_front();
      if (!pr) pop_busy++;
      if (p == {CTRL_SPIKE, 10'h3FF}) begin
        if (credit) begin exp_q.push_back(p); credit = 0; end
        else credit = 1;
      end else exp_q.push_back(p);
    end
    if (out_valid && out_ctrl == CTRL_SPIKE && out_idx == 10'h3FF) cnt = 0;
    else if (cnt >= 0) cnt++;
    if (cnt == DROP) rdy = 0;
    if (cnt == DROP + BUSY) begin rdy = 1; cnt = -1; end
    if (step) n_steps++;
  end

  // output checker: the packet popped at edge n leaves at edge n+1
  always @(negedge clk) if (rst_n) begin
    if (out_valid) begin
      logic [IDX_W+1:0] e;
      e = exp_q.size() ? exp_q.pop_front() : '1;
      check({out_ctrl, out_idx} == e, $sformatf("out %0d/%0d expected %h", out_ctrl, out_idx, e));
      if (out_idx == 10'h3FF && out_ctrl == CTRL_SPIKE) begin
        n_end_out++;
        check(step && timestep == 32'(n_end_out), $sformatf("step pulse and timestep %0d with end packet %0d", timestep, n_end_out));
      end
    end else check(exp_q.size() == 0 && !step, "no packet lost or delayed, no step without end packet");
    if (dut.state != 0) wait_cycles++;
  end

  task automatic add(input mc_ctrl_e c, input int x);
    bq.push_back({c, IDX_W'(x)});
  endtask

  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk);
    rst_n = 1;
    // initialization traffic, then first timestep (external end only)
    add(CTRL_SELECT, 3);
    for (int i = 0; i < 10; i++) add(CTRL_DATA, $urandom % 1024);
    for (int i = 0; i < 5; i++) add(CTRL_SPIKE, $urandom % 900);
    add(CTRL_SPIKE, 1023);
    for (int t = 0; t < 30; t++) begin
      // wait until the previous end packet has gone out, then model the
      // Neuron Unit spikes + end and the next step's external packets
      wait (bq.size() == 0);
      repeat ($urandom % 4) @(posedge clk);
      @(negedge clk);
      hold = ($urandom % 2);
      for (int i = 0; i < int'($urandom % 8); i++) add(CTRL_SPIKE, $urandom % 900);
      if (t % 2) begin add(CTRL_SPIKE, 1023); for (int i = 0; i < 3; i++) add(CTRL_SPIKE, $urandom % 900); add(CTRL_SPIKE, 1023); end
      else begin for (int i = 0; i < 3; i++) add(CTRL_SPIKE, $urandom % 900); add(CTRL_SPIKE, 1023); add(CTRL_SPIKE, 1023); end
      repeat (2) @(negedge clk);
      hold = 0;
    end
    wait (bq.size() == 0);
    repeat (DROP + BUSY + 10) @(posedge clk);
    check(n_end_out == 31 && n_steps == 31 && timestep == 31, $sformatf("%0d end packets, %0d steps, timestep %0d (expected 31)", n_end_out, n_steps, timestep));
    check(pop_busy == 0, "nothing popped while the SPUs were busy");
    check(wait_cycles > 0, "injector waited for the SPUs to leave ready");
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
