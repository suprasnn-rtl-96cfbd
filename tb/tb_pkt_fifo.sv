// tb_pkt_fifo -- self-checking test of the first-word-fall-through FIFO.
// Random pushes and pops against a queue model; checks the head word, empty,
// full and count every cycle, the two-cycle latency of a word pushed into an
// empty FIFO, and that one push and one pop per cycle are sustained.
`timescale 1ns/1ps
module tb_pkt_fifo;
  localparam int DEPTH = 8, WIDTH = 12, CW = $clog2(DEPTH + 1);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic push = 0, pop = 0, full, empty;
  logic [WIDTH-1:0] din = '0, dout;
  logic [CW-1:0] count;
  pkt_fifo #(.DEPTH(DEPTH), .WIDTH(WIDTH)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  logic [WIDTH-1:0] q [$];
  int fulls = 0;
  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    // latency: push into empty, visible two cycles later
    @(negedge clk); push = 1; din = 12'h5A5;
    @(negedge clk); push = 0;
    check(empty, "word not yet visible one cycle after push");
    @(negedge clk);
    check(!empty && dout == 12'h5A5 && count == 1, "word visible two cycles after push");
    pop = 1;
    @(negedge clk); pop = 0;
    check(empty && count == 0, "empty after pop");
    // throughput: fill half, then push and pop every cycle
    for (int i = 0; i < 4; i++) begin @(negedge clk); push = 1; din = WIDTH'(i); end
    @(negedge clk); push = 0;
    @(negedge clk);
    begin
      int popped = 0;
      for (int i = 0; i < 40; i++) begin
        check(!empty && dout == WIDTH'(popped), $sformatf("streaming word %0d: %h", popped, dout));
        push = 1; din = WIDTH'(i + 4); pop = 1;
        @(negedge clk);
        popped++;
      end
      push = 0; pop = 0;
      for (int i = 0; i < 4; i++) begin
        @(negedge clk);
        check(!empty && dout == WIDTH'(popped), "drain in order");
        pop = 1; @(negedge clk); pop = 0; popped++;
      end
      @(negedge clk);
      check(empty && count == 0, "empty after drain");
    end
    // random traffic against a queue model (count, full, head)
    q.delete();
    for (int i = 0; i < 4000; i++) begin
      @(negedge clk);
      check(count == CW'(q.size()), $sformatf("count %0d expected %0d", count, q.size()));
      check(full == (q.size() == DEPTH), "full flag");
      if (full) fulls++;
      if (!empty) check(q.size() > 0 && dout == q[0], $sformatf("head %h expected %h", dout, q.size() ? q[0] : '0));
      push = !full && ($urandom % 100 < ((i / 500) % 2 ? 70 : 35));
      pop  = !empty && ($urandom % 100 < ((i / 500) % 2 ? 35 : 70));
      din  = WIDTH'($urandom);
      if (pop) void'(q.pop_front());
      if (push) q.push_back(din);
    end
    check(fulls > 0, "FIFO became full");
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
