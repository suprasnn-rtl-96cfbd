// tb_sram_1r1w -- self-checking test of the one-read/one-write memory.
// Random reads and writes against a reference array: read data must appear
// one cycle after ren, stay unchanged while ren is low, and a read of the
// address written in the same cycle must return the old word.
`timescale 1ns/1ps
module tb_sram_1r1w;
  localparam int DEPTH = 24, WIDTH = 9, AW = $clog2(DEPTH);
  logic clk = 0;
  always #5 clk = ~clk;
  logic ren = 0, wen = 0;
  logic [AW-1:0] raddr = '0, waddr = '0;
  logic [WIDTH-1:0] wdata = '0, rdata;
  sram_1r1w #(.DEPTH(DEPTH), .WIDTH(WIDTH)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  logic [WIDTH-1:0] model [DEPTH];
  logic [WIDTH-1:0] expect_q;
  int rdw = 0;
  initial begin
    // fill every word first (the memory is not reset)
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk); wen = 1; waddr = AW'(a); wdata = WIDTH'($urandom); model[a] = wdata;
    end
    @(negedge clk); wen = 0;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      ren = $urandom % 2; raddr = AW'($urandom % DEPTH);
      wen = $urandom % 2; waddr = (($urandom % 4) == 0) ? raddr : AW'($urandom % DEPTH);
      wdata = WIDTH'($urandom);
      if (ren) expect_q = model[raddr];          // old word, also on read-during-write
      if (ren && wen && raddr == waddr) rdw++;
      if (wen) model[waddr] = wdata;
      @(posedge clk); #1;
      check(rdata == expect_q, $sformatf("cycle %0d: rdata %h expected %h", i, rdata, expect_q));
    end
    check(rdw > 0, "read-during-write happened");
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
