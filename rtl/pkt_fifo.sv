// pkt_fifo -- first-word-fall-through packet FIFO.
//
// Used twice in the core: as the Internal Buffer, which holds the MC packets
// of one timestep (spikes, end packets, initialization packets) until the
// Packet Injector sends them, and as the output buffer towards the off-chip
// reader. The architecture names both buffers but not their structure; this
// FIFO is the simplest one that fits: the storage is a sram_1r1w, and the
// SRAM's read register serves as the head, visible on dout whenever empty
// is low, so one word can be pushed and one popped every cycle. push into a
// full FIFO and pop of an empty one are ignored (and flagged by assertions).
// A word pushed into an empty FIFO is visible two cycles later.
module pkt_fifo #(
  parameter int unsigned DEPTH = 1024,
  parameter int unsigned WIDTH = 12,
  localparam int unsigned AW = $clog2(DEPTH),
  localparam int unsigned CW = $clog2(DEPTH + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             push,
  input  logic [WIDTH-1:0] din,
  output logic             full,
  input  logic             pop,
  output logic [WIDTH-1:0] dout,
  output logic             empty,
  output logic [CW-1:0]    count
);
  // Words stored in the SRAM; the word on the SRAM read register is the head.
  logic [AW-1:0] wptr, rptr;
  logic [CW-1:0] mcount;
  logic          head_valid;   // dout holds a word
  logic          do_push, do_pop, do_read;

  assign do_push = push && !full;
  assign do_pop  = pop && head_valid;
  // Fetch the next word whenever the head is free or being popped.
  assign do_read = (mcount != 0) && (!head_valid || do_pop);

  assign count = mcount + CW'(head_valid);
  assign full  = (count == CW'(DEPTH));
  assign empty = !head_valid;

  // The SRAM holds its read register while ren is low, so it doubles as the
  // output register of the FIFO.
  sram_1r1w #(.DEPTH(DEPTH), .WIDTH(WIDTH)) u_mem (
    .clk, .ren(do_read), .raddr(rptr), .rdata(dout),
    .wen(do_push), .waddr(wptr), .wdata(din));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr <= '0; rptr <= '0; mcount <= '0; head_valid <= 1'b0;
    end else begin
      if (do_push) wptr <= (32'(wptr) == DEPTH - 1) ? '0 : wptr + 1'b1;
      if (do_read) rptr <= (32'(rptr) == DEPTH - 1) ? '0 : rptr + 1'b1;
      mcount <= mcount + CW'(do_push) - CW'(do_read);
      if (do_read)     head_valid <= 1'b1;
      else if (do_pop) head_valid <= 1'b0;
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) !(push && full))
    else $error("pkt_fifo: push into a full FIFO");
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(pop && !head_valid))
    else $error("pkt_fifo: pop of an empty FIFO");
endmodule
