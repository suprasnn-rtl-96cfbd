// sram_1r1w -- synchronous memory with one read port and one write port.
//
// Every on-chip memory of the core (routing bitstrings, Operation Table,
// Spike Memory, Unified Memory, Neuron State SRAM, packet FIFOs) is one of
// these. The architecture calls for single-read-port memories so that they
// map onto FPGA block RAM; the exact port behaviour is this design's choice:
// read data appears one cycle after ren and is held while ren is low, and a
// read of the address being written in the same cycle returns the old word.
// The contents are not reset; the owning block initializes what it reads.
module sram_1r1w #(
  parameter int unsigned DEPTH = 128,
  parameter int unsigned WIDTH = 12,
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             ren,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata,
  input  logic             wen,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wen && (32'(waddr) < DEPTH)) mem[waddr] <= wdata;
    if (ren) rdata <= (32'(raddr) < DEPTH) ? mem[raddr] : '0;
  end
endmodule
