// routing_unit -- attaches the routing bitstring to every MC packet.
//
// A programmable SRAM holds one M-bit bitstring per neuron; bit M-1-j is
// set when SPU j (leaf j of the MC tree, counted from the left) holds at
// least one synapse whose pre-synaptic neuron is that neuron. Each packet
// from the Packet Injector is registered together with the SRAM word read
// at its index, one cycle of latency, and leaves as {ctrl, index, bitstring}
// for the root of the MC tree:
//   spike packet       bitstring read from the SRAM
//   end packet         all ones (every SPU must see the barrier)
//   select / data      all ones (initialization reaches every unit)
//   invalid / no input all zeros
// The unit is itself initialized by packets: a select packet with index
// UNIT_ID selects it, and each following data packet carries IDX_W bits,
// packed LSB-first; ceil(M/IDX_W) of them make one bitstring, written to
// neurons 0, 1, 2, ... in turn. The per-neuron bitstring SRAM follows the
// architecture; the broadcast rules and the packing of initialization data
// are this design's choices.
module routing_unit
  import supra_pkg::*;
#(
  parameter int unsigned M       = 16,
  parameter int unsigned N       = 910,
  parameter int unsigned UNIT_ID = 32,
  localparam int unsigned IDX_W  = $clog2(N)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  mc_ctrl_e         in_ctrl,
  input  logic [IDX_W-1:0] in_idx,
  output mc_ctrl_e         out_ctrl,
  output logic [IDX_W-1:0] out_idx,
  output logic [M-1:0]     out_bs
);
  localparam int unsigned WPE   = (M + IDX_W - 1) / IDX_W;  // data packets per bitstring
  localparam int unsigned ACC_W = WPE * IDX_W;
  localparam int unsigned AW    = $clog2(N);
  localparam logic [IDX_W-1:0] IDX_END = IDX_W'(end_index(IDX_W));

  mc_ctrl_e   ctrl_in;
  assign ctrl_in = in_valid ? in_ctrl : CTRL_INVALID;

  // Initialization
  logic             sel;
  logic [ACC_W-1:0] acc, acc_next;
  logic [$clog2(WPE+1)-1:0] words;
  logic [AW-1:0]    ptr;
  logic             wr;
  assign acc_next = {in_idx, acc[ACC_W-1:IDX_W]};
  assign wr       = (ctrl_in == CTRL_DATA) && sel && (32'(words) == WPE - 1);

  logic [M-1:0] rdata;
  sram_1r1w #(.DEPTH(N), .WIDTH(M)) u_bitstring_sram (
    .clk, .ren(ctrl_in == CTRL_SPIKE), .raddr(AW'(in_idx)), .rdata,
    .wen(wr), .waddr(ptr), .wdata(M'(acc_next >> (ACC_W - WPE * IDX_W))));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_ctrl <= CTRL_INVALID;
      out_idx  <= '0;
      sel <= 1'b0; acc <= '0; words <= '0; ptr <= '0;
    end else begin
      out_ctrl <= ctrl_in;
      out_idx  <= in_idx;
      if (ctrl_in == CTRL_SELECT) begin
        sel   <= (32'(in_idx) == UNIT_ID);
        words <= '0;
        ptr   <= '0;
      end else if ((ctrl_in == CTRL_DATA) && sel) begin
        acc   <= acc_next;
        words <= wr ? '0 : words + 1'b1;
        if (wr) ptr <= ptr + 1'b1;
      end
    end
  end

  always_comb begin
    unique case (out_ctrl)
      CTRL_SPIKE:   out_bs = (out_idx == IDX_END) ? '1 : rdata;
      CTRL_SELECT,
      CTRL_DATA:    out_bs = '1;
      default:      out_bs = '0;
    endcase
  end
endmodule
