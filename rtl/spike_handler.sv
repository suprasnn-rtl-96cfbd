// spike_handler -- writes Neuron Unit packets and off-chip input packets
// into the Internal Buffer.
//
// The Internal Buffer has one write port and two sources. Packets from the
// Neuron Unit (spikes and its end packet) cannot be stalled, because the
// Merge tree and the Neuron Unit pipeline have no buffers, so they always
// win. The off-chip input side uses a valid/ready handshake: a packet is
// taken in a cycle where ext_valid and ext_ready are both high. ext_ready is
// low while the Neuron Unit writes, while the buffer is full, and after an
// external end packet has been taken until the Packet Injector starts the
// next timestep (step). That last rule keeps at most one external end packet
// in the buffer, so the injector can count the two barriers of a timestep
// without tagging their source. Initialization packets (ctrl = 10/11) pass
// through like spikes. The routing of Neuron Unit packets through this block
// follows the architecture's overview figure; the arbitration and the
// handshake are this design's choices.
module spike_handler
  import supra_pkg::*;
#(
  parameter int unsigned IDX_W = 10
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             nu_valid,
  input  mc_ctrl_e         nu_ctrl,
  input  logic [IDX_W-1:0] nu_idx,
  input  logic             ext_valid,
  output logic             ext_ready,
  input  mc_ctrl_e         ext_ctrl,
  input  logic [IDX_W-1:0] ext_idx,
  input  logic             step,
  output logic             buf_push,
  output logic [IDX_W+1:0] buf_din,
  input  logic             buf_full
);
  localparam logic [IDX_W-1:0] IDX_END = IDX_W'(end_index(IDX_W));

  logic ext_done;   // external end packet of this timestep already taken
  logic ext_take;

  assign ext_ready = !nu_valid && !buf_full && !ext_done;
  assign ext_take  = ext_valid && ext_ready;
  assign buf_push  = (nu_valid && !buf_full) || ext_take;
  assign buf_din   = nu_valid ? {nu_ctrl, nu_idx} : {ext_ctrl, ext_idx};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                                                   ext_done <= 1'b0;
    else if (ext_take && ext_ctrl == CTRL_SPIKE && ext_idx == IDX_END) ext_done <= 1'b1;
    else if (step)                                                ext_done <= 1'b0;
  end

  a_nu_not_lost: assert property (@(posedge clk) disable iff (!rst_n) !(nu_valid && buf_full))
    else $error("spike_handler: Internal Buffer full, Neuron Unit packet lost");
endmodule
