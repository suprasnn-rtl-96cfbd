// packet_injector -- sends the packets of the Internal Buffer into the
// MC tree and closes each timestep.
//
// While all SPUs report ready (spike phase) the injector pops one packet
// per cycle from the Internal Buffer and forwards it (registered) to the
// Routing Unit. End packets are not forwarded but counted: a timestep ends
// when two have been seen, one written by the Neuron Unit (its state updates
// are complete) and one by the Spike Handler (the external input of the
// step is complete). The injector then sends a single end packet, which
// starts the compute phase of every SPU, pulses step and increments
// timestep. It then waits until the SPUs have left the ready state before it
// sends anything else, so that no packet overtakes the barrier. Before the
// first timestep there is no Neuron Unit end packet, so after reset one end
// packet suffices. The two-barrier rule and the wait for SPU readiness
// follow the architecture; the one-packet-per-cycle rate, the reset credit
// and the wait for the ready drop are this design's choices.
module packet_injector
  import supra_pkg::*;
#(
  parameter int unsigned IDX_W = 10
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             buf_empty,
  input  logic [IDX_W+1:0] buf_dout,
  output logic             buf_pop,
  input  logic             spu_ready,
  output logic             out_valid,
  output mc_ctrl_e         out_ctrl,
  output logic [IDX_W-1:0] out_idx,
  output logic             step,
  output logic [31:0]      timestep
);
  localparam logic [IDX_W-1:0] IDX_END = IDX_W'(end_index(IDX_W));

  typedef enum logic [0:0] {S_SEND, S_WAIT_BUSY} state_e;
  state_e state;

  mc_ctrl_e         h_ctrl;
  logic [IDX_W-1:0] h_idx;
  logic             h_end;
  logic             ends_seen;   // one of the two end packets already popped

  assign h_ctrl  = mc_ctrl_e'(buf_dout[IDX_W+1:IDX_W]);
  assign h_idx   = buf_dout[IDX_W-1:0];
  assign h_end   = (h_ctrl == CTRL_SPIKE) && (h_idx == IDX_END);
  assign buf_pop = (state == S_SEND) && spu_ready && !buf_empty;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_SEND;
      ends_seen <= 1'b1;           // no Neuron Unit end before the first step
      out_valid <= 1'b0;
      out_ctrl  <= CTRL_INVALID;
      out_idx   <= '0;
      step      <= 1'b0;
      timestep  <= '0;
    end else begin
      out_valid <= 1'b0;
      out_ctrl  <= CTRL_INVALID;
      out_idx   <= '0;
      step      <= 1'b0;
      unique case (state)
        S_SEND: begin
          if (buf_pop) begin
            if (!h_end) begin
              out_valid <= 1'b1;
              out_ctrl  <= h_ctrl;
              out_idx   <= h_idx;
            end else if (!ends_seen) begin
              ends_seen <= 1'b1;
            end else begin
              ends_seen <= 1'b0;
              out_valid <= 1'b1;
              out_ctrl  <= CTRL_SPIKE;
              out_idx   <= IDX_END;
              step      <= 1'b1;
              timestep  <= timestep + 1;
              state     <= S_WAIT_BUSY;
            end
          end
        end
        S_WAIT_BUSY: if (!spu_ready) state <= S_SEND;
        default: state <= S_SEND;
      endcase
    end
  end
endmodule
