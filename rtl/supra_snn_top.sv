// supra_snn_top -- the SupraSNN core.
//
// A spiking-network engine that parallelizes at the level of synapses.
// Spike packets travel in a loop:
//   input interface -> Spike Handler -> Internal Buffer -> Packet Injector
//   -> Routing Unit -> MC tree -> M SPUs -> ME tree -> Neuron Unit
//   -> Spike Handler (next timestep) and output buffer -> output interface
// A timestep has a spike phase, in which the injector sends the spikes of
// the last timestep and the external input spikes down the MC tree into the
// SPUs' Spike Memories, and a compute phase, started by one end packet, in
// which every SPU walks its Operation Table in lockstep with the others and
// the ME tree adds their partial currents on the way to the Neuron Unit. The
// Neuron Unit updates each neuron (LIF) and sends the new spikes back. The
// next timestep starts when the injector has seen both the Neuron Unit's and
// the input's end packet.
//
// Interface: ext_* is a valid/ready input stream of MC packets {ctrl, index}
// (spikes, one end packet per timestep, initialization packets); obuf_* pops
// the output buffer (spikes of neurons flagged as outputs, and one end packet
// per timestep); v_reset, v_th and shift are the static neuron parameters.
// obuf_overflow is sticky and set when the output buffer was full while the
// Neuron Unit wrote to it. Unit indices for initialization: SPU i uses 2i
// (Operation Table) and 2i+1 (Unified Memory), the Routing Unit 2M, the
// Neuron Unit 2M+1.
//
// The defaults are the architecture's MNIST configuration (16 SPUs, 910
// neurons, 126 post-neurons, 128-line Unified Memory, 661-entry Operation
// Table, 4-bit weights, 3 weights per line). The block structure and its
// wiring follow the architecture; the handshakes, buffer depths and unit
// numbering are this design's choices.
module supra_snn_top
  import supra_pkg::*;
#(
  parameter int unsigned M          = 16,
  parameter int unsigned N          = 910,
  parameter int unsigned NP         = 126,
  parameter int unsigned S_UM       = 128,
  parameter int unsigned S_OT       = 661,
  parameter int unsigned W_W        = 4,
  parameter int unsigned K          = 3,
  parameter int unsigned W_SM       = 4,
  parameter int unsigned SH_W       = 3,
  parameter int unsigned IBUF_DEPTH = 1024,
  parameter int unsigned OBUF_DEPTH = 256,
  localparam int unsigned IDX_W = $clog2(N),
  localparam int unsigned W_LI  = $clog2(NP),
  localparam int unsigned W_MP  = K * W_W - W_LI
) (
  input  logic             clk,
  input  logic             rst_n,
  // input interface
  input  logic             ext_valid,
  output logic             ext_ready,
  input  mc_ctrl_e         ext_ctrl,
  input  logic [IDX_W-1:0] ext_idx,
  // output buffer interface
  input  logic             obuf_pop,
  output logic             obuf_empty,
  output mc_ctrl_e         obuf_ctrl,
  output logic [IDX_W-1:0] obuf_idx,
  output logic             obuf_overflow,
  // neuron parameters
  input  logic [W_MP-1:0]  v_reset,
  input  logic [W_MP-1:0]  v_th,
  input  logic [SH_W-1:0]  shift,
  // status
  output logic [31:0]      timestep
);
  localparam int unsigned PKT_W = IDX_W + 2;

  // Neuron Unit -> Spike Handler / output buffer
  logic             nu_int_valid, nu_out_valid;
  mc_ctrl_e         nu_int_ctrl, nu_out_ctrl;
  logic [IDX_W-1:0] nu_int_idx, nu_out_idx;
  // Spike Handler -> Internal Buffer -> Packet Injector
  logic             ib_push, ib_full, ib_pop, ib_empty;
  logic [PKT_W-1:0] ib_din, ib_dout;
  logic             step;
  // Packet Injector -> Routing Unit -> MC tree
  logic             pi_valid;
  mc_ctrl_e         pi_ctrl;
  logic [IDX_W-1:0] pi_idx;
  mc_ctrl_e         ru_ctrl;
  logic [IDX_W-1:0] ru_idx;
  logic [M-1:0]     ru_bs;
  mc_ctrl_e         leaf_ctrl [M];
  logic [M-1:0][IDX_W-1:0] leaf_idx;
  // SPUs -> ME tree -> Neuron Unit
  logic [M-1:0]            spu_ready;
  logic [M-1:0][W_LI-1:0]  spu_me_idx;
  logic [M-1:0][W_MP-1:0]  spu_me_cur;
  logic [W_LI-1:0]         me_idx;
  logic [W_MP-1:0]         me_cur;

  spike_handler #(.IDX_W(IDX_W)) u_spike_handler (
    .clk, .rst_n,
    .nu_valid(nu_int_valid), .nu_ctrl(nu_int_ctrl), .nu_idx(nu_int_idx),
    .ext_valid, .ext_ready, .ext_ctrl, .ext_idx,
    .step, .buf_push(ib_push), .buf_din(ib_din), .buf_full(ib_full));

  logic [$clog2(IBUF_DEPTH+1)-1:0] ib_count;
  pkt_fifo #(.DEPTH(IBUF_DEPTH), .WIDTH(PKT_W)) u_internal_buffer (
    .clk, .rst_n, .push(ib_push), .din(ib_din), .full(ib_full),
    .pop(ib_pop), .dout(ib_dout), .empty(ib_empty), .count(ib_count));

  packet_injector #(.IDX_W(IDX_W)) u_packet_injector (
    .clk, .rst_n, .buf_empty(ib_empty), .buf_dout(ib_dout), .buf_pop(ib_pop),
    .spu_ready(&spu_ready), .out_valid(pi_valid), .out_ctrl(pi_ctrl), .out_idx(pi_idx),
    .step, .timestep);

  routing_unit #(.M(M), .N(N), .UNIT_ID(2 * M)) u_routing_unit (
    .clk, .rst_n, .in_valid(pi_valid), .in_ctrl(pi_ctrl), .in_idx(pi_idx),
    .out_ctrl(ru_ctrl), .out_idx(ru_idx), .out_bs(ru_bs));

  mc_tree #(.M(M), .IDX_W(IDX_W)) u_mc_tree (
    .clk, .rst_n, .root_ctrl(ru_ctrl), .root_idx(ru_idx), .root_bs(ru_bs),
    .leaf_ctrl, .leaf_idx);

  for (genvar j = 0; j < M; j++) begin : g_spu
    spu #(.N(N), .NP(NP), .S_UM(S_UM), .S_OT(S_OT), .W_W(W_W), .K(K),
          .W_SM(W_SM), .SPU_ID(j)) u_spu (
      .clk, .rst_n, .mc_ctrl(leaf_ctrl[j]), .mc_idx(leaf_idx[j]),
      .ready(spu_ready[j]), .me_idx(spu_me_idx[j]), .me_cur(spu_me_cur[j]));
  end

  me_tree #(.M(M), .W_LI(W_LI), .W_M(W_MP)) u_me_tree (
    .clk, .rst_n, .leaf_idx(spu_me_idx), .leaf_cur(spu_me_cur),
    .root_idx(me_idx), .root_cur(me_cur));

  neuron_unit #(.N(N), .NP(NP), .W_W(W_W), .K(K), .SH_W(SH_W), .UNIT_ID(2 * M + 1)) u_neuron_unit (
    .clk, .rst_n, .me_idx, .me_cur, .mc_ctrl(ru_ctrl), .mc_idx(ru_idx),
    .v_reset, .v_th, .shift,
    .int_valid(nu_int_valid), .int_ctrl(nu_int_ctrl), .int_idx(nu_int_idx),
    .out_valid(nu_out_valid), .out_ctrl(nu_out_ctrl), .out_idx(nu_out_idx));

  logic             ob_full;
  logic [PKT_W-1:0] ob_dout;
  logic [$clog2(OBUF_DEPTH+1)-1:0] ob_count;
  pkt_fifo #(.DEPTH(OBUF_DEPTH), .WIDTH(PKT_W)) u_output_buffer (
    .clk, .rst_n, .push(nu_out_valid && !ob_full), .din({nu_out_ctrl, nu_out_idx}),
    .full(ob_full), .pop(obuf_pop && !obuf_empty), .dout(ob_dout), .empty(obuf_empty),
    .count(ob_count));
  assign obuf_ctrl = mc_ctrl_e'(ob_dout[PKT_W-1:IDX_W]);
  assign obuf_idx  = ob_dout[IDX_W-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                      obuf_overflow <= 1'b0;
    else if (nu_out_valid && ob_full) obuf_overflow <= 1'b1;
  end
endmodule
