// neuron_unit -- the centralized Neuron Unit.
//
// All neuron state lives here: the Neuron State SRAM holds, per local
// (post-neuron) index, {membrane potential, global index, output flag}. A
// four-stage pipeline updates one neuron per cycle, one stage per cycle:
//   Loading State   a valid ME packet {local index, current} reads the state
//   Leakage         V - (V >>> shift), the leak (1 - alpha) * V with alpha a
//                   power of two
//   Accumulation    V_upd = leak + current (saturating)
//   Threshold & WB  spike when V_upd > V_th; write back V_reset on a spike,
//                   V_upd otherwise; on a spike send an MC spike packet
//                   (ctrl = 01, global index) to the Spike Handler and, when
//                   the output flag is set, to the output buffer as well.
// The ME end packet travels down the same pipeline, so it leaves after the
// last neuron of the timestep; it becomes an MC end packet on both outputs.
// The spike packet appears on int_*/out_* four cycles after its ME packet
// was presented. Each neuron receives one merged packet per timestep, so
// the pipeline has no read-after-write hazard. V_reset, V_th and the shift
// are static inputs (set at configuration time).
// Initialization: a select packet with index UNIT_ID selects the unit;
// following data packets carry IDX_W bits each, packed LSB-first into
// state words that are written from local index 0 upward.
// The stages, the state fields and the shift-based leak follow the
// architecture; the strict '>' comparison follows its Neuron Unit
// description (its LIF equations use '>='); saturation and the
// initialization packing are this design's choices.
module neuron_unit
  import supra_pkg::*;
#(
  parameter int unsigned N       = 910,
  parameter int unsigned NP      = 126,
  parameter int unsigned W_W     = 4,
  parameter int unsigned K       = 3,
  parameter int unsigned SH_W    = 3,
  parameter int unsigned UNIT_ID = 33,
  localparam int unsigned IDX_W  = $clog2(N),
  localparam int unsigned W_LI   = $clog2(NP),
  localparam int unsigned W_MP   = K * W_W - W_LI
) (
  input  logic             clk,
  input  logic             rst_n,
  // ME packet from the root of the ME tree
  input  logic [W_LI-1:0]  me_idx,
  input  logic [W_MP-1:0]  me_cur,
  // initialization packets (taken from the MC root)
  input  mc_ctrl_e         mc_ctrl,
  input  logic [IDX_W-1:0] mc_idx,
  // neuron parameters
  input  logic [W_MP-1:0]  v_reset,
  input  logic [W_MP-1:0]  v_th,
  input  logic [SH_W-1:0]  shift,
  // to the Spike Handler / Internal Buffer
  output logic             int_valid,
  output mc_ctrl_e         int_ctrl,
  output logic [IDX_W-1:0] int_idx,
  // to the output buffer
  output logic             out_valid,
  output mc_ctrl_e         out_ctrl,
  output logic [IDX_W-1:0] out_idx
);
  localparam int unsigned W_ST  = W_MP + IDX_W + 1;
  localparam int unsigned WPE   = (W_ST + IDX_W - 1) / IDX_W;
  localparam int unsigned ACC_W = WPE * IDX_W;
  localparam logic [W_LI-1:0]  LI_END  = W_LI'(end_index(W_LI));
  localparam logic [W_LI-1:0]  LI_INV  = W_LI'(invalid_index(W_LI));
  localparam logic [IDX_W-1:0] IDX_END = IDX_W'(end_index(IDX_W));

  typedef struct packed {
    logic [W_MP-1:0]  vm;
    logic [IDX_W-1:0] gidx;
    logic             out_flag;
  } state_t;

  // --------------------------------------------------------- state memory
  logic            st_ren, st_wen;
  logic [W_LI-1:0] st_raddr, st_waddr;
  state_t          st_rdata, st_wdata;
  sram_1r1w #(.DEPTH(NP), .WIDTH(W_ST)) u_state_sram (
    .clk, .ren(st_ren), .raddr(st_raddr), .rdata(st_rdata),
    .wen(st_wen), .waddr(st_waddr), .wdata(st_wdata));

  // --------------------------------------------------------- pipeline regs
  logic            in_v, in_e;
  assign in_v = (me_idx != LI_INV) && (me_idx != LI_END);
  assign in_e = (me_idx == LI_END);

  // after Loading State
  logic            l_v, l_e;
  logic [W_LI-1:0] l_idx;
  logic [W_MP-1:0] l_cur;
  // after Leakage
  logic            k_v, k_e;
  logic [W_LI-1:0] k_idx;
  logic [W_MP-1:0] k_cur, k_leak;
  logic [IDX_W-1:0] k_gidx;
  logic            k_out;
  // after Accumulation
  logic            a_v, a_e;
  logic [W_LI-1:0] a_idx;
  logic [W_MP-1:0] a_upd;
  logic [IDX_W-1:0] a_gidx;
  logic            a_out;

  logic signed [W_MP-1:0] vm_s, leak_s;
  assign vm_s   = $signed(st_rdata.vm);
  assign leak_s = vm_s - (vm_s >>> shift);

  logic fire;
  assign fire = a_v && ($signed(a_upd) > $signed(v_th));

  // ------------------------------------------------------- initialization
  logic             sel;
  logic [ACC_W-1:0] acc, acc_next;
  logic [$clog2(WPE+1)-1:0] words;
  logic [W_LI-1:0]  ptr;
  logic             init_wr;
  assign acc_next = {mc_idx, acc[ACC_W-1:IDX_W]};
  assign init_wr  = (mc_ctrl == CTRL_DATA) && sel && (32'(words) == WPE - 1);

  always_comb begin
    st_ren   = in_v;
    st_raddr = me_idx;
    st_wen   = a_v;
    st_waddr = a_idx;
    st_wdata = '{vm: fire ? v_reset : a_upd, gidx: a_gidx, out_flag: a_out};
    if (!a_v && init_wr) begin
      st_wen   = 1'b1;
      st_waddr = ptr;
      st_wdata = state_t'(acc_next >> (ACC_W - WPE * IDX_W));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      l_v <= 1'b0; l_e <= 1'b0; l_idx <= '0; l_cur <= '0;
      k_v <= 1'b0; k_e <= 1'b0; k_idx <= '0; k_cur <= '0; k_leak <= '0; k_gidx <= '0; k_out <= 1'b0;
      a_v <= 1'b0; a_e <= 1'b0; a_idx <= '0; a_upd <= '0; a_gidx <= '0; a_out <= 1'b0;
      int_valid <= 1'b0; int_ctrl <= CTRL_INVALID; int_idx <= '0;
      out_valid <= 1'b0; out_ctrl <= CTRL_INVALID; out_idx <= '0;
      sel <= 1'b0; acc <= '0; words <= '0; ptr <= '0;
    end else begin
      // Loading State
      l_v <= in_v; l_e <= in_e; l_idx <= me_idx; l_cur <= me_cur;
      // Leakage
      k_v <= l_v; k_e <= l_e; k_idx <= l_idx; k_cur <= l_cur;
      k_leak <= leak_s; k_gidx <= st_rdata.gidx; k_out <= st_rdata.out_flag;
      // Accumulation
      a_v <= k_v; a_e <= k_e; a_idx <= k_idx; a_gidx <= k_gidx; a_out <= k_out;
      a_upd <= W_MP'(sat_add(32'(k_leak), 32'(k_cur), W_MP));
      // Thresholding & Write-Back
      int_valid <= fire || a_e;
      int_ctrl  <= (fire || a_e) ? CTRL_SPIKE : CTRL_INVALID;
      int_idx   <= a_e ? IDX_END : a_gidx;
      out_valid <= (fire && a_out) || a_e;
      out_ctrl  <= ((fire && a_out) || a_e) ? CTRL_SPIKE : CTRL_INVALID;
      out_idx   <= a_e ? IDX_END : a_gidx;

      if (mc_ctrl == CTRL_SELECT) begin
        sel   <= (32'(mc_idx) == UNIT_ID);
        words <= '0;
        ptr   <= '0;
      end else if ((mc_ctrl == CTRL_DATA) && sel) begin
        acc   <= acc_next;
        words <= init_wr ? '0 : words + 1'b1;
        if (init_wr) ptr <= ptr + 1'b1;
      end
    end
  end

  a_no_init_during_run: assert property (@(posedge clk) disable iff (!rst_n) !(a_v && init_wr))
    else $error("neuron_unit: initialization data while neurons are being updated");
endmodule
