// spu -- Synapse Processing Unit.
//
// An SPU owns a slice of the network's synapses and computes, every
// timestep, the partial input current that its synapses contribute to each
// post-synaptic neuron. It works in two phases.
//
// Spike phase (ready = 1). Spike packets from its MC-tree leaf set one bit per
// neuron in the Spike Memory, a bitmap of rows of W_SM bits: the low
// log2(W_SM) index bits pick the bit, the rest pick the row. The set is a
// read-modify-write; the write of the previous cycle is forwarded so that
// back-to-back spikes in one row are not lost. A spike packet carrying the
// end index starts the compute phase.
//
// Compute phase (ready = 0). An Operation Counter walks all S_OT entries of
// the Operation Table. An entry is {Post Addr, Weight Addr, Spike Addr,
// Pre End, Post End}. The Unified Memory has a single read port, so each
// entry takes two reads: first the weight line (K weights, the low
// log2(K) bits of Weight Addr choose one), then the post-neuron line
// {local index, partial current}. The pipeline overlaps entries so that one
// completes every two cycles:
//   cycle A  fetch the entry from the Operation Table
//   cycle B  read the weight line
//   cycle C  register the weight; read the post line and the spike row
//   cycle D  execute/write back: if the spike bit is set, add the weight to
//            the partial current and write it back; on Pre End clear the
//            spike bit; on Post End write 0 instead and send
//            {local index, current} into the ME tree.
// Entry i+1 starts two cycles after entry i, so its reads always see entry
// i's writes. An entry whose Spike Addr is the invalid index is a NOP. After
// the last entry the SPU sends one end packet into the ME tree and returns
// to the spike phase. The ME output is registered and carries the invalid
// index in every cycle without a Post End, so all SPUs stay in lockstep.
//
// Initialization: a select packet (ctrl = 10) with index 2*SPU_ID selects the
// Operation Table, 2*SPU_ID+1 the Unified Memory; each following data
// packet (ctrl = 11) carries IDX_W bits, packed LSB-first into entries that
// are written from address 0 upward.
//
// Follows the architecture: the three stages, the five entry fields, the
// single-read-port Unified Memory with its address MUX, the spike MUX, the
// Post End zero MUX, the bitmap Spike Memory and 0.5 operations per cycle.
// This design's own choices: the NOP encoding, field and bit order inside
// entries and lines, the packing of initialization data, saturating
// arithmetic, the write forwarding in the Spike Memory and the sweep that
// clears the Spike Memory after reset (ready stays low until it is done).
module spu
  import supra_pkg::*;
#(
  parameter int unsigned N      = 910,  // maximum number of neurons
  parameter int unsigned NP     = 126,  // maximum number of post-neurons
  parameter int unsigned S_UM   = 128,  // Unified Memory depth
  parameter int unsigned S_OT   = 661,  // Operation Table depth
  parameter int unsigned W_W    = 4,    // weight width
  parameter int unsigned K      = 3,    // weights per Unified Memory line
  parameter int unsigned W_SM   = 4,    // Spike Memory row width (power of two)
  parameter int unsigned SPU_ID = 0,
  localparam int unsigned IDX_W  = $clog2(N),
  localparam int unsigned W_LI   = $clog2(NP),
  localparam int unsigned W_PA   = $clog2(S_UM),
  localparam int unsigned W_KS   = (K > 1) ? $clog2(K) : 1,
  localparam int unsigned W_WA   = W_PA + W_KS,
  localparam int unsigned LINE_W = K * W_W,
  localparam int unsigned W_PC   = LINE_W - W_LI
) (
  input  logic             clk,
  input  logic             rst_n,
  input  mc_ctrl_e         mc_ctrl,
  input  logic [IDX_W-1:0] mc_idx,
  output logic             ready,
  output logic [W_LI-1:0]  me_idx,
  output logic [W_PC-1:0]  me_cur
);
  localparam int unsigned OT_W    = W_PA + W_WA + IDX_W + 2;
  localparam int unsigned W_OPC   = (S_OT > 1) ? $clog2(S_OT) : 1;
  localparam int unsigned SMB     = $clog2(W_SM);
  localparam int unsigned SM_ROWS = (N + W_SM - 1) / W_SM;
  localparam int unsigned SM_AW   = (SM_ROWS > 1) ? $clog2(SM_ROWS) : 1;
  localparam int unsigned OT_AW   = W_OPC;
  localparam int unsigned OT_WPE  = (OT_W + IDX_W - 1) / IDX_W;    // data packets per entry
  localparam int unsigned UM_WPE  = (LINE_W + IDX_W - 1) / IDX_W;  // data packets per line
  localparam int unsigned ACC_W   = ((OT_WPE > UM_WPE) ? OT_WPE : UM_WPE) * IDX_W;
  localparam logic [IDX_W-1:0] IDX_END = IDX_W'(end_index(IDX_W));
  localparam logic [IDX_W-1:0] IDX_INV = IDX_W'(invalid_index(IDX_W));
  localparam logic [W_LI-1:0]  LI_END  = W_LI'(end_index(W_LI));
  localparam logic [W_LI-1:0]  LI_INV  = W_LI'(invalid_index(W_LI));

  typedef struct packed {
    logic [W_PA-1:0]  post_addr;
    logic [W_WA-1:0]  weight_addr;
    logic [IDX_W-1:0] spike_addr;
    logic             pre_end;
    logic             post_end;
  } op_t;

  typedef enum logic [1:0] {S_CLEAR, S_IDLE, S_RUN, S_END} state_e;
  state_e state;

  // ---------------------------------------------------------------- memories
  logic             ot_ren, ot_wen;
  logic [OT_AW-1:0] ot_raddr, ot_waddr;
  logic [OT_W-1:0]  ot_rdata, ot_wdata;
  logic             um_ren, um_wen;
  logic [W_PA-1:0]  um_raddr, um_waddr;
  logic [LINE_W-1:0] um_rdata, um_wdata;
  logic             sm_ren, sm_wen;
  logic [SM_AW-1:0] sm_raddr, sm_waddr;
  logic [W_SM-1:0]  sm_rdata, sm_wdata;

  sram_1r1w #(.DEPTH(S_OT), .WIDTH(OT_W)) u_op_table (
    .clk, .ren(ot_ren), .raddr(ot_raddr), .rdata(ot_rdata),
    .wen(ot_wen), .waddr(ot_waddr), .wdata(ot_wdata));
  sram_1r1w #(.DEPTH(S_UM), .WIDTH(LINE_W)) u_unified_mem (
    .clk, .ren(um_ren), .raddr(um_raddr), .rdata(um_rdata),
    .wen(um_wen), .waddr(um_waddr), .wdata(um_wdata));
  sram_1r1w #(.DEPTH(SM_ROWS), .WIDTH(W_SM)) u_spike_mem (
    .clk, .ren(sm_ren), .raddr(sm_raddr), .rdata(sm_rdata),
    .wen(sm_wen), .waddr(sm_waddr), .wdata(sm_wdata));

  // Spike Memory write of the previous cycle, forwarded into read-modify-writes.
  logic             smw_q_v;
  logic [SM_AW-1:0] smw_q_row;
  logic [W_SM-1:0]  smw_q_data;

  // ------------------------------------------------------------ spike phase
  logic             rx_spike, rx_end, rx_sel, rx_data;
  logic             set_v;            // a spike-set read was issued last cycle
  logic [IDX_W-1:0] set_idx;
  assign rx_spike = (state == S_IDLE) && (mc_ctrl == CTRL_SPIKE) &&
                    (mc_idx != IDX_END) && (mc_idx != IDX_INV);
  assign rx_end   = (state == S_IDLE) && (mc_ctrl == CTRL_SPIKE) && (mc_idx == IDX_END);
  assign rx_sel   = (mc_ctrl == CTRL_SELECT);
  assign rx_data  = (mc_ctrl == CTRL_DATA);

  // --------------------------------------------------------- initialization
  logic             sel_ot, sel_um;
  logic [ACC_W-1:0] acc;
  logic [$clog2(ACC_W/IDX_W+1)-1:0] words;
  logic [OT_AW-1:0] ot_ptr;
  logic [W_PA-1:0]  um_ptr;
  logic [ACC_W-1:0] acc_next;
  logic             ot_entry_done, um_line_done;
  assign acc_next      = {mc_idx, acc[ACC_W-1:IDX_W]};
  assign ot_entry_done = rx_data && sel_ot && (32'(words) == OT_WPE - 1);
  assign um_line_done  = rx_data && sel_um && (32'(words) == UM_WPE - 1);

  // ---------------------------------------------------------- compute phase
  logic [OT_AW-1:0] opc;        // Operation Counter
  logic             opc_done;   // all entries fetched (counter carry-out)
  logic             fetch;      // cycle A
  logic             v_b, v_c, v_d;
  op_t              op_b, op_d;
  logic [W_W-1:0]   w_q;        // registered weight (cycle C -> D)
  op_t              ot_op;
  assign ot_op = op_t'(ot_rdata);
  // Fetch every other cycle: never while the previous entry is in cycle B.
  assign fetch = (state == S_RUN) && !opc_done && !v_b;

  // Weight select from the weight line (cycle C).
  logic [W_KS-1:0] wsel;
  logic [W_W-1:0]  w_sel;
  assign wsel = op_b.weight_addr[W_KS-1:0];
  always_comb begin
    w_sel = '0;
    for (int k = 0; k < int'(K); k++)
      if (32'(wsel) == k) w_sel = um_rdata[k*W_W +: W_W];
  end

  // Execute (cycle D).
  logic            d_nop, d_spike;
  logic [W_SM-1:0] d_row;
  logic [W_LI-1:0] d_lidx;
  logic [W_PC-1:0] d_pc, d_sum, d_new, d_wb;
  logic [SMB > 0 ? SMB-1 : 0:0] d_bit;
  assign d_nop   = (op_d.spike_addr == IDX_INV);
  assign d_row   = (smw_q_v && smw_q_row == SM_AW'(op_d.spike_addr >> SMB)) ? smw_q_data : sm_rdata;
  assign d_bit   = (SMB > 0) ? op_d.spike_addr[(SMB > 0 ? SMB-1 : 0):0] : '0;
  assign d_spike = d_row[d_bit];
  assign d_lidx  = um_rdata[LINE_W-1 -: W_LI];
  assign d_pc    = um_rdata[W_PC-1:0];
  assign d_sum   = W_PC'(sat_add(32'($signed(d_pc)), 32'($signed(w_q)), W_PC));
  assign d_new   = d_spike ? d_sum : d_pc;          // spike MUX
  assign d_wb    = op_d.post_end ? '0 : d_new;      // Post End MUX

  // Spike set (spike phase, second cycle).
  logic [W_SM-1:0] s_row;
  assign s_row = (smw_q_v && smw_q_row == SM_AW'(set_idx >> SMB)) ? smw_q_data : sm_rdata;

  // Clear sweep after reset.
  logic [SM_AW-1:0] clr_row;

  // ------------------------------------------------------- memory port muxes
  always_comb begin
    // Operation Table
    ot_ren   = fetch;
    ot_raddr = opc;
    ot_wen   = ot_entry_done;
    ot_waddr = ot_ptr;
    ot_wdata = OT_W'(acc_next >> (ACC_W - OT_WPE * IDX_W));
    // Unified Memory: weight line in cycle B, post line in cycle C (UM addr sel)
    um_ren   = v_b || v_c;
    um_raddr = v_b ? ot_op.weight_addr[W_WA-1:W_KS] : op_b.post_addr;
    um_wen   = 1'b0;
    um_waddr = op_d.post_addr;
    um_wdata = {d_lidx, d_wb};
    if (v_d && !d_nop && (d_spike || op_d.post_end)) um_wen = 1'b1;   // update
    if (um_line_done) begin
      um_wen   = 1'b1;
      um_waddr = um_ptr;
      um_wdata = LINE_W'(acc_next >> (ACC_W - UM_WPE * IDX_W));
    end
    // Spike Memory (saddr sel: MC packet index or Spike Addr)
    sm_ren   = rx_spike || v_c;
    sm_raddr = rx_spike ? SM_AW'(mc_idx >> SMB) : SM_AW'(op_b.spike_addr >> SMB);
    sm_wen   = 1'b0;
    sm_waddr = '0;
    sm_wdata = '0;
    if (state == S_CLEAR) begin
      sm_wen = 1'b1; sm_waddr = clr_row; sm_wdata = '0;
    end else if (set_v) begin                               // set
      sm_wen = 1'b1; sm_waddr = SM_AW'(set_idx >> SMB);
      sm_wdata = s_row | (W_SM'(1) << set_idx[(SMB > 0 ? SMB-1 : 0):0]);
    end else if (v_d && !d_nop && op_d.pre_end) begin       // clear
      sm_wen = 1'b1; sm_waddr = SM_AW'(op_d.spike_addr >> SMB);
      sm_wdata = d_row & ~(W_SM'(1) << d_bit);
    end
  end

  // ------------------------------------------------------------- sequencing
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_CLEAR;
      clr_row <= '0;
      set_v <= 1'b0; set_idx <= '0;
      smw_q_v <= 1'b0; smw_q_row <= '0; smw_q_data <= '0;
      sel_ot <= 1'b0; sel_um <= 1'b0; acc <= '0; words <= '0; ot_ptr <= '0; um_ptr <= '0;
      opc <= '0; opc_done <= 1'b0;
      v_b <= 1'b0; v_c <= 1'b0; v_d <= 1'b0;
      op_b <= '0; op_d <= '0; w_q <= '0;
      me_idx <= LI_INV; me_cur <= '0;
    end else begin
      smw_q_v    <= sm_wen;
      smw_q_row  <= sm_waddr;
      smw_q_data <= sm_wdata;
      set_v   <= rx_spike;
      set_idx <= mc_idx;

      // initialization
      if (rx_sel) begin
        sel_ot <= (32'(mc_idx) == 2 * SPU_ID);
        sel_um <= (32'(mc_idx) == 2 * SPU_ID + 1);
        words  <= '0;
        ot_ptr <= '0;
        um_ptr <= '0;
      end else if (rx_data && (sel_ot || sel_um)) begin
        acc <= acc_next;
        if (ot_entry_done || um_line_done) words <= '0;
        else                               words <= words + 1'b1;
        if (ot_entry_done) ot_ptr <= ot_ptr + 1'b1;
        if (um_line_done)  um_ptr <= um_ptr + 1'b1;
      end

      // pipeline
      v_b  <= fetch;
      v_c  <= v_b;
      v_d  <= v_c;
      if (v_b) op_b <= ot_op;
      if (v_c) begin op_d <= op_b; w_q <= w_sel; end
      if (fetch) begin
        if (32'(opc) == S_OT - 1) opc_done <= 1'b1;   // cnt co
        else                      opc <= opc + 1'b1;
      end

      // ME packet generation
      me_idx <= LI_INV;
      me_cur <= '0;
      if (v_d && !d_nop && op_d.post_end) begin
        me_idx <= d_lidx;
        me_cur <= d_new;
      end

      unique case (state)
        S_CLEAR: begin
          if (32'(clr_row) == SM_ROWS - 1) state <= S_IDLE;
          else clr_row <= clr_row + 1'b1;
        end
        S_IDLE: begin
          if (rx_end) begin
            state <= S_RUN;
            opc <= '0;
            opc_done <= 1'b0;
          end
        end
        S_RUN: begin
          if (opc_done && !fetch && !v_b && !v_c && !v_d) state <= S_END;
        end
        S_END: begin
          me_idx <= LI_END;
          me_cur <= '0;
          state  <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign ready = (state == S_IDLE);

  a_spike_only_when_idle: assert property (@(posedge clk) disable iff (!rst_n)
      (mc_ctrl == CTRL_SPIKE) |-> (state == S_IDLE))
    else $error("spu %0d: spike packet outside the spike phase", SPU_ID);
endmodule
