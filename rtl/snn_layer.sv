// snn_layer: one layer of a spiking network with on-chip learning, whose
// synaptic connectivity is either computed (functional encoding, for
// convolutional layers) or stored as a pointer-based bitmap (PB-BMP, for fully
// connected / sparse layers).
//
// Per time step the host writes the layer's input spikes and pulses step_start.
// The forward pass then runs in two phases:
//   1. presynaptic scan: for every presynaptic neuron j the traces Q_j, P_j are
//      read; if P_j is nonzero its fan-out is produced by the connectivity
//      generator, each existing synapse's weight is read and W_ij*P_j is
//      accumulated into postsynaptic neuron i by the forward MAC. The traces are
//      then updated with the input spike (syn_trace) into the other bank of the
//      trace memory, so the values used in this step stay available.
//   2. neuron update: for every postsynaptic neuron the accumulated input is
//      turned into U, a spike and a new refractory state (lif_neuron); U is
//      quantized (quant_membrane) and stored for the backward pass; spikes are
//      streamed out on out_spk_*.
// For learning the host writes the error of every postsynaptic neuron (err_*),
// and pulses bwd_start. For every postsynaptic neuron i the error is quantized
// (quant_error), multiplied by the surrogate gradient of its stored membrane
// potential (surrogate_grad) to give delta_i; if nonzero, the transposed
// connectivity (fan-in) is produced, the backward MAC accumulates W_ij*delta_i
// into presynaptic neuron j, and, with learning enabled, the weight is updated
// in place: W_ij <- Q_W(W_ij - Q_G(delta_i * P_j)). Finally the presynaptic
// errors are streamed out on err_out_* for the layer below.
//
// Interfaces
//   cfg_*     configuration write bus (only while idle); cfg_target selects the
//             layer registers, the synapse memory, a bitmap row or a row pointer.
//             Register map (cfg_addr for CFG_REG):
//               0 {bin_mode, sr_en, learn_en, conn_mode}
//               1 in_ch   2 in_h   3 in_w
//               4 out_ch  5 out_h  6 out_w  7 k  8 n_pre (PB-BMP)  9 n_post (PB-BMP)
//              10 alpha 11 beta 12 gamma 13 delta 14 theta
//              15 m_shift 16 sg_shift 17 lr_shift
//   host_rd_* reads the synapse memory while idle (data one cycle later).
//   init_start clears all traces, refractory states and accumulators
//             (max(2*MAX_PRE, MAX_POST) cycles); required once after reset.
//   busy is high from a start pulse until the matching done pulse.
// Timing (cycles): forward ~ n_pre*(4 + fan-out) + 2*n_post; backward
// ~ n_post*(4 + fan-in) + n_pre; fan-out/in is out_ch*k*k (functional) or
// the row population (forward) / n_pre (backward) for PB-BMP.
//
// Follows the paper: the neuron and trace equations, the forward/backward
// datapath with quantizers Q_W, Q_M, Q_E, Q_G, a stored membrane M, the
// functional connectivity with bounds checking and access gating, the PB-BMP
// organization with indirection and weight tables in separate memories.
// bin_mode reduces the neurons to a binary network (Q and R dropped, the
// weights multiply the previous step's input spike), a reduction the paper
// names for its model; providing it as a mode bit is this design's choice.
// Own choices: one layer per engine, the sequencing and handshakes, the
// per-time-step backward pass (using the traces and membrane of the same step,
// no storage across time steps), double-banked trace memory, number formats,
// the register map and the memory sizes.
module snn_layer
  import snn_pkg::*;
#(
  parameter int unsigned WB         = W_BITS, // weight bits b_w
  parameter int unsigned MAX_PRE    = 25088,  // 28 x 28 x 32 input neurons
  parameter int unsigned MAX_POST   = 25088,  // 28 x 28 x 32 output neurons
  parameter int unsigned WMEM_DEPTH = 262144, // synapse memory words
  parameter int unsigned BMP_ROWS   = 728,    // PB-BMP presynaptic rows
  parameter int unsigned BMP_COLS   = 400,    // PB-BMP postsynaptic columns
  localparam int unsigned NA_W = $clog2(MAX_PRE > MAX_POST ? MAX_PRE : MAX_POST),
  localparam int unsigned WA_W = $clog2(WMEM_DEPTH),
  localparam int unsigned RW   = $clog2(BMP_ROWS),
  localparam int unsigned CW   = $clog2(BMP_COLS),
  localparam int unsigned PI_W = $clog2(MAX_PRE),
  localparam int unsigned PO_W = $clog2(MAX_POST),
  localparam int unsigned INIT_N = (2 * MAX_PRE > MAX_POST) ? 2 * MAX_PRE : MAX_POST
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // configuration
  input  logic                     cfg_we,
  input  cfg_target_e              cfg_target,
  input  logic [31:0]              cfg_addr,
  input  logic [31:0]              cfg_wdata,
  input  logic [BMP_COLS-1:0]      cfg_bits,
  input  logic                     host_rd,
  input  logic [WA_W-1:0]          host_rd_addr,
  output logic signed [WB-1:0]     host_rd_data,
  // input spikes and errors
  input  logic                     spk_we,
  input  logic [PI_W-1:0]          spk_idx,
  input  logic                     spk_in,
  input  logic                     err_we,
  input  logic [PO_W-1:0]          err_idx,
  input  logic signed [E_W-1:0]    err_in,
  // commands
  input  logic                     init_start,
  input  logic                     step_start,
  input  logic                     bwd_start,
  output logic                     busy,
  output logic                     done,
  // outputs
  output logic                     out_spk_valid,
  output logic [PO_W-1:0]          out_spk_idx,
  output logic                     err_out_valid,
  output logic [PI_W-1:0]          err_out_idx,
  output logic signed [ACC_W-1:0]  err_out_data,
  // activity monitors (one pulse per event)
  output logic                     mon_fwd_syn,   // forward synapse access
  output logic                     mon_bwd_syn,   // backward synapse access
  output logic                     mon_gated,     // functional candidate gated off
  output logic                     mon_skip,      // anchor skipped (P=0 or delta=0)
  output logic                     mon_wupd,      // weight changed by learning
  output logic                     mon_wsat       // updated weight clipped by Q_W
);
  // ------------------------------------------------------------------
  // configuration registers
  // ------------------------------------------------------------------
  conn_mode_e            conn_mode;
  logic                  learn_en, sr_en, bin_mode;
  conv_cfg_t             ccfg;
  logic [DIM_W-1:0]      bmp_n_pre, bmp_n_post;
  logic [DECAY_FRAC-1:0] alpha, beta, gamma;
  logic [15:0]           delta_c;
  logic signed [ACC_W-1:0] theta;
  logic [4:0]            m_shift, lr_shift;
  logic [3:0]            sg_shift;

  typedef enum logic [3:0] {
    S_IDLE, S_INIT,
    S_F_RD, S_F_CHK, S_F_GEN, S_F_NEXT,
    S_N_RD, S_N_UPD,
    S_B_RD, S_B_CHK, S_B_GEN, S_B_NEXT,
    S_E_RD, S_E_LAST
  } state_e;
  state_e state;
  logic   idle;
  assign idle = (state == S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      conn_mode <= CONN_FUNC; learn_en <= 1'b0; sr_en <= 1'b0; bin_mode <= 1'b0;
      ccfg <= '0; bmp_n_pre <= '0; bmp_n_post <= '0;
      alpha <= '0; beta <= '0; gamma <= '0; delta_c <= '0; theta <= '0;
      m_shift <= '0; lr_shift <= '0; sg_shift <= '0;
    end else if (cfg_we && idle && cfg_target == CFG_REG) begin
      case (cfg_addr[4:0])
        5'd0:  begin conn_mode <= conn_mode_e'(cfg_wdata[0]);
                     learn_en <= cfg_wdata[1]; sr_en <= cfg_wdata[2];
                     bin_mode <= cfg_wdata[3]; end
        5'd1:  ccfg.in_ch  <= cfg_wdata[DIM_W-1:0];
        5'd2:  ccfg.in_h   <= cfg_wdata[DIM_W-1:0];
        5'd3:  ccfg.in_w   <= cfg_wdata[DIM_W-1:0];
        5'd4:  ccfg.out_ch <= cfg_wdata[DIM_W-1:0];
        5'd5:  ccfg.out_h  <= cfg_wdata[DIM_W-1:0];
        5'd6:  ccfg.out_w  <= cfg_wdata[DIM_W-1:0];
        5'd7:  ccfg.k      <= cfg_wdata[7:0];
        5'd8:  bmp_n_pre   <= cfg_wdata[DIM_W-1:0];
        5'd9:  bmp_n_post  <= cfg_wdata[DIM_W-1:0];
        5'd10: alpha       <= cfg_wdata[DECAY_FRAC-1:0];
        5'd11: beta        <= cfg_wdata[DECAY_FRAC-1:0];
        5'd12: gamma       <= cfg_wdata[DECAY_FRAC-1:0];
        5'd13: delta_c     <= cfg_wdata[15:0];
        5'd14: theta       <= $signed(cfg_wdata);
        5'd15: m_shift     <= cfg_wdata[4:0];
        5'd16: sg_shift    <= cfg_wdata[3:0];
        5'd17: lr_shift    <= cfg_wdata[4:0];
        default: ;
      endcase
    end
  end

  // population sizes of the active layer
  logic [31:0] n_pre, n_post;
  always_comb begin
    if (conn_mode == CONN_FUNC) begin
      n_pre  = 32'(ccfg.in_ch)  * 32'(ccfg.in_h)  * 32'(ccfg.in_w);
      n_post = 32'(ccfg.out_ch) * 32'(ccfg.out_h) * 32'(ccfg.out_w);
    end else begin
      n_pre  = 32'(bmp_n_pre);
      n_post = 32'(bmp_n_post);
    end
  end

  // ------------------------------------------------------------------
  // scan counters: linear index and (channel, row, column) of the anchor
  // ------------------------------------------------------------------
  logic [31:0]      idx;
  logic [DIM_W-1:0] sc_ch, sc_r, sc_c;
  logic             scan_out;              // scanning the postsynaptic side
  logic [DIM_W-1:0] dim_h, dim_w;
  logic [31:0]      n_scan;
  logic             last_idx, step_idx, clr_idx;
  assign dim_h    = scan_out ? ccfg.out_h : ccfg.in_h;
  assign dim_w    = scan_out ? ccfg.out_w : ccfg.in_w;
  assign n_scan   = scan_out ? n_post : n_pre;
  assign last_idx = (idx == n_scan - 32'd1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      idx <= '0; sc_ch <= '0; sc_r <= '0; sc_c <= '0;
    end else if (clr_idx) begin
      idx <= '0; sc_ch <= '0; sc_r <= '0; sc_c <= '0;
    end else if (step_idx) begin
      idx <= idx + 32'd1;
      if (sc_c == dim_w - 1'b1) begin
        sc_c <= '0;
        if (sc_r == dim_h - 1'b1) begin
          sc_r  <= '0;
          sc_ch <= sc_ch + 1'b1;
        end else sc_r <= sc_r + 1'b1;
      end else sc_c <= sc_c + 1'b1;
    end
  end

  // ------------------------------------------------------------------
  // memories
  // ------------------------------------------------------------------
  logic bank;                              // trace bank read by the next forward pass

  // trace memory address of presynaptic neuron j in a bank: bank 1 starts at MAX_PRE
  function automatic logic [PI_W:0] tr_addr(logic b, logic [PI_W-1:0] j);
    return b ? (PI_W+1)'(MAX_PRE) + (PI_W+1)'(j) : (PI_W+1)'(j);
  endfunction

  // synapse (weight) memory
  logic                 wm_re, wm_we;
  logic [WA_W-1:0]      wm_raddr, wm_waddr;
  logic [WB-1:0]        wm_rdata, wm_wdata;
  sram_1r1w #(.DEPTH(WMEM_DEPTH), .WIDTH(WB)) u_synapse_mem (
    .clk, .re(wm_re), .raddr(wm_raddr), .rdata(wm_rdata),
    .we(wm_we), .waddr(wm_waddr), .wdata(wm_wdata));
  assign host_rd_data = $signed(wm_rdata);

  // presynaptic trace memory {Q, P}, two banks
  logic                 tr_re, tr_we;
  logic [PI_W:0]        tr_raddr, tr_waddr;
  logic [2*TR_W-1:0]    tr_rdata, tr_wdata;
  sram_1r1w #(.DEPTH(2 * MAX_PRE), .WIDTH(2 * TR_W)) u_trace_mem (
    .clk, .re(tr_re), .raddr(tr_raddr), .rdata(tr_rdata),
    .we(tr_we), .waddr(tr_waddr), .wdata(tr_wdata));

  // input spike memory
  logic                 sp_re, sp_we, sp_wdata;
  logic [PI_W-1:0]      sp_raddr, sp_waddr;
  logic                 sp_rdata;
  sram_1r1w #(.DEPTH(MAX_PRE), .WIDTH(1)) u_spike_mem (
    .clk, .re(sp_re), .raddr(sp_raddr), .rdata(sp_rdata),
    .we(sp_we), .waddr(sp_waddr), .wdata(sp_wdata));

  // refractory state memory
  logic                 rf_re, rf_we;
  logic [PO_W-1:0]      rf_raddr, rf_waddr;
  logic [TR_W-1:0]      rf_rdata, rf_wdata;
  sram_1r1w #(.DEPTH(MAX_POST), .WIDTH(TR_W)) u_refr_mem (
    .clk, .re(rf_re), .raddr(rf_raddr), .rdata(rf_rdata),
    .we(rf_we), .waddr(rf_waddr), .wdata(rf_wdata));

  // stored membrane potential M (after Q_M)
  logic                 mm_re, mm_we;
  logic [PO_W-1:0]      mm_raddr, mm_waddr;
  logic [M_W-1:0]       mm_rdata, mm_wdata;
  sram_1r1w #(.DEPTH(MAX_POST), .WIDTH(M_W)) u_membrane_mem (
    .clk, .re(mm_re), .raddr(mm_raddr), .rdata(mm_rdata),
    .we(mm_we), .waddr(mm_waddr), .wdata(mm_wdata));

  // error memory (raw errors of the postsynaptic neurons)
  logic                 er_re;
  logic [E_W-1:0]       er_rdata;
  sram_1r1w #(.DEPTH(MAX_POST), .WIDTH(E_W)) u_error_mem (
    .clk, .re(er_re), .raddr(idx[PO_W-1:0]), .rdata(er_rdata),
    .we(err_we && idle), .waddr(err_idx), .wdata(err_in));

  // ------------------------------------------------------------------
  // connectivity generators
  // ------------------------------------------------------------------
  logic                 gen_start;
  dir_e                 gen_dir;
  logic                 cg_busy, cg_valid, cg_gated, cg_done;
  logic [DIM_W-1:0]     cg_ch, cg_r, cg_c;
  logic [NA_W-1:0]      cg_naddr;
  logic [WA_W-1:0]      cg_waddr;
  conv_conn_gen #(.NADDR_W(NA_W), .WADDR_W(WA_W)) u_func_gen (
    .clk, .rst_n, .cfg(ccfg),
    .start(gen_start && conn_mode == CONN_FUNC), .dir(gen_dir),
    .anchor_ch(sc_ch), .anchor_r(sc_r), .anchor_c(sc_c),
    .busy(cg_busy), .out_valid(cg_valid), .out_ch(cg_ch), .out_r(cg_r), .out_c(cg_c),
    .out_naddr(cg_naddr), .out_waddr(cg_waddr), .out_gated(cg_gated), .done(cg_done));

  logic                 bg_busy, bg_valid, bg_done;
  logic [15:0]          bg_idx;
  logic [WA_W-1:0]      bg_waddr;
  bmp_conn_gen #(.N_ROWS(BMP_ROWS), .N_COLS(BMP_COLS), .WADDR_W(WA_W)) u_bmp_gen (
    .clk, .rst_n,
    .cfg_bmp_we(cfg_we && idle && cfg_target == CFG_BMP),
    .cfg_ptr_we(cfg_we && idle && cfg_target == CFG_PTR),
    .cfg_row(cfg_addr[RW-1:0]), .cfg_bits(cfg_bits), .cfg_ptr(cfg_wdata[WA_W-1:0]),
    .n_rows(bmp_n_pre[RW:0]), .n_cols(bmp_n_post[CW:0]),
    .start(gen_start && conn_mode == CONN_BMP), .dir(gen_dir), .anchor(idx[15:0]),
    .busy(bg_busy), .out_valid(bg_valid), .out_idx(bg_idx), .out_waddr(bg_waddr),
    .done(bg_done));

  logic            syn_valid, gen_done;
  logic [NA_W-1:0] syn_idx;
  logic [WA_W-1:0] syn_waddr;
  assign syn_valid = (conn_mode == CONN_FUNC) ? cg_valid : bg_valid;
  assign syn_idx   = (conn_mode == CONN_FUNC) ? cg_naddr : NA_W'(bg_idx);
  assign syn_waddr = (conn_mode == CONN_FUNC) ? cg_waddr : bg_waddr;
  assign gen_done  = (conn_mode == CONN_FUNC) ? cg_done  : bg_done;

  // ------------------------------------------------------------------
  // datapath units
  // ------------------------------------------------------------------
  // held operands of the current anchor
  logic [TR_W-1:0]           p_hold;
  logic signed [DL_W-1:0]    d_hold;
  // synapse pipeline stage (one cycle after the generator output)
  logic                      sd_valid;
  logic [NA_W-1:0]           sd_idx;
  logic [WA_W-1:0]           sd_waddr;
  logic signed [WB-1:0]      w_cur;
  assign w_cur = $signed(wm_rdata);

  // trace update
  logic [TR_W-1:0] q_cur, p_cur, q_nxt, p_nxt;
  assign {q_cur, p_cur} = tr_rdata;
  syn_trace u_trace (.q(q_cur), .p(p_cur), .spike(sp_rdata), .bin(bin_mode), .alpha, .beta,
                     .q_next(q_nxt), .p_next(p_nxt));

  // forward MAC (membrane accumulators of the postsynaptic neurons)
  logic                    fm_in_valid, fm_rd_valid, fm_out_valid;
  logic [PO_W-1:0]         fm_rd_idx;
  logic signed [ACC_W-1:0] fm_out;
  mac_unit #(.DEPTH(MAX_POST), .A_W(WB), .B_W(TR_W + 1), .ACC_W(ACC_W)) u_fwd_mac (
    .clk, .rst_n, .in_valid(fm_in_valid), .in_idx(sd_idx[PO_W-1:0]),
    .in_a(w_cur), .in_b($signed({1'b0, p_hold})),
    .rd_valid(fm_rd_valid), .rd_idx(fm_rd_idx),
    .out_valid(fm_out_valid), .out_data(fm_out));

  // backward MAC (errors of the presynaptic neurons)
  logic                    bm_in_valid, bm_rd_valid, bm_out_valid;
  logic [PI_W-1:0]         bm_rd_idx;
  logic signed [ACC_W-1:0] bm_out;
  mac_unit #(.DEPTH(MAX_PRE), .A_W(WB), .B_W(DL_W), .ACC_W(ACC_W)) u_bwd_mac (
    .clk, .rst_n, .in_valid(bm_in_valid), .in_idx(sd_idx[PI_W-1:0]),
    .in_a(w_cur), .in_b(d_hold),
    .rd_valid(bm_rd_valid), .rd_idx(bm_rd_idx),
    .out_valid(bm_out_valid), .out_data(bm_out));

  // membrane computation and Q_M
  logic signed [ACC_W-1:0] u_val;
  logic                    spike;
  logic [TR_W-1:0]         r_nxt;
  logic signed [M_W-1:0]   m_q;
  lif_neuron u_neuron (.acc(fm_out), .r(rf_rdata), .delta(bin_mode ? '0 : delta_c), .theta, .gamma,
                       .u(u_val), .spike, .r_next(r_nxt));
  quant_membrane u_qm (.u(u_val), .shift(m_shift), .m(m_q));

  // Q_E and surrogate gradient
  logic signed [EQ_W-1:0]  e_q;
  logic [E_W-1:0]          e_max;
  logic                    qe_clr;
  quant_error u_qe (.clk, .rst_n, .clr(qe_clr), .trk_valid(err_we && idle),
                    .trk_e(err_in), .e($signed(er_rdata)), .eq(e_q), .max_abs(e_max));

  logic signed [M_W-1:0]   theta_m;
  logic [SG_W-1:0]         sg;
  quant_membrane u_qm_theta (.u(theta), .shift(m_shift), .m(theta_m));
  surrogate_grad u_sg (.m($signed(mm_rdata)), .theta_m, .shift(sg_shift), .sg);

  logic signed [DL_W-1:0]  d_new;
  assign d_new = DL_W'(e_q) * $signed(DL_W'(sg));

  // Q_G and Q_W on the synapse stage
  logic signed [G_W-1:0]   g_q;
  // old weight minus gradient, wide enough for either operand plus a carry
  localparam int unsigned UW = ((WB > G_W) ? WB : G_W) + 2;
  logic signed [UW-1:0]    w_upd;
  logic signed [WB-1:0]    w_new;
  quant_grad u_qg (.clk, .rst_n, .valid(bm_in_valid && learn_en), .delta(d_hold),
                   .p(p_cur), .shift(lr_shift), .sr_en, .gq(g_q));
  assign w_upd = UW'(w_cur) - UW'(g_q);
  quant_weight #(.BW(WB), .IW(UW)) u_qw (.x(w_upd), .w(w_new));

  // ------------------------------------------------------------------
  // controller
  // ------------------------------------------------------------------
  logic bwd_bank;          // trace bank used by the last forward pass
  assign bwd_bank = ~bank;

  always_comb begin
    // defaults
    step_idx = 1'b0; clr_idx = 1'b0;
    gen_start = 1'b0; gen_dir = DIR_FWD;
    wm_re = 1'b0; wm_raddr = syn_waddr;
    wm_we = 1'b0; wm_waddr = cfg_addr[WA_W-1:0]; wm_wdata = cfg_wdata[WB-1:0];
    tr_re = 1'b0; tr_raddr = tr_addr(bank, idx[PI_W-1:0]);
    tr_we = 1'b0; tr_waddr = tr_addr(~bank, idx[PI_W-1:0]); tr_wdata = {q_nxt, p_nxt};
    sp_re = 1'b0; sp_raddr = idx[PI_W-1:0];
    sp_we = 1'b0; sp_waddr = spk_idx; sp_wdata = spk_in;
    rf_re = 1'b0; rf_raddr = idx[PO_W-1:0];
    rf_we = 1'b0; rf_waddr = idx[PO_W-1:0]; rf_wdata = r_nxt;
    mm_re = 1'b0; mm_raddr = idx[PO_W-1:0];
    mm_we = 1'b0; mm_waddr = idx[PO_W-1:0]; mm_wdata = m_q;
    er_re = 1'b0;
    fm_in_valid = 1'b0; fm_rd_valid = 1'b0; fm_rd_idx = idx[PO_W-1:0];
    bm_in_valid = 1'b0; bm_rd_valid = 1'b0; bm_rd_idx = idx[PI_W-1:0];
    qe_clr = 1'b0;

    // synapse stage: weight read issued with the generator output
    if (syn_valid) wm_re = 1'b1;
    if (state == S_B_GEN && syn_valid) begin
      tr_re = 1'b1; tr_raddr = tr_addr(bwd_bank, syn_idx[PI_W-1:0]);
    end
    if (sd_valid && state inside {S_F_GEN, S_F_NEXT}) fm_in_valid = 1'b1;
    if (sd_valid && state inside {S_B_GEN, S_B_NEXT}) begin
      bm_in_valid = 1'b1;
      if (learn_en) begin
        wm_we = 1'b1; wm_waddr = sd_waddr; wm_wdata = w_new;
      end
    end

    case (state)
      S_IDLE: begin
        if (cfg_we && cfg_target == CFG_WMEM) wm_we = 1'b1;
        if (host_rd) begin wm_re = 1'b1; wm_raddr = host_rd_addr; end
        if (spk_we) sp_we = 1'b1;
        clr_idx = 1'b1;
      end
      S_INIT: begin
        tr_we = (idx < 2 * MAX_PRE); tr_waddr = idx[PI_W:0]; tr_wdata = '0;
        if (idx < MAX_PRE) begin
          sp_we = 1'b1; sp_waddr = idx[PI_W-1:0]; sp_wdata = 1'b0;
          bm_rd_valid = 1'b1;
        end
        if (idx < MAX_POST) begin
          rf_we = 1'b1; rf_wdata = '0;
          fm_rd_valid = 1'b1;
        end
        step_idx = 1'b1;
      end
      S_F_RD: begin
        tr_re = 1'b1; sp_re = 1'b1;
      end
      S_F_CHK: begin
        tr_we = 1'b1;                               // updated traces to the other bank
        sp_we = 1'b1; sp_waddr = idx[PI_W-1:0]; sp_wdata = 1'b0;   // consume spike
        if (p_cur != '0) begin gen_start = 1'b1; gen_dir = DIR_FWD; end
        else step_idx = !last_idx;
      end
      S_F_GEN: ;
      S_F_NEXT: begin
        step_idx = !last_idx; clr_idx = last_idx;
      end
      S_N_RD: begin
        fm_rd_valid = 1'b1; rf_re = 1'b1;
      end
      S_N_UPD: begin
        rf_we = 1'b1; mm_we = 1'b1;
        step_idx = 1'b1;
      end
      S_B_RD: begin
        er_re = 1'b1; mm_re = 1'b1;
      end
      S_B_CHK: begin
        if (d_new != '0) begin gen_start = 1'b1; gen_dir = DIR_BWD; end
        else begin step_idx = !last_idx; clr_idx = last_idx; end
      end
      S_B_GEN: ;
      S_B_NEXT: begin
        step_idx = !last_idx; clr_idx = last_idx;
      end
      S_E_RD: begin
        bm_rd_valid = 1'b1; step_idx = 1'b1;
      end
      S_E_LAST: qe_clr = 1'b1;
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; bank <= 1'b0; scan_out <= 1'b0; done <= 1'b0;
      p_hold <= '0; d_hold <= '0;
      sd_valid <= 1'b0; sd_idx <= '0; sd_waddr <= '0;
    end else begin
      done     <= 1'b0;
      sd_valid <= syn_valid && (state inside {S_F_GEN, S_B_GEN});
      sd_idx   <= syn_idx;
      sd_waddr <= syn_waddr;
      case (state)
        S_IDLE: begin
          if (init_start) begin
            state <= S_INIT; bank <= 1'b0;
          end else if (step_start) begin
            state <= S_F_RD; scan_out <= 1'b0;
          end else if (bwd_start) begin
            state <= S_B_RD; scan_out <= 1'b1;
          end
        end
        S_INIT:
          if (idx == INIT_N - 1) begin state <= S_IDLE; done <= 1'b1; end
        S_F_RD:  state <= S_F_CHK;
        S_F_CHK: begin
          p_hold <= p_cur;
          if (p_cur != '0)   state <= S_F_GEN;
          else if (last_idx) state <= S_F_NEXT;
          else               state <= S_F_RD;
        end
        S_F_GEN:  if (gen_done) state <= S_F_NEXT;
        S_F_NEXT: if (last_idx) begin state <= S_N_RD; scan_out <= 1'b1; end
                  else state <= S_F_RD;
        S_N_RD:   state <= S_N_UPD;
        S_N_UPD:
          if (last_idx) begin
            state <= S_IDLE; done <= 1'b1; bank <= ~bank;
          end else state <= S_N_RD;
        S_B_RD:  state <= S_B_CHK;
        S_B_CHK: begin
          d_hold <= d_new;
          if (d_new != '0)   state <= S_B_GEN;
          else if (last_idx) begin state <= S_E_RD; scan_out <= 1'b0; end
          else               state <= S_B_RD;
        end
        S_B_GEN:  if (gen_done) state <= S_B_NEXT;
        S_B_NEXT: if (last_idx) begin state <= S_E_RD; scan_out <= 1'b0; end
                  else state <= S_B_RD;
        S_E_RD:   if (last_idx) state <= S_E_LAST;
        S_E_LAST: begin state <= S_IDLE; done <= 1'b1; end
        default:  state <= S_IDLE;
      endcase
    end
  end

  assign busy = !idle;

  // ------------------------------------------------------------------
  // outputs
  // ------------------------------------------------------------------
  assign out_spk_valid = (state == S_N_UPD) && spike;
  assign out_spk_idx   = idx[PO_W-1:0];

  logic [PI_W-1:0] eo_idx;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) eo_idx <= '0;
    else        eo_idx <= idx[PI_W-1:0];
  end
  assign err_out_valid = bm_out_valid && (state inside {S_E_RD, S_E_LAST});
  assign err_out_idx   = eo_idx;
  assign err_out_data  = bm_out;

  assign mon_fwd_syn = fm_in_valid;
  assign mon_bwd_syn = bm_in_valid;
  assign mon_gated   = cg_gated && (conn_mode == CONN_FUNC);
  assign mon_skip    = (state == S_F_CHK && p_cur == '0) || (state == S_B_CHK && d_new == '0);
  assign mon_wupd    = bm_in_valid && learn_en && (w_new != w_cur);
  assign mon_wsat    = bm_in_valid && learn_en && (w_upd != UW'(w_new));

`ifndef SYNTHESIS
  a_cmd_idle: assert property (@(posedge clk) disable iff (!rst_n)
      (init_start || step_start || bwd_start) |-> idle)
    else $error("snn_layer: command while busy");
  a_cfg_idle: assert property (@(posedge clk) disable iff (!rst_n)
      (cfg_we || spk_we || err_we) |-> idle)
    else $error("snn_layer: host write while busy (ignored)");
  a_n_pre: assert property (@(posedge clk) disable iff (!rst_n)
      (step_start || bwd_start) |-> (n_pre <= MAX_PRE && n_post <= MAX_POST && n_pre != 0 && n_post != 0))
    else $error("snn_layer: layer size out of range");
`endif
endmodule
