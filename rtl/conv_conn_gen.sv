// conv_conn_gen: functional connectivity generator for convolutional layers.
//
// Instead of storing which synapses exist, the connectivity of a convolution is
// computed. Given an anchor neuron (channel, row, column) the generator steps a
// kernel iterator Pos = (PosR, PosC) over the k x k kernel and, for every
// channel on the other side of the layer, produces one candidate synapse per
// cycle:
//   forward  (DIR_FWD, anchor = presynaptic):  PostR = PreR + PosR, PostC = PreC + PosC
//   backward (DIR_BWD, anchor = postsynaptic): PreR  = PostR - PosR, PreC  = PostC - PosC
// which are the paper's forward function f and inverse function f^-1. A bounds
// check compares the computed row/column with the configured map size and an
// access gate raises out_valid only for in-range targets, so no memory read is
// issued for a synapse that does not exist. Address generation forms the target
// neuron address (ch*H + r)*W + c and the weight address
// ((out_ch_idx*in_ch + in_ch_idx)*k + PosR)*k + PosC; kernel weights are shared
// by all positions, so the backward pass reads the same weight table as the
// forward pass without a transposed copy.
//
// Timing: start (one cycle, while not busy) loads the anchor registers; the
// iteration takes n_ch * k * k cycles, one candidate per cycle, and results
// appear one cycle after their iterator value (registered Post/Pre outputs as in
// the paper's figure). done pulses with the last candidate's output cycle.
//
// Follows the paper: the add/subtract functions, the Pre/Pos/Post registers with
// +1 iterators, bounds checking, address generation and access gating.
// Own choices: the channel loop, the address formulas, the iteration order
// (channel outer, PosR, PosC inner) and the 1-cycle latency. The paper's +1 path
// on the Pre registers (stepping through presynaptic neurons) is done by the
// layer controller, which loads a new anchor for each neuron.
module conv_conn_gen
  import snn_pkg::*;
#(
  parameter int unsigned NADDR_W = 15,   // neuron address width (28*28*32 = 25088 neurons)
  parameter int unsigned WADDR_W = 18    // weight address width
) (
  input  logic               clk,
  input  logic               rst_n,
  input  conv_cfg_t          cfg,
  input  logic               start,
  input  dir_e               dir,
  input  logic [DIM_W-1:0]   anchor_ch,
  input  logic [DIM_W-1:0]   anchor_r,
  input  logic [DIM_W-1:0]   anchor_c,
  output logic               busy,
  output logic               out_valid,   // access gate: candidate exists
  output logic [DIM_W-1:0]   out_ch,
  output logic [DIM_W-1:0]   out_r,
  output logic [DIM_W-1:0]   out_c,
  output logic [NADDR_W-1:0] out_naddr,   // target neuron address
  output logic [WADDR_W-1:0] out_waddr,   // synapse memory address
  output logic               out_gated,   // candidate rejected by the bounds check
  output logic               done
);
  // anchor (Pre in forward, Post in backward) and iterator registers
  dir_e             dir_q;
  logic [DIM_W-1:0] anc_ch, anc_r, anc_c;
  logic [DIM_W-1:0] ch_i;               // channel iterator on the target side
  logic [7:0]       pos_r, pos_c;       // kernel iterator PosR, PosC
  logic             run;

  logic [DIM_W-1:0] n_ch;
  assign n_ch = (dir_q == DIR_FWD) ? cfg.out_ch : cfg.in_ch;

  logic last_pos, last_iter;
  assign last_pos  = (pos_c == cfg.k - 8'd1) && (pos_r == cfg.k - 8'd1);
  assign last_iter = last_pos && (ch_i == n_ch - 1'b1);

  // ---- adders of the functional encoding (forward f, inverse f^-1) ----
  logic signed [DIM_W+1:0] tgt_r, tgt_c;
  always_comb begin
    if (dir_q == DIR_FWD) begin
      tgt_r = $signed({2'b00, anc_r}) + $signed({{(DIM_W-6){1'b0}}, pos_r});
      tgt_c = $signed({2'b00, anc_c}) + $signed({{(DIM_W-6){1'b0}}, pos_c});
    end else begin
      tgt_r = $signed({2'b00, anc_r}) - $signed({{(DIM_W-6){1'b0}}, pos_r});
      tgt_c = $signed({2'b00, anc_c}) - $signed({{(DIM_W-6){1'b0}}, pos_c});
    end
  end

  // ---- bounds checking against the precomputed map size ----
  logic [DIM_W-1:0] lim_h, lim_w;
  logic             in_bounds;
  assign lim_h = (dir_q == DIR_FWD) ? cfg.out_h : cfg.in_h;
  assign lim_w = (dir_q == DIR_FWD) ? cfg.out_w : cfg.in_w;
  assign in_bounds = (tgt_r >= 0) && (tgt_c >= 0) &&
                     (tgt_r < $signed({2'b00, lim_h})) && (tgt_c < $signed({2'b00, lim_w}));

  // ---- address generation ----
  logic [DIM_W-1:0]   t_r, t_c;
  logic [NADDR_W-1:0] naddr;
  logic [WADDR_W-1:0] waddr;
  logic [DIM_W-1:0]   oc, ic;
  assign t_r = tgt_r[DIM_W-1:0];
  assign t_c = tgt_c[DIM_W-1:0];
  assign oc  = (dir_q == DIR_FWD) ? ch_i  : anc_ch;
  assign ic  = (dir_q == DIR_FWD) ? anc_ch : ch_i;
  always_comb begin
    naddr = NADDR_W'((ch_i * lim_h + t_r) * lim_w + t_c);
    waddr = WADDR_W'(((WADDR_W'(oc) * WADDR_W'(cfg.in_ch) + WADDR_W'(ic)) * WADDR_W'(cfg.k)
                     + WADDR_W'(pos_r)) * WADDR_W'(cfg.k) + WADDR_W'(pos_c));
  end

  // ---- iterators ----
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= 1'b0; dir_q <= DIR_FWD;
      anc_ch <= '0; anc_r <= '0; anc_c <= '0;
      ch_i <= '0; pos_r <= '0; pos_c <= '0;
    end else if (start && !busy) begin
      run <= 1'b1; dir_q <= dir;
      anc_ch <= anchor_ch; anc_r <= anchor_r; anc_c <= anchor_c;
      ch_i <= '0; pos_r <= '0; pos_c <= '0;
    end else if (run) begin
      if (last_iter) run <= 1'b0;
      if (pos_c == cfg.k - 8'd1) begin
        pos_c <= '0;
        if (pos_r == cfg.k - 8'd1) begin
          pos_r <= '0;
          ch_i  <= ch_i + 1'b1;
        end else pos_r <= pos_r + 8'd1;
      end else pos_c <= pos_c + 8'd1;
    end
  end

  // ---- Post/Pre output registers and access gating ----
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_gated <= 1'b0; done <= 1'b0;
      out_ch <= '0; out_r <= '0; out_c <= '0; out_naddr <= '0; out_waddr <= '0;
    end else begin
      out_valid <= run && in_bounds;
      out_gated <= run && !in_bounds;
      done      <= run && last_iter;
      if (run) begin
        out_ch <= ch_i; out_r <= t_r; out_c <= t_c;
        out_naddr <= naddr; out_waddr <= waddr;
      end
    end
  end

  assign busy = run;

`ifndef SYNTHESIS
  a_no_start_busy: assert property (@(posedge clk) disable iff (!rst_n) !(start && busy))
    else $error("conv_conn_gen: start while busy");
  a_kernel: assert property (@(posedge clk) disable iff (!rst_n) run |-> cfg.k != 0)
    else $error("conv_conn_gen: zero kernel size");
`endif
endmodule
