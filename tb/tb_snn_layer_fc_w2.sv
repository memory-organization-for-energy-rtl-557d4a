// tb_snn_layer_fc_w2: end-to-end self-checking test of the SNN layer engine.
// Fully connected layer of 728 presynaptic and 128 postsynaptic neurons at
// 75% density (25% sparsity) held as PB-BMP, with 2-bit weights: one end
// of the 2..12-bit weight-width range evaluated for this layer. Memories are
// sized to exactly this layer. The neurons run in binary-network mode (Q and
// R dropped, the weights multiply the previous step's input spike).
// A step-level reference model kept in this testbench (traces, refractory
// state, weights, accumulators, Q_M/Q_E/surrogate/Q_G/Q_W arithmetic and the
// connectivity written out by definition) predicts, for every time step, the
// output spikes, the errors sent to the layer below and, at the end, the whole
// weight table; the engine's results are compared entry by entry. Learning runs
// with round-to-nearest gradients for exact comparison; a final step with
// stochastic rounding is checked for range only. Every mechanism of the engine
// is counted (synapse accesses forward/backward, bounds-gated candidates,
// skipped anchors, weight updates, Q_W clipping, spikes, both connectivity
// modes) and one that never happened counts as a failure.
module tb_snn_layer_fc_w2;
  import snn_pkg::*;
  localparam int MP = 728, MQ = 128, WD = 70000, BR = 728, BC = 128;
  localparam int PI_W = $clog2(MP), PO_W = $clog2(MQ), WA_W = $clog2(WD);
  // scenario sizes
  localparam int C_IC = 1, C_IH = 1, C_IW = 1, C_OC = 1, C_OH = 1, C_OW = 1, C_K = 1;
  localparam int C_STEPS = 0;
  localparam int B_NPRE = 728, B_NPOST = 128, B_DENS = 75, B_STEPS = 4;
  localparam longint WATCHDOG = 2000000;
  // weight width and its symmetric range; thresholds and the learning shift
  // are scaled with the range so that every width sees similar activity
  localparam int WBT = 2, WMAX = (1 << (WBT - 1)) - 1;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cfg_we = 0; cfg_target_e cfg_target = CFG_REG;
  logic [31:0] cfg_addr = '0, cfg_wdata = '0;
  logic [BC-1:0] cfg_bits = '0;
  logic host_rd = 0; logic [WA_W-1:0] host_rd_addr = '0; logic signed [WBT-1:0] host_rd_data;
  logic spk_we = 0; logic [PI_W-1:0] spk_idx = '0; logic spk_in = 0;
  logic err_we = 0; logic [PO_W-1:0] err_idx = '0; logic signed [E_W-1:0] err_in = '0;
  logic init_start = 0, step_start = 0, bwd_start = 0, busy, done;
  logic out_spk_valid; logic [PO_W-1:0] out_spk_idx;
  logic err_out_valid; logic [PI_W-1:0] err_out_idx; logic signed [ACC_W-1:0] err_out_data;
  logic mon_fwd_syn, mon_bwd_syn, mon_gated, mon_skip, mon_wupd, mon_wsat;

  snn_layer #(.WB(2), .MAX_PRE(728), .MAX_POST(128), .WMEM_DEPTH(70000), .BMP_ROWS(728), .BMP_COLS(128)) dut (
    .clk, .rst_n, .cfg_we, .cfg_target, .cfg_addr, .cfg_wdata, .cfg_bits,
    .host_rd, .host_rd_addr, .host_rd_data, .spk_we, .spk_idx, .spk_in,
    .err_we, .err_idx, .err_in, .init_start, .step_start, .bwd_start, .busy, .done,
    .out_spk_valid, .out_spk_idx, .err_out_valid, .err_out_idx, .err_out_data,
    .mon_fwd_syn, .mon_bwd_syn, .mon_gated, .mon_skip, .mon_wupd, .mon_wsat);

  int checks = 0, failures = 0;
  longint n_fwd = 0, n_bwd = 0, n_gated = 0, n_skip = 0, n_wupd = 0, n_wsat = 0, n_spk = 0;
  int n_func_steps = 0, n_bmp_steps = 0, n_bin_steps = 0;
  always @(posedge clk) begin
    n_fwd += mon_fwd_syn; n_bwd += mon_bwd_syn; n_gated += mon_gated;
    n_skip += mon_skip; n_wupd += mon_wupd; n_wsat += mon_wsat; n_spk += out_spk_valid;
  end

  // ---------------- reference model ----------------
  int mq [MP], mp [MP];            // traces Q, P
  int mr [MQ];                     // refractory state
  int mm [MQ];                     // stored membrane
  int mw [WD];                     // weights
  longint acc [MQ];
  longint eout [MP];
  bit sp_in [MP];
  int err [MQ];
  bit exp_spk [MQ];
  // synapse list: pre j, post i, weight address
  int syn_j[$], syn_i[$], syn_w[$];
  int n_pre, n_post;
  int alpha, beta, gamma, delta, theta, m_shift, sg_shift, lr_shift;
  bit bin_m = 0;                   // binary-network mode

  function automatic int qm(longint u, int s);
    longint v; v = u >>> s;
    if (v > 32767) v = 32767;
    if (v < -32767) v = -32767;
    return int'(v);
  endfunction
  function automatic int sat16u(longint v);
    return (v > 65535) ? 65535 : int'(v);
  endfunction
  function automatic int sgf(int m, int th, int s);
    int a, k; a = m - th; if (a < 0) a = -a;
    k = a >> s; if (k > 63) k = 63;
    return 16320 / ((8 + k) * (8 + k));
  endfunction
  function automatic int qe(int e, int mx);
    int lead, v;
    if (mx == 0) return 0;
    lead = 0;
    for (int b = 0; b < 16; b++) if (mx[b]) lead = b;
    if (lead >= 6) v = e >>> (lead - 6); else v = e <<< (6 - lead);
    if (v > 127) v = 127;
    if (v < -127) v = -127;
    return v;
  endfunction

  task automatic model_fwd();
    for (int i = 0; i < n_post; i++) acc[i] = 0;
    for (int s = 0; s < syn_j.size(); s++)
      acc[syn_i[s]] += longint'(mw[syn_w[s]]) * longint'(mp[syn_j[s]]);
    for (int i = 0; i < n_post; i++) begin
      longint u; bit sk;
      u = acc[i] - (bin_m ? 0 : ((longint'(delta) * mr[i]) >>> 8));
      sk = (u >= theta);
      exp_spk[i] = sk;
      mm[i] = qm(u, m_shift);
      mr[i] = sat16u((longint'(mr[i]) * gamma) / 256 + (sk ? 256 : 0));
    end
  endtask
  // trace update, after the backward pass has used the old P
  int mp_old [MP];
  task automatic model_traces();
    for (int j = 0; j < n_pre; j++) begin
      int qn, pn;
      mp_old[j] = mp[j];
      qn = bin_m ? 0 : sat16u((longint'(mq[j]) * alpha) / 256 + (sp_in[j] ? 256 : 0));
      pn = bin_m ? (sp_in[j] ? 256 : 0) : sat16u((longint'(mp[j]) * beta) / 256 + mq[j]);
      mq[j] = qn; mp[j] = pn;
    end
  endtask
  // synapses grouped by postsynaptic neuron (stable counting sort of the list)
  int post_start [MQ+1];
  int post_fill [MQ];
  int order [];
  task automatic group_by_post();
    for (int i = 0; i <= MQ; i++) post_start[i] = 0;
    for (int s = 0; s < syn_i.size(); s++) post_start[syn_i[s] + 1]++;
    for (int i = 0; i < MQ; i++) post_start[i + 1] += post_start[i];
    for (int i = 0; i < MQ; i++) post_fill[i] = post_start[i];
    order = new[syn_i.size()];
    for (int s = 0; s < syn_i.size(); s++) begin order[post_fill[syn_i[s]]] = s; post_fill[syn_i[s]]++; end
  endtask
  task automatic model_bwd(bit learn);
    int mx, thm;
    mx = 0;
    for (int i = 0; i < n_post; i++) if ((err[i] < 0 ? -err[i] : err[i]) > mx) mx = (err[i] < 0 ? -err[i] : err[i]);
    thm = qm(theta, m_shift);
    for (int j = 0; j < n_pre; j++) eout[j] = 0;
    for (int i = 0; i < n_post; i++) begin
      int d;
      d = qe(err[i], mx) * sgf(mm[i], thm, sg_shift);
      if (d != 0)
        for (int x = post_start[i]; x < post_start[i + 1]; x++) begin
          int s, j, wa;
          s = order[x]; j = syn_j[s]; wa = syn_w[s];
          eout[j] += longint'(mw[wa]) * d;
          if (learn) begin
            longint g, gq, wn;
            g = longint'(d) * mp_old[j];
            gq = (g + ((lr_shift != 0) ? (longint'(1) << (lr_shift - 1)) : 0)) >>> lr_shift;
            if (gq > 32767) gq = 32767;
            if (gq < -32767) gq = -32767;
            wn = mw[wa] - gq;
            if (wn > WMAX) wn = WMAX;
            if (wn < -WMAX) wn = -WMAX;
            mw[wa] = int'(wn);
          end
        end
    end
  endtask

  // ---------------- bus helpers ----------------
  task automatic wr(cfg_target_e t, int a, int d);
    @(negedge clk); cfg_we = 1; cfg_target = t; cfg_addr = a; cfg_wdata = d;
    @(negedge clk); cfg_we = 0;
  endtask
  task automatic wait_done(longint limit, output longint cycles);
    cycles = 0;
    do begin @(posedge clk); cycles++; end while (!done && cycles < limit);
    #1;
  endtask

  // collected outputs
  bit got_spk [MQ];
  longint got_eout [MP];
  bit got_eout_v [MP];
  always @(posedge clk) begin
    if (out_spk_valid) got_spk[out_spk_idx] <= 1'b1;
    if (err_out_valid) begin got_eout[err_out_idx] <= err_out_data; got_eout_v[err_out_idx] <= 1'b1; end
  end

  task automatic run_step(bit learn, bit check_exact, int spk_pct);
    longint cyc;
    // input spikes
    for (int j = 0; j < n_pre; j++) begin
      sp_in[j] = ($urandom_range(1, 100) <= spk_pct);
      @(negedge clk); spk_we = 1; spk_idx = PI_W'(j); spk_in = sp_in[j];
    end
    @(negedge clk); spk_we = 0;
    for (int i = 0; i < n_post; i++) got_spk[i] = 0;
    @(negedge clk); step_start = 1; @(negedge clk); step_start = 0;
    wait_done(WATCHDOG, cyc);
    model_fwd();
    for (int i = 0; i < n_post; i++) begin
      checks++;
      if (got_spk[i] != exp_spk[i]) begin
        failures++;
        if (failures < 20) $display("FAIL spike i=%0d got %0d exp %0d (acc %0d)", i, got_spk[i], exp_spk[i], acc[i]);
      end
    end
    // errors and backward pass
    for (int i = 0; i < n_post; i++) begin
      err[i] = ($urandom_range(0, 3) == 0) ? 0 : $signed($urandom_range(0, 8000)) - 4000;
      @(negedge clk); err_we = 1; err_idx = PO_W'(i); err_in = E_W'(err[i]);
    end
    @(negedge clk); err_we = 0;
    for (int j = 0; j < n_pre; j++) got_eout_v[j] = 0;
    @(negedge clk); bwd_start = 1; @(negedge clk); bwd_start = 0;
    wait_done(WATCHDOG, cyc);
    @(negedge clk);
    model_traces();
    model_bwd(learn);
    if (check_exact)
      for (int j = 0; j < n_pre; j++) begin
        checks++;
        if (!got_eout_v[j] || got_eout[j] != eout[j]) begin
          failures++;
          if (failures < 20) $display("FAIL err_out j=%0d got %0d (v%0d) exp %0d", j, got_eout[j], got_eout_v[j], eout[j]);
        end
      end
  endtask

  task automatic check_weights(int nw, bit exact);
    for (int a = 0; a < nw; a++) begin
      @(negedge clk); host_rd = 1; host_rd_addr = WA_W'(a);
      @(negedge clk); host_rd = 0;
      checks++;
      if (exact ? (int'(host_rd_data) != mw[a]) : (int'(host_rd_data) < -WMAX)) begin
        failures++;
        if (failures < 20) $display("FAIL weight %0d got %0d exp %0d", a, host_rd_data, mw[a]);
      end
    end
  endtask

  task automatic set_common(int mode, bit learn, bit sr);
    wr(CFG_REG, 0, mode | (int'(learn) << 1) | (int'(sr) << 2) | (int'(bin_m) << 3));
    wr(CFG_REG, 10, alpha); wr(CFG_REG, 11, beta); wr(CFG_REG, 12, gamma);
    wr(CFG_REG, 13, delta); wr(CFG_REG, 14, theta);
    wr(CFG_REG, 15, m_shift); wr(CFG_REG, 16, sg_shift); wr(CFG_REG, 17, lr_shift);
  endtask

  task automatic do_init();
    longint cyc;
    @(negedge clk); init_start = 1; @(negedge clk); init_start = 0;
    wait_done(WATCHDOG, cyc);
    for (int j = 0; j < MP; j++) begin mq[j] = 0; mp[j] = 0; end
    for (int i = 0; i < MQ; i++) mr[i] = 0;
  endtask

  initial begin
    longint nw;
    repeat (3) @(posedge clk);
    rst_n = 1;
    alpha = 200; beta = 220; gamma = 180; m_shift = 6; sg_shift = 4; lr_shift = 24 - WBT;

    // ================= functional (convolutional) layer =================
    if (C_STEPS > 0) begin
      n_pre = C_IC * C_IH * C_IW; n_post = C_OC * C_OH * C_OW;
      delta = 3000 * WMAX / 127; theta = 40000 * WMAX / 127;
      set_common(0, 1, 0);
      wr(CFG_REG, 1, C_IC); wr(CFG_REG, 2, C_IH); wr(CFG_REG, 3, C_IW);
      wr(CFG_REG, 4, C_OC); wr(CFG_REG, 5, C_OH); wr(CFG_REG, 6, C_OW); wr(CFG_REG, 7, C_K);
      nw = C_OC * C_IC * C_K * C_K;
      for (int a = 0; a < nw; a++) begin
        mw[a] = $signed($urandom_range(0, 2 * WMAX)) - WMAX;
        if (a < 4) mw[a] = (a % 2 == 0) ? WMAX - (WMAX > 1) : -(WMAX - (WMAX > 1));     // near the clip limits
        wr(CFG_WMEM, a, mw[a]);
      end
      syn_j.delete(); syn_i.delete(); syn_w.delete();
      for (int co = 0; co < C_OC; co++)
        for (int r = 0; r < C_OH; r++)
          for (int c = 0; c < C_OW; c++)
            for (int ci = 0; ci < C_IC; ci++)
              for (int pr = 0; pr < C_K; pr++)
                for (int pc = 0; pc < C_K; pc++)
                  if (r - pr >= 0 && c - pc >= 0 && r - pr < C_IH && c - pc < C_IW) begin
                    syn_i.push_back((co * C_OH + r) * C_OW + c);
                    syn_j.push_back((ci * C_IH + r - pr) * C_IW + c - pc);
                    syn_w.push_back(((co * C_IC + ci) * C_K + pr) * C_K + pc);
                  end
      group_by_post();
      do_init();
      for (int t = 0; t < C_STEPS; t++) begin
        run_step(1, 1, 40);
        n_func_steps++;
      end
      check_weights(int'(nw), 1);
    end

    // ================= PB-BMP (fully connected, sparse) layer =================
    if (B_STEPS > 0) begin
      int base;
      n_pre = B_NPRE; n_post = B_NPOST;
      bin_m = 1;
      delta = 2000 * WMAX / 127; theta = 30000 * WMAX / 127;
      set_common(1, 1, 0);
      wr(CFG_REG, 8, B_NPRE); wr(CFG_REG, 9, B_NPOST);
      syn_j.delete(); syn_i.delete(); syn_w.delete();
      base = 0;
      for (int j = 0; j < B_NPRE; j++) begin
        logic [BC-1:0] row;
        row = '0;
        for (int i = 0; i < B_NPOST; i++) row[i] = ($urandom_range(1, 100) <= B_DENS);
        @(negedge clk); cfg_we = 1; cfg_target = CFG_BMP; cfg_addr = j; cfg_bits = row;
        @(negedge clk); cfg_target = CFG_PTR; cfg_wdata = base;
        @(negedge clk); cfg_we = 0;
        for (int i = 0; i < B_NPOST; i++) if (row[i]) begin
          syn_j.push_back(j); syn_i.push_back(i); syn_w.push_back(base);
          base++;
        end
      end
      group_by_post();
      nw = base;
      for (int a = 0; a < nw; a++) begin
        mw[a] = $signed($urandom_range(0, 2 * WMAX)) - WMAX;
        if (a < 4) mw[a] = (a % 2 == 0) ? WMAX - (WMAX > 1) : -(WMAX - (WMAX > 1));
        wr(CFG_WMEM, a, mw[a]);
      end
      do_init();
      for (int t = 0; t < B_STEPS; t++) begin
        run_step(1, 1, 30);
        n_bmp_steps++;
        n_bin_steps += bin_m;
      end
      check_weights(int'(nw), 1);
      // one more step with stochastic rounding: weights must stay in range
      set_common(1, 1, 1);
      run_step(1, 0, 30);
      check_weights(int'(nw), 0);
    end

    $display("mechanisms: fwd_syn=%0d bwd_syn=%0d gated=%0d skipped=%0d wupd=%0d wsat=%0d spikes=%0d func_steps=%0d bmp_steps=%0d bin_steps=%0d",
             n_fwd, n_bwd, n_gated, n_skip, n_wupd, n_wsat, n_spk, n_func_steps, n_bmp_steps, n_bin_steps);
    checks++; if (n_fwd == 0)   begin failures++; $display("FAIL no forward synapse access"); end
    checks++; if (n_bwd == 0)   begin failures++; $display("FAIL no backward synapse access"); end
    checks++; if (n_skip == 0)  begin failures++; $display("FAIL no skipped anchor"); end
    checks++; if (n_wupd == 0)  begin failures++; $display("FAIL no weight update"); end
    checks++; if (n_spk == 0)   begin failures++; $display("FAIL no output spike"); end
    if (C_STEPS > 0) begin
      checks++; if (n_gated == 0) begin failures++; $display("FAIL no gated candidate"); end
      checks++; if (n_func_steps == 0) failures++;
    end
    if (B_STEPS > 0) begin checks++; if (n_bmp_steps == 0) failures++; end
    if (1) begin checks++; if (n_bin_steps == 0) failures++; end
    if (C_STEPS > 0 && B_STEPS > 0) begin
      checks++; if (n_wsat == 0) begin failures++; $display("FAIL no Q_W clipping"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (WATCHDOG * 4) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
