// tb_conv_conn_gen: self-checking test of the functional connectivity generator.
// For random layer geometries and anchors, in both directions, the emitted
// synapse list (target channel/row/column, neuron address, weight address) is
// compared entry by entry with a list built here from the definition of a
// convolution: forward target (co, r+pr, c+pc) kept when inside the output map,
// backward source (ci, r-pr, c-pc) kept when inside the input map, weight index
// ((co*in_ch+ci)*k+pr)*k+pc. Also checks the iteration time (one candidate per
// cycle: done n_ch*k*k+1 cycles after start, one cycle of output latency) and
// the gated count.
module tb_conv_conn_gen;
  import snn_pkg::*;
  logic clk = 0, rst_n = 0, start = 0;
  conv_cfg_t cfg;
  dir_e dir;
  logic [DIM_W-1:0] a_ch, a_r, a_c;
  logic busy, out_valid, out_gated, done;
  logic [DIM_W-1:0] o_ch, o_r, o_c;
  logic [14:0] o_naddr;
  logic [17:0] o_waddr;
  int checks = 0, failures = 0, gated_seen = 0, bwd_runs = 0, fwd_runs = 0;
  always #5 clk = ~clk;

  conv_conn_gen dut (.clk, .rst_n, .cfg, .start, .dir, .anchor_ch(a_ch), .anchor_r(a_r), .anchor_c(a_c),
    .busy, .out_valid, .out_ch(o_ch), .out_r(o_r), .out_c(o_c), .out_naddr(o_naddr),
    .out_waddr(o_waddr), .out_gated, .done);

  typedef struct { int ch, r, c, na, wa; } syn_t;
  syn_t exp_q[$];

  task automatic run_one(bit bwd, int ch, int r, int c);
    int nch, lh, lw, cyc, ngated, nvalid;
    exp_q.delete();
    nch = bwd ? int'(cfg.in_ch) : int'(cfg.out_ch);
    lh  = bwd ? int'(cfg.in_h)  : int'(cfg.out_h);
    lw  = bwd ? int'(cfg.in_w)  : int'(cfg.out_w);
    for (int x = 0; x < nch; x++)
      for (int pr = 0; pr < int'(cfg.k); pr++)
        for (int pc = 0; pc < int'(cfg.k); pc++) begin
          int tr, tc, oc, ic;
          tr = bwd ? r - pr : r + pr;
          tc = bwd ? c - pc : c + pc;
          oc = bwd ? ch : x;
          ic = bwd ? x : ch;
          if (tr >= 0 && tc >= 0 && tr < lh && tc < lw)
            exp_q.push_back('{x, tr, tc, (x * lh + tr) * lw + tc,
                              ((oc * int'(cfg.in_ch) + ic) * int'(cfg.k) + pr) * int'(cfg.k) + pc});
        end
    @(negedge clk);
    start = 1; dir = bwd ? DIR_BWD : DIR_FWD;
    a_ch = DIM_W'(ch); a_r = DIM_W'(r); a_c = DIM_W'(c);
    @(negedge clk); start = 0;
    cyc = 0; ngated = 0; nvalid = 0;
    forever begin
      cyc++;
      if (out_valid) begin
        syn_t s;
        nvalid++;
        checks++;
        if (exp_q.size() == 0) begin failures++; $display("FAIL extra output"); end
        else begin
          s = exp_q.pop_front();
          if (int'(o_ch) != s.ch || int'(o_r) != s.r || int'(o_c) != s.c ||
              int'(o_naddr) != s.na || int'(o_waddr) != s.wa) begin
            failures++;
            $display("FAIL bwd=%0d got ch%0d r%0d c%0d n%0d w%0d exp ch%0d r%0d c%0d n%0d w%0d",
                     bwd, o_ch, o_r, o_c, o_naddr, o_waddr, s.ch, s.r, s.c, s.na, s.wa);
          end
        end
      end
      if (out_gated) ngated++;
      if (done) break;
      if (cyc > 100000) break;
      @(negedge clk);
    end
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL %0d missing outputs", exp_q.size()); end
    checks++;
    if (cyc != nch * int'(cfg.k) * int'(cfg.k) + 1) begin failures++; $display("FAIL cycles %0d", cyc); end
    checks++;
    if (ngated + nvalid != nch * int'(cfg.k) * int'(cfg.k)) begin failures++; $display("FAIL gated count"); end
    gated_seen += ngated;
    if (bwd) bwd_runs++; else fwd_runs++;
  endtask

  initial begin
    cfg = '0; dir = DIR_FWD; a_ch = '0; a_r = '0; a_c = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // the paper's layer geometry: 28x28, 3x3 kernel, 32 -> 32 channels
    cfg.in_ch = 32; cfg.in_h = 28; cfg.in_w = 28;
    cfg.out_ch = 32; cfg.out_h = 28; cfg.out_w = 28; cfg.k = 3;
    run_one(0, 5, 0, 0);
    run_one(0, 31, 27, 27);
    run_one(1, 0, 0, 0);
    run_one(1, 17, 13, 27);
    for (int t = 0; t < 60; t++) begin
      cfg.in_ch = DIM_W'($urandom_range(1, 4)); cfg.out_ch = DIM_W'($urandom_range(1, 4));
      cfg.in_h = DIM_W'($urandom_range(1, 9));  cfg.in_w = DIM_W'($urandom_range(1, 9));
      cfg.k = 8'($urandom_range(1, 5));
      cfg.out_h = DIM_W'(int'(cfg.in_h) + $urandom_range(0, 4));
      cfg.out_w = DIM_W'(int'(cfg.in_w) + $urandom_range(0, 4));
      if (t % 2 == 0)
        run_one(0, $urandom_range(0, int'(cfg.in_ch) - 1), $urandom_range(0, int'(cfg.in_h) - 1),
                $urandom_range(0, int'(cfg.in_w) - 1));
      else
        run_one(1, $urandom_range(0, int'(cfg.out_ch) - 1), $urandom_range(0, int'(cfg.out_h) - 1),
                $urandom_range(0, int'(cfg.out_w) - 1));
    end
    checks++;
    if (gated_seen == 0 || bwd_runs == 0 || fwd_runs == 0) failures++;
    $display("gated candidates: %0d", gated_seen);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
