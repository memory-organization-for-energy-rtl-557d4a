// tb_bmp_conn_gen: self-checking test of the PB-BMP connectivity.
// Builds a random sparse connectivity (density drawn per test), writes its
// bitmap rows and row pointers (prefix sums of the row populations, i.e. a
// compressed weight table), then checks every forward row walk and every
// backward column scan against the lists derived here: forward emits
// (i, ptr[j]+rank) for each set bit in column order; backward emits
// (j, ptr[j]+popcount(row j below i)) for each row with bit i set. Cycle
// counts are checked: forward = popcount + 3, backward = n_rows + 3.
module tb_bmp_conn_gen;
  import snn_pkg::*;
  localparam int NR = 24, NC = 40;
  logic clk = 0, rst_n = 0, start = 0;
  logic cfg_bmp_we = 0, cfg_ptr_we = 0;
  logic [4:0] cfg_row = '0;
  logic [NC-1:0] cfg_bits = '0;
  logic [17:0] cfg_ptr = '0;
  logic [5:0] n_rows;
  logic [6:0] n_cols;
  dir_e dir = DIR_FWD;
  logic [15:0] anchor = '0;
  logic busy, out_valid, done;
  logic [15:0] out_idx;
  logic [17:0] out_waddr;
  logic [NC-1:0] bm [NR];
  int ptr [NR];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  bmp_conn_gen #(.N_ROWS(NR), .N_COLS(NC), .WADDR_W(18)) dut (
    .clk, .rst_n, .cfg_bmp_we, .cfg_ptr_we, .cfg_row, .cfg_bits, .cfg_ptr, .n_rows, .n_cols,
    .start, .dir, .anchor, .busy, .out_valid, .out_idx, .out_waddr, .done);

  typedef struct { int idx, wa; } syn_t;
  syn_t exp_q[$];

  task automatic run_one(bit bwd, int a, int exp_cycles);
    int cyc;
    @(negedge clk);
    start = 1; dir = bwd ? DIR_BWD : DIR_FWD; anchor = 16'(a);
    @(negedge clk); start = 0;
    cyc = 1;
    forever begin
      if (out_valid) begin
        syn_t s;
        checks++;
        if (exp_q.size() == 0) begin failures++; $display("FAIL extra output"); end
        else begin
          s = exp_q.pop_front();
          if (int'(out_idx) != s.idx || int'(out_waddr) != s.wa) begin
            failures++;
            $display("FAIL bwd=%0d a=%0d got %0d/%0d exp %0d/%0d", bwd, a, out_idx, out_waddr, s.idx, s.wa);
          end
        end
      end
      if (done) break;
      if (cyc > 10000) break;
      cyc++;
      @(negedge clk);
    end
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL missing %0d", exp_q.size()); end
    checks++;
    if (cyc != exp_cycles) begin failures++; $display("FAIL cycles %0d exp %0d (bwd=%0d)", cyc, exp_cycles, bwd); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 6; t++) begin
      int dens, nr, nc, base;
      dens = $urandom_range(5, 100);
      nr = $urandom_range(1, NR); nc = $urandom_range(1, NC);
      n_rows = 6'(nr); n_cols = 7'(nc);
      base = $urandom_range(0, 1000);
      for (int j = 0; j < NR; j++) begin
        for (int i = 0; i < NC; i++) bm[j][i] = (i < nc) && ($urandom_range(1, 100) <= dens);
        ptr[j] = base;
        for (int i = 0; i < NC; i++) base += bm[j][i];
        @(negedge clk);
        cfg_bmp_we = 1; cfg_ptr_we = 1; cfg_row = 5'(j); cfg_bits = bm[j]; cfg_ptr = 18'(ptr[j]);
      end
      @(negedge clk); cfg_bmp_we = 0; cfg_ptr_we = 0;
      for (int j = 0; j < nr; j++) begin
        int k;
        k = 0;
        exp_q.delete();
        for (int i = 0; i < nc; i++) if (bm[j][i]) begin exp_q.push_back('{i, ptr[j] + k}); k++; end
        run_one(0, j, k + 3);
      end
      for (int i = 0; i < nc; i++) begin
        exp_q.delete();
        for (int j = 0; j < nr; j++) if (bm[j][i]) begin
          int below;
          below = 0;
          for (int b = 0; b < i; b++) below += bm[j][b];
          exp_q.push_back('{j, ptr[j] + below});
        end
        run_one(1, i, nr + 3);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
