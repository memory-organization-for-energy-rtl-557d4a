// bmp_conn_gen: pointer-based bitmap (PB-BMP) connectivity for sparse layers.
//
// The connectivity of an N_ROWS x N_COLS (presynaptic x postsynaptic) layer is
// held in two indirection tables kept apart from the weight table:
//   bitmap  : one row of N_COLS bits per presynaptic neuron, bit i set when the
//             synapse to postsynaptic neuron i exists;
//   pointer : per presynaptic neuron, the weight-table address of its first
//             nonzero synapse. Nonzero weights of a row are stored contiguously
//             in column order, so synapse (j,i) lives at
//             ptr[j] + popcount(bitmap[j][i-1:0]).
// Forward (DIR_FWD, anchor = row j): one bitmap and one pointer read, then the
// set bits are visited one per cycle with a find-first-set, skipping absent
// synapses without any memory access. Backward (DIR_BWD, anchor = column i):
// every row j is read in turn (one row per cycle, pipelined); where bit i is set
// the synapse address is formed with the masked popcount.
//
// Timing: start (one cycle, while not busy). Forward: 2 cycles to fetch the
// row, then one out_valid per existing synapse. Backward: n_rows + 2 cycles.
// done pulses one cycle after the last possible output.
// Tables are written through the cfg_* port while the generator is idle.
//
// Follows the paper: the PB-BMP scheme (bitmap plus row pointers) and the split
// of indirection and weight tables into different memories. Own choices: a
// whole bitmap row per memory word, the find-first-set forward walk and the
// popcount-based transposed access.
module bmp_conn_gen
  import snn_pkg::*;
#(
  parameter int unsigned N_ROWS  = 728,  // largest presynaptic population held
  parameter int unsigned N_COLS  = 400,  // largest postsynaptic population held
  parameter int unsigned WADDR_W = 18,
  localparam int unsigned RW = $clog2(N_ROWS),
  localparam int unsigned CW = $clog2(N_COLS)
) (
  input  logic               clk,
  input  logic               rst_n,
  // table configuration
  input  logic               cfg_bmp_we,
  input  logic               cfg_ptr_we,
  input  logic [RW-1:0]      cfg_row,
  input  logic [N_COLS-1:0]  cfg_bits,
  input  logic [WADDR_W-1:0] cfg_ptr,
  // active layer size
  input  logic [RW:0]        n_rows,
  input  logic [CW:0]        n_cols,
  // access
  input  logic               start,
  input  dir_e               dir,
  input  logic [15:0]        anchor,     // row j (forward) or column i (backward)
  output logic               busy,
  output logic               out_valid,
  output logic [15:0]        out_idx,    // postsynaptic i (forward) or presynaptic j (backward)
  output logic [WADDR_W-1:0] out_waddr,
  output logic               done
);
  typedef enum logic [2:0] {S_IDLE, S_F_FETCH, S_F_WALK, S_B_SCAN, S_DONE} state_e;
  state_e state;

  // ---- indirection tables ----
  logic              t_re;
  logic [RW-1:0]     t_raddr;
  logic [N_COLS-1:0] row_bits;
  logic [WADDR_W-1:0] row_ptr;

  sram_1r1w #(.DEPTH(N_ROWS), .WIDTH(N_COLS)) u_bitmap (
    .clk, .re(t_re), .raddr(t_raddr), .rdata(row_bits),
    .we(cfg_bmp_we), .waddr(cfg_row), .wdata(cfg_bits));
  sram_1r1w #(.DEPTH(N_ROWS), .WIDTH(WADDR_W)) u_ptr (
    .clk, .re(t_re), .raddr(t_raddr), .rdata(row_ptr),
    .we(cfg_ptr_we), .waddr(cfg_row), .wdata(cfg_ptr));

  // ---- column mask of the active layer ----
  logic [N_COLS-1:0] col_mask;
  always_comb
    for (int b = 0; b < N_COLS; b++) col_mask[b] = (b < int'(n_cols));

  // ---- forward walk: find first set bit ----
  logic [N_COLS-1:0]  rem;          // remaining bits of the row
  logic [WADDR_W-1:0] base;
  logic [CW:0]        cnt;          // synapses emitted so far in this row
  logic [CW-1:0]      ffs;
  logic               any;
  always_comb begin
    ffs = '0; any = 1'b0;
    for (int b = N_COLS - 1; b >= 0; b--)
      if (rem[b]) begin ffs = CW'(b); any = 1'b1; end
  end

  // ---- backward scan ----
  logic [RW:0]   scan_j;            // row being requested
  logic          rd_pend;           // a row read returns this cycle
  logic [RW-1:0] rd_j;              // row whose data is returning
  logic [CW-1:0] col_q;
  logic [CW:0]   below;             // popcount of bits below the column
  logic          hit;
  always_comb begin
    below = '0;
    for (int b = 0; b < N_COLS; b++)
      if (b < int'(col_q)) below = below + (CW+1)'(row_bits[b]);
  end
  assign hit = row_bits[col_q];


  always_comb begin
    t_re = 1'b0; t_raddr = '0;
    if (start && !busy && dir == DIR_FWD) begin
      t_re = 1'b1; t_raddr = anchor[RW-1:0];
    end else if (state == S_B_SCAN && scan_j < n_rows) begin
      t_re = 1'b1; t_raddr = scan_j[RW-1:0];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; rem <= '0; base <= '0; cnt <= '0;
      scan_j <= '0; rd_pend <= 1'b0; rd_j <= '0; col_q <= '0;
      out_valid <= 1'b0; out_idx <= '0; out_waddr <= '0; done <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      done      <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          if (dir == DIR_FWD) begin
            state <= S_F_FETCH;
          end else begin
            state <= S_B_SCAN; scan_j <= '0; rd_pend <= 1'b0;
            col_q <= anchor[CW-1:0];
          end
        end
        S_F_FETCH: begin             // table data returns this cycle
          rem <= row_bits & col_mask; base <= row_ptr; cnt <= '0;
          state <= S_F_WALK;
        end
        S_F_WALK: begin
          if (any) begin
            out_valid <= 1'b1;
            out_idx   <= 16'(ffs);
            out_waddr <= base + WADDR_W'(cnt);
            cnt       <= cnt + 1'b1;
            rem[ffs]  <= 1'b0;
          end else begin
            done  <= 1'b1;
            state <= S_IDLE;
          end
        end
        S_B_SCAN: begin
          // issue side
          if (scan_j < n_rows) scan_j <= scan_j + 1'b1;
          rd_pend <= (scan_j < n_rows);
          rd_j    <= scan_j[RW-1:0];
          // return side
          if (rd_pend && hit) begin
            out_valid <= 1'b1;
            out_idx   <= 16'(rd_j);
            out_waddr <= row_ptr + WADDR_W'(below);
          end
          if (!rd_pend && scan_j >= n_rows) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

`ifndef SYNTHESIS
  a_no_start_busy: assert property (@(posedge clk) disable iff (!rst_n) !(start && busy))
    else $error("bmp_conn_gen: start while busy");
  a_no_cfg_busy: assert property (@(posedge clk) disable iff (!rst_n) !((cfg_bmp_we || cfg_ptr_we) && busy))
    else $error("bmp_conn_gen: table written while busy");
`endif
endmodule
