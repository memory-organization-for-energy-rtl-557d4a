// mac_unit: multiply-accumulate into an indexed accumulator memory.
//
// One instance forms the forward MAC (sum over presynaptic neurons of W*P into
// the postsynaptic membrane accumulator); a second forms the backward MAC (sum
// over postsynaptic neurons of W*delta into the error of the presynaptic
// neuron). Each accepted operand pair adds a*b to acc[idx].
//
// Pipeline (one operation per cycle, fully pipelined):
//   cycle 0  in_valid: product registered, acc[idx] read issued
//   cycle 1  sum = acc[idx] + product, written back
// A read-modify-write of the same index on consecutive cycles is forwarded from
// the last written value, so back-to-back hits on one neuron are exact.
// Read-out port: rd_valid/rd_idx reads acc[rd_idx] (data on out_valid one cycle
// later) and clears it to zero. Read-out must not overlap accumulation
// (asserted); after the last in_valid wait two cycles before reading out.
// The accumulators are not reset; clear them once with the read-out port.
//
// Follows the paper: a MAC in the forward and in the backward pass. The
// accumulator memory, pipeline and forwarding are choices of this design.
module mac_unit #(
  parameter int unsigned DEPTH = 25088,
  parameter int unsigned A_W   = 8,
  parameter int unsigned B_W   = 17,
  parameter int unsigned ACC_W = 32,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic [AW-1:0]           in_idx,
  input  logic signed [A_W-1:0]   in_a,
  input  logic signed [B_W-1:0]   in_b,
  input  logic                    rd_valid,
  input  logic [AW-1:0]           rd_idx,
  output logic                    out_valid,
  output logic signed [ACC_W-1:0] out_data
);
  logic                    s1_valid, s1_rd;
  logic [AW-1:0]           s1_idx;
  logic signed [ACC_W-1:0] s1_prod;
  logic                    lw_valid;
  logic [AW-1:0]           lw_idx;
  logic signed [ACC_W-1:0] lw_data;

  logic                    re, we;
  logic [AW-1:0]           raddr, waddr;
  logic [ACC_W-1:0]        rdata, wdata;

  sram_1r1w #(.DEPTH(DEPTH), .WIDTH(ACC_W)) u_acc (
    .clk, .re, .raddr, .rdata, .we, .waddr, .wdata);

  logic signed [ACC_W-1:0] base, sum;
  assign base = (lw_valid && lw_idx == s1_idx) ? lw_data : $signed(rdata);
  assign sum  = base + s1_prod;

  assign re    = in_valid || rd_valid;
  assign raddr = rd_valid ? rd_idx : in_idx;
  // stage 1 writes the new sum, or zero for a read-out
  assign we    = s1_valid || s1_rd;
  assign waddr = s1_idx;
  assign wdata = s1_rd ? '0 : sum;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0; s1_rd <= 1'b0; s1_idx <= '0; s1_prod <= '0;
      lw_valid <= 1'b0; lw_idx <= '0; lw_data <= '0;
    end else begin
      s1_valid <= in_valid && !rd_valid;
      s1_rd    <= rd_valid;
      s1_idx   <= raddr;
      s1_prod  <= ACC_W'(in_a) * ACC_W'(in_b);
      lw_valid <= we;
      lw_idx   <= waddr;
      lw_data  <= wdata;
    end
  end

  assign out_valid = s1_rd;
  assign out_data  = base;

`ifndef SYNTHESIS
  a_no_overlap: assert property (@(posedge clk) disable iff (!rst_n) !(in_valid && rd_valid))
    else $error("mac_unit: accumulate and read-out in the same cycle");
`endif
endmodule
