// sram_1r1w: synchronous single-read single-write memory.
//
// Used for the synapse (weight) memory and for every other state table of the
// layer engine; the paper keeps indirection tables and weight tables in separate
// memories, which is done here by instantiating one of these per table.
// Read: raddr sampled when re is high, rdata valid on the next cycle and held
// until the next read. Write: wdata stored at waddr on the clock edge when we is
// high. A read and a write of the same address in one cycle return the old data.
// There is no reset of the contents; the user must write before reading.
module sram_1r1w #(
  parameter int unsigned DEPTH = 262144,
  parameter int unsigned WIDTH = 8,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule
