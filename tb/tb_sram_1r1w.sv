// tb_sram_1r1w: self-checking test of the synchronous memory.
// Writes random data, reads back with one cycle of latency against a shadow
// array, checks read-before-write on a same-address collision and that rdata
// holds when re is low.
module tb_sram_1r1w;
  localparam int DEPTH = 1000, WIDTH = 12;
  logic clk = 0, re = 0, we = 0;
  logic [9:0] raddr = '0, waddr = '0;
  logic [WIDTH-1:0] rdata, wdata = '0;
  logic [WIDTH-1:0] shadow [DEPTH];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  sram_1r1w #(.DEPTH(DEPTH), .WIDTH(WIDTH)) dut (.clk, .re, .raddr, .rdata, .we, .waddr, .wdata);

  initial begin
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk); we = 1; waddr = 10'(a); wdata = WIDTH'($urandom); shadow[a] = wdata;
    end
    @(negedge clk); we = 0;
    for (int n = 0; n < 3000; n++) begin
      int a, b; logic [WIDTH-1:0] exp_d;
      a = $urandom_range(0, DEPTH - 1);
      b = ($urandom_range(0, 3) == 0) ? a : $urandom_range(0, DEPTH - 1);
      @(negedge clk);
      re = 1; raddr = 10'(a); exp_d = shadow[a];
      we = 1; waddr = 10'(b); wdata = WIDTH'($urandom);
      @(posedge clk); #1;
      shadow[b] = wdata;
      checks++;
      if (rdata !== exp_d) begin failures++; $display("FAIL a=%0d got %h exp %h", a, rdata, exp_d); end
      re = 0; we = 0;
      @(negedge clk);
      checks++;
      if (rdata !== exp_d) begin failures++; $display("FAIL hold"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
