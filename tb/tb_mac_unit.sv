// tb_mac_unit: self-checking test of the indexed multiply-accumulate.
// Clears all accumulators, streams random (idx, a, b) one per cycle with many
// back-to-back hits on the same index (exercising forwarding), then reads every
// accumulator out and compares with sums kept here; a second read-out must
// return zero. Checks the one-operation-per-cycle rate: read-out data arrives
// exactly one cycle after each request.
module tb_mac_unit;
  localparam int DEPTH = 64;
  logic clk = 0, rst_n = 0, in_valid = 0, rd_valid = 0, out_valid;
  logic [5:0] in_idx = '0, rd_idx = '0;
  logic signed [7:0] in_a = '0;
  logic signed [16:0] in_b = '0;
  logic signed [31:0] out_data;
  longint model [DEPTH];
  int checks = 0, failures = 0, fwd_hits = 0;
  always #5 clk = ~clk;

  mac_unit #(.DEPTH(DEPTH), .A_W(8), .B_W(17), .ACC_W(32)) dut (
    .clk, .rst_n, .in_valid, .in_idx, .in_a, .in_b, .rd_valid, .rd_idx, .out_valid, .out_data);

  task automatic readout(bit expect_zero);
    for (int i = 0; i <= DEPTH; i++) begin
      @(negedge clk);
      if (i > 0) begin
        checks++;
        if (!out_valid || out_data !== (expect_zero ? 32'sd0 : 32'(model[i-1]))) begin
          failures++;
          $display("FAIL idx %0d got %0d (v=%0d) exp %0d", i - 1, out_data, out_valid, expect_zero ? 0 : model[i-1]);
        end
      end
      rd_valid = (i < DEPTH); rd_idx = 6'(i);
    end
    rd_valid = 0;
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < DEPTH; i++) model[i] = 0;
    // clear
    for (int i = 0; i < DEPTH; i++) begin @(negedge clk); rd_valid = 1; rd_idx = 6'(i); end
    @(negedge clk); rd_valid = 0;
    for (int n = 0; n < 5000; n++) begin
      int id;
      id = ($urandom_range(0, 2) == 0) ? int'(in_idx) : $urandom_range(0, DEPTH - 1);
      if (in_valid && id == int'(in_idx)) fwd_hits++;
      @(negedge clk);
      in_valid = 1; in_idx = 6'(id);
      in_a = 8'($signed($urandom_range(0, 254)) - 127);
      in_b = 17'($signed($urandom_range(0, 131070)) - 65535);
      model[id] += longint'(in_a) * longint'(in_b);
    end
    @(negedge clk); in_valid = 0;
    @(negedge clk);
    readout(0);
    readout(1);
    checks++;
    if (fwd_hits == 0) failures++;
    $display("forwarded back-to-back hits: %0d", fwd_hits);
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
