// tb_quant_membrane: self-checking test of Q_M.
// Reference: M = clip(U >>> shift, -32767, 32767).
module tb_quant_membrane;
  import snn_pkg::*;
  logic signed [ACC_W-1:0] u;
  logic [4:0] shift;
  logic signed [M_W-1:0] m;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  quant_membrane dut (.u, .shift, .m);

  task automatic check1(int ui, int s);
    longint e;
    u = ui; shift = 5'(s);
    #1;
    e = longint'(ui) >>> s;
    if (e > 32767) e = 32767;
    if (e < -32767) e = -32767;
    checks++;
    if (m !== M_W'(e)) begin
      failures++;
      $display("FAIL u=%0d s=%0d got %0d exp %0d", ui, s, m, e);
    end
  endtask

  initial begin
    check1(32767, 0); check1(32768, 0); check1(-40000, 0); check1(-32768, 0);
    check1(-1, 3); check1(1 << 20, 4); check1(-(1 << 20), 5); check1(123456, 2);
    for (int n = 0; n < 2000; n++) check1($urandom, $urandom_range(0, 31));
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
