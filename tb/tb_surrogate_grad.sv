// tb_surrogate_grad: self-checking test of the surrogate derivative.
// Reference: k = min(|M - theta| >> shift, 63), sg = floor(16320 / (8+k)^2);
// also checks that the value is 255 at the threshold, symmetric about it and
// non-increasing with distance.
module tb_surrogate_grad;
  import snn_pkg::*;
  logic signed [M_W-1:0] m, th;
  logic [3:0] shift;
  logic [SG_W-1:0] sg;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  surrogate_grad dut (.m, .theta_m(th), .shift, .sg);

  function automatic int ref_sg(int mi, int ti, int s);
    int a, k;
    a = mi - ti; if (a < 0) a = -a;
    k = a >> s; if (k > 63) k = 63;
    return 16320 / ((8 + k) * (8 + k));
  endfunction

  task automatic check1(int mi, int ti, int s);
    m = M_W'(mi); th = M_W'(ti); shift = 4'(s);
    #1;
    checks++;
    if (int'(sg) != ref_sg(mi, ti, s)) begin
      failures++;
      $display("FAIL m=%0d th=%0d s=%0d got %0d exp %0d", mi, ti, s, sg, ref_sg(mi, ti, s));
    end
  endtask

  initial begin
    int prev;
    check1(100, 100, 0);
    checks++; if (sg != 255) failures++;
    prev = 256;
    for (int d = 0; d < 80; d++) begin
      int sp, sn;
      check1(50 + d, 50, 0); sp = int'(sg);
      check1(50 - d, 50, 0); sn = int'(sg);
      checks++;
      if (sp != sn || sp > prev) begin failures++; $display("FAIL shape at d=%0d", d); end
      prev = sp;
    end
    for (int n = 0; n < 2000; n++)
      check1($signed($urandom_range(0, 65534)) - 32767, $signed($urandom_range(0, 2000)) - 1000, $urandom_range(0, 15));
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
