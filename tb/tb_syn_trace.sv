// tb_syn_trace: self-checking test of the synaptic/membrane trace update.
// Drives random traces, spikes and decay constants (plus corner cases at the
// saturation limit) and compares with Q' = sat(alpha*Q/256 + S*256),
// P' = sat(beta*P/256 + Q) computed here in integer arithmetic. In binary mode
// the expected result is Q' = 0, P' = S*256 whatever the old state.
module tb_syn_trace;
  import snn_pkg::*;
  logic [TR_W-1:0] q, p, qn, pn;
  logic spike, bin = 0;
  logic [DECAY_FRAC-1:0] alpha, beta;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  syn_trace dut (.q, .p, .spike, .bin, .alpha, .beta, .q_next(qn), .p_next(pn));

  function automatic longint sat(longint v);
    return (v > 65535) ? 65535 : v;
  endfunction

  task automatic check1(int qi, int pi, bit s, int a, int b);
    longint eq, ep;
    q = TR_W'(qi); p = TR_W'(pi); spike = s; alpha = 8'(a); beta = 8'(b);
    #1;
    eq = bin ? 0 : sat((longint'(qi) * a) / 256 + (s ? 256 : 0));
    ep = bin ? (s ? 256 : 0) : sat((longint'(pi) * b) / 256 + qi);
    checks++;
    if (qn !== TR_W'(eq) || pn !== TR_W'(ep)) begin
      failures++;
      $display("FAIL q=%0d p=%0d s=%0d a=%0d b=%0d got %0d/%0d exp %0d/%0d", qi, pi, s, a, b, qn, pn, eq, ep);
    end
  endtask

  initial begin
    check1(0, 0, 1, 200, 200);          // first spike: Q = 1.0
    check1(256, 0, 0, 128, 128);        // Q halves, P picks up old Q
    check1(65535, 65535, 1, 255, 255);  // saturation
    check1(1000, 60000, 0, 0, 255);
    for (int n = 0; n < 2000; n++)
      check1($urandom_range(0, 65535), $urandom_range(0, 65535), 1'($urandom), $urandom_range(0, 255), $urandom_range(0, 255));
    bin = 1;
    check1(65535, 65535, 1, 255, 255);
    check1(65535, 65535, 0, 255, 255);
    for (int n = 0; n < 200; n++)
      check1($urandom_range(0, 65535), $urandom_range(0, 65535), 1'($urandom), $urandom_range(0, 255), $urandom_range(0, 255));
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
