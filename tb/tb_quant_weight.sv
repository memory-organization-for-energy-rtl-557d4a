// tb_quant_weight: self-checking test of Q_W.
// For b_w = 8 (and a second instance with b_w = 2, the smallest precision the
// paper sweeps) the output must be clip(x, -(2^(b_w-1)-1), 2^(b_w-1)-1).
module tb_quant_weight;
  logic signed [17:0] x;
  logic signed [7:0] w8;
  logic signed [1:0] w2;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  quant_weight #(.BW(8), .IW(18)) dut8 (.x, .w(w8));
  quant_weight #(.BW(2), .IW(18)) dut2 (.x, .w(w2));

  function automatic int clip(int v, int lim);
    return (v > lim) ? lim : (v < -lim) ? -lim : v;
  endfunction

  task automatic check1(int xi);
    x = 18'(xi);
    #1;
    checks++;
    if (int'(w8) != clip(xi, 127) || int'(w2) != clip(xi, 1)) begin
      failures++;
      $display("FAIL x=%0d got %0d/%0d", xi, w8, w2);
    end
  endtask

  initial begin
    check1(-128); check1(-127); check1(127); check1(128); check1(0); check1(-2); check1(2);
    check1(-131072); check1(131071);
    for (int n = 0; n < 2000; n++) check1($signed($urandom_range(0, 1200)) - 600);
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
