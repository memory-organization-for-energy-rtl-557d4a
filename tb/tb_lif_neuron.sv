// tb_lif_neuron: self-checking test of the membrane computation.
// Reference: U = acc - (delta*R >> 8), S = (U >= theta),
// R' = sat(gamma*R/256 + S*256), with random and corner-case operands
// (exactly at threshold, saturated refractory state).
module tb_lif_neuron;
  import snn_pkg::*;
  logic signed [ACC_W-1:0] acc, theta, u;
  logic [TR_W-1:0] r, rn;
  logic [15:0] delta;
  logic [DECAY_FRAC-1:0] gamma;
  logic spike;
  int checks = 0, failures = 0, spikes = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  lif_neuron dut (.acc, .r, .delta, .theta, .gamma, .u, .spike, .r_next(rn));

  task automatic check1(int a, int ri, int d, int th, int g);
    longint eu, er; bit es;
    acc = a; r = TR_W'(ri); delta = 16'(d); theta = th; gamma = 8'(g);
    #1;
    eu = longint'(a) - ((longint'(d) * ri) >>> 8);
    es = (eu >= th);
    er = ((longint'(ri) * g) / 256) + (es ? 256 : 0);
    if (er > 65535) er = 65535;
    checks++;
    if (u !== ACC_W'(eu) || spike !== es || rn !== TR_W'(er)) begin
      failures++;
      $display("FAIL acc=%0d r=%0d d=%0d th=%0d g=%0d got u=%0d s=%0d r'=%0d exp %0d %0d %0d",
               a, ri, d, th, g, u, spike, rn, eu, es, er);
    end
    if (es) spikes++;
  endtask

  initial begin
    check1(1000, 0, 100, 1000, 200);      // exactly at threshold: spikes
    check1(999, 0, 100, 1000, 200);       // just below
    check1(5000, 512, 1000, 1000, 128);   // refractory subtracts 2000
    check1(100000, 65535, 0, 0, 255);     // R saturates
    for (int n = 0; n < 2000; n++)
      check1($signed($urandom_range(0, 200000)) - 100000, $urandom_range(0, 65535),
             $urandom_range(0, 65535), $urandom_range(0, 50000), $urandom_range(0, 255));
    if (spikes == 0) failures++;
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
