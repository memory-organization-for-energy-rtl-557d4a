// tb_quant_grad: self-checking test of Q_G.
// Round-to-nearest mode: exact comparison with floor((d*p + 2^(s-1)) / 2^s),
// saturated to +/-32767. Stochastic mode: every result must be the floor or the
// ceiling of d*p/2^s, and over 4000 samples of one value the mean must be
// within 0.1 LSB of the exact quotient (unbiased rounding), and both outcomes occur.
module tb_quant_grad;
  import snn_pkg::*;
  logic clk = 0, rst_n = 0, valid = 0, sr_en = 0;
  logic signed [DL_W-1:0] delta = '0;
  logic [TR_W-1:0] p = '0;
  logic [4:0] shift = '0;
  logic signed [G_W-1:0] gq;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  quant_grad dut (.clk, .rst_n, .valid, .delta, .p, .shift, .sr_en, .gq);

  function automatic longint sat(longint v);
    return (v > 32767) ? 32767 : (v < -32767) ? -32767 : v;
  endfunction
  function automatic longint fdiv(longint a, int s);
    return a >>> s;   // floor division by 2^s
  endfunction

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    // nearest rounding
    sr_en = 0;
    for (int n = 0; n < 2000; n++) begin
      longint g, e;
      @(negedge clk);
      delta = DL_W'($signed($urandom_range(0, 65534)) - 32767);
      p = TR_W'($urandom);
      shift = 5'($urandom_range(0, 31));
      valid = 1;
      #1;
      g = longint'(delta) * longint'(p);
      e = sat(fdiv(g + ((shift != 0) ? (longint'(1) << (shift - 1)) : 0), shift));
      checks++;
      if (longint'(gq) != e) begin failures++; $display("FAIL rn d=%0d p=%0d s=%0d got %0d exp %0d", delta, p, shift, gq, e); end
    end
    // stochastic rounding: floor/ceil and unbiased mean
    sr_en = 1;
    for (int t = 0; t < 8; t++) begin
      longint g, fl, sum; int nlo, nhi; real mean, exact;
      @(negedge clk);
      delta = DL_W'($signed($urandom_range(0, 1000)) - 500);
      p = TR_W'($urandom_range(1, 4000));
      shift = 5'($urandom_range(8, 14));
      g = longint'(delta) * longint'(p);
      fl = fdiv(g, shift);
      sum = 0; nlo = 0; nhi = 0;
      for (int n = 0; n < 4000; n++) begin
        #1;
        checks++;
        if (longint'(gq) != fl && longint'(gq) != fl + 1) begin failures++; $display("FAIL sr range"); end
        if (longint'(gq) == fl) nlo++; else nhi++;
        sum += longint'(gq);
        @(negedge clk);
      end
      mean = real'(sum) / 4000.0;
      exact = real'(g) / real'(longint'(1) << shift);
      checks++;
      if (mean - exact > 0.1 || exact - mean > 0.1) begin
        failures++; $display("FAIL sr bias mean=%f exact=%f", mean, exact);
      end
      if (g % (longint'(1) << shift) != 0) begin
        checks++;
        if (nlo == 0 || nhi == 0) begin failures++; $display("FAIL sr not random"); end
      end
    end
    valid = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
