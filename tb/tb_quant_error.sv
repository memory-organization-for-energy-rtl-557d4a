// tb_quant_error: self-checking test of Q_E.
// Streams random error sets through the max tracker, then checks every
// quantized value against eq = clip(e * 2^(6-L), +/-127) with L the leading-one
// position of max|e|, that the largest error lands in 64..127, and that clr
// restarts the maximum.
module tb_quant_error;
  import snn_pkg::*;
  logic clk = 0, rst_n = 0, clr = 0, trk_valid = 0;
  logic signed [E_W-1:0] trk_e = '0, e = '0;
  logic signed [EQ_W-1:0] eq;
  logic [E_W-1:0] max_abs;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  quant_error dut (.clk, .rst_n, .clr, .trk_valid, .trk_e, .e, .eq, .max_abs);

  function automatic int ref_q(int ev, int mx);
    int lead, v;
    if (mx == 0) return 0;
    lead = 0;
    for (int b = 0; b < 16; b++) if (mx[b]) lead = b;
    if (lead >= 6) v = ev >>> (lead - 6); else v = ev <<< (6 - lead);
    if (v > 127) v = 127;
    if (v < -127) v = -127;
    return v;
  endfunction

  int vals[32];
  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int set = 0; set < 60; set++) begin
      int mx, range;
      range = 1 << $urandom_range(0, 15);
      mx = 0;
      @(negedge clk); clr = 1; @(negedge clk); clr = 0;
      for (int n = 0; n < 32; n++) begin
        vals[n] = $signed($urandom_range(0, 2 * range - 2)) - (range - 1);
        if (set == 3 && n == 5) vals[n] = -32767;
        if ((vals[n] < 0 ? -vals[n] : vals[n]) > mx) mx = (vals[n] < 0 ? -vals[n] : vals[n]);
        trk_valid = 1; trk_e = E_W'(vals[n]);
        @(negedge clk);
      end
      trk_valid = 0;
      checks++;
      if (int'(max_abs) != mx) begin failures++; $display("FAIL max %0d exp %0d", max_abs, mx); end
      for (int n = 0; n < 32; n++) begin
        int a;
        e = E_W'(vals[n]); #1;
        checks++;
        if (int'(eq) != ref_q(vals[n], mx)) begin
          failures++; $display("FAIL e=%0d max=%0d got %0d exp %0d", vals[n], mx, eq, ref_q(vals[n], mx));
        end
        a = (vals[n] < 0) ? -vals[n] : vals[n];
        if (a == mx && mx != 0) begin
          checks++;
          if ((eq < 0 ? -eq : eq) < 64) begin failures++; $display("FAIL max not normalized"); end
        end
      end
    end
    @(negedge clk); clr = 1; @(negedge clk); clr = 0;
    checks++; if (max_abs != 0) failures++;
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
