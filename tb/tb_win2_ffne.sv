// tb_win2_ffne: self-checking test of the NRZ Win-2 FFNE decision core.
//
// A two-tap channel V[k] = h0*a[k] + h1*a[k-1] + noise (polar symbols) feeds
// the block. Every decision is compared with the region rule written out
// from the derivation (bit is 1 above h1, 0 below -h1, and in the strip
// |V[k]| < h1 it is 1 when V[k] > V[k-1]), evaluated on the same samples
// with the gain-weighted difference. Noise-free runs must also return the
// transmitted bits, and a short-window ML search over all 8 three-bit
// sequences is reported; it must agree in an h1 sweep from 0.1 to 0.6 h0
// run with matched summer gains. C[k] and the 1-clock latency are
// checked too, and a gain-mismatch phase checks that Gm1/Gm2 act on the
// difference comparator.
module tb_win2_ffne;
  import ffne_pkg::*;

  localparam int W = SAMPLE_W, TW = TAP_W, GW = GAIN_W;
  logic clk = 0, rst_n = 0;
  logic signed [W-1:0] vin = '0;
  logic signed [TW-1:0] h1;
  logic [GW-1:0] gm1, gm2;
  logic d, c;
  logic signed [W-1:0] v_out;
  int checks = 0, failures = 0, ml_agree = 0, ml_total = 0;

  win2_ffne dut (.clk, .rst_n, .vin, .h1, .gm1, .gm2, .d, .c, .v_out);

  always #5 clk = ~clk;

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic bit rule(int vp, int vc, int th1, int g1, int g2);
    if (vc > th1) return 1;
    if (vc <= -th1) return 0;
    return (g1 * vc - g2 * vp) > 0;
  endfunction

  function automatic bit ml(int vp, int vc, int h0i, int h1i);
    real best = 1.0e30; bit bd = 0;
    for (int s = 0; s < 8; s++) begin
      int a2 = s[2] ? 1 : -1, a1 = s[1] ? 1 : -1, a0 = s[0] ? 1 : -1;
      real e1 = vp - (h0i * a1 + h1i * a2);
      real e0 = vc - (h0i * a0 + h1i * a1);
      real m = e1 * e1 + e0 * e0;
      if (m < best) begin best = m; bd = s[0]; end
    end
    return bd;
  endfunction

  task automatic run(int n, int h0i, int h1i, int noise, int g1, int g2, bit check_tx);
    int a_prev = 1, vp = 0;
    h1 = TW'(h1i); gm1 = GW'(g1); gm2 = GW'(g2);
    for (int i = 0; i < n; i++) begin
      int a = ($urandom % 2 != 0) ? 1 : -1;
      int v = h0i * a + h1i * a_prev + (noise > 0 ? int'($urandom % (2*noise+1)) - noise : 0);
      bit exp_d, exp_c;
      if (v > 127) v = 127;
      if (v < -128) v = -128;
      @(negedge clk);
      vin = W'(v);
      exp_d = rule(vp, v, h1i, g1, g2);
      exp_c = (g1 * v - g2 * vp) > 0;
      @(posedge clk); #1;
      if (i > 0) begin
        checks++;
        if (d !== exp_d || c !== exp_c || v_out !== W'(v)) begin
          failures++;
          if (failures < 10) $display("mismatch i=%0d vp=%0d v=%0d d=%b exp=%b c=%b exp=%b", i, vp, v, d, exp_d, c, exp_c);
        end
        if (check_tx) begin
          checks++;
          if (d !== (a > 0)) failures++;
        end
        ml_total++;
        if (ml(vp, v, h0i, h1i) == d) ml_agree++;
      end
      vp = v; a_prev = a;
    end
  endtask

  initial begin
    h1 = '0; gm1 = GAIN_ONE; gm2 = GAIN_ONE;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // Noise-free, h1 = 0.3*h0: decisions must equal the transmitted bits.
    run(2000, 40, 12, 0, 256, 256, 1);
    // Strong h1 and noise: rule check everywhere.
    run(4000, 40, 16, 14, 256, 256, 0);
    $display("ML agreement %0d of %0d", ml_agree, ml_total);
    // Summer gain mismatch.
    run(3000, 40, 12, 10, 282, 240, 0);
    // h1 sweep 0.1..0.6 h0 with matched summer gains (Gm1 = Gm2): the rule
    // must hold everywhere, and the decisions must agree with the ML search
    // on at least 99.5 % of the samples.
    for (int hh = 4; hh <= 24; hh += 4) begin
      ml_agree = 0; ml_total = 0;
      run(2000, 40, hh, 10, 256, 256, 0);
      $display("h1=%0d: ML agreement %0d of %0d", hh, ml_agree, ml_total);
      checks++;
      if (200 * (ml_total - ml_agree) > ml_total) failures++;
    end
    // Latency: one clock from sample to decision.
    @(negedge clk); vin = 8'sd100;
    @(negedge clk); vin = -8'sd100;
    checks++;
    if (d !== 1'b1) failures++;
    @(posedge clk); #1;
    checks++;
    if (d !== 1'b0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
