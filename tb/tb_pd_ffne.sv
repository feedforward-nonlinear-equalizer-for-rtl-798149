// tb_pd_ffne: end-to-end test of the PD-FFNE receiver.
//
// Channel [h-1, h0, h1] = [0.3, 1.0, 0.3] * 40 LSB, the artificial channel
// used to compare PD-FFNE with DFE baselines, with hx = h0/2.
// Part 1: a receiver with its taps preset to the channel and adaptation off
// must decode a noise-free stream without error, 5 clocks after each
// sample. Part 2: with added noise, the final decisions are compared with
// the transmitted bits and with the raw postcursor branch; the pattern
// filter must make fewer errors than that branch, and every pattern must
// fire at least once. Part 3: a second receiver starts from h0 = 32,
// h1 = h-1 = 0 and adapts; its taps must settle within one LSB and its
// decisions must be error-free over the last part of a mildly noisy run.
module tb_pd_ffne;
  import ffne_pkg::*;

  localparam int W = SAMPLE_W, TW = TAP_W, LAT = 5;
  localparam int HM1 = 12, H0 = 40, H1 = 12, NMAX = 64000;
  logic clk = 0, rst_n = 0;
  logic signed [W-1:0] vin = '0;
  logic signed [TW-1:0] hx = TW'(H0 / 2);
  logic d_f, d_a;
  pd_fire_t fire_f, fire_a;
  logic signed [TW-1:0] hm1_f, h0_f, h1_f, hm1_a, h0_a, h1_a;
  logic adapt_a = 1;
  int checks = 0, failures = 0;
  int fired [4] = '{0, 0, 0, 0};
  bit a [NMAX];
  int  vs [NMAX];

  pd_ffne #(.H0_INIT(H0), .H1_INIT(H1), .HM1_INIT(HM1)) dut_f (
    .clk, .rst_n, .adapt_en(1'b0), .vin, .hx, .d(d_f), .fire(fire_f),
    .hm1_hat(hm1_f), .h0_hat(h0_f), .h1_hat(h1_f));

  pd_ffne dut_a (
    .clk, .rst_n, .adapt_en(adapt_a), .vin, .hx, .d(d_a), .fire(fire_a),
    .hm1_hat(hm1_a), .h0_hat(h0_a), .h1_hat(h1_a));

  always #5 clk = ~clk;

  initial begin
    repeat (3 * NMAX) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int pol(bit b);
    return b ? 1 : -1;
  endfunction

  // Approximately Gaussian noise: sum of four uniform values in [-s, s].
  function automatic int noise(int s);
    logic [31:0] r;
    int acc = 0;
    if (s == 0) return 0;
    for (int i = 0; i < 4; i++) begin
      r = $urandom;
      acc += int'(r % (2 * s + 1)) - s;
    end
    return acc / 2;
  endfunction

  // Run n symbols with noise level s; count errors of both receivers and
  // of the raw postcursor branch of the fixed receiver from symbol skip on.
  task automatic run(int n, int s, int skip, output int err_f, output int err_a,
                     output int err_raw);
    err_f = 0; err_a = 0; err_raw = 0;
    for (int i = 0; i < n; i++) begin
      logic [31:0] r;
      r = $urandom;
      a[i] = r[0];
    end
    for (int i = 0; i < n + LAT; i++) begin
      int vv;
      @(negedge clk);
      if (i < n) begin
        vv = H0 * pol(a[i]) + (i > 0 ? H1 * pol(a[i-1]) : 0)
           + (i + 1 < n ? HM1 * pol(a[i+1]) : 0) + noise(s);
        if (vv > 127) vv = 127;
        if (vv < -128) vv = -128;
        vin = W'(vv);
        vs[i] = vv;
      end else vin = '0;
      @(posedge clk); #1;
      // After the clock edge of step i the output holds symbol i-(LAT-1).
      if (i >= LAT - 1 && i - (LAT - 1) >= skip && i - (LAT - 1) < n - 1) begin
        int k = i - (LAT - 1);
        if (d_f !== a[k]) err_f++;
        if (d_a !== a[k]) err_a++;
        // Postcursor Win-2 rule alone on the same samples.
        if (((vs[k] > H1) || (vs[k] > -H1 && k > 0 && vs[k] >= vs[k-1])) != a[k]) err_raw++;
        if (fire_f.p1) fired[0]++;
        if (fire_f.p2) fired[1]++;
        if (fire_f.p3) fired[2]++;
        if (fire_f.p4) fired[3]++;
      end
    end
  endtask

  function automatic void near(string what, int got, int want, int tol);
    checks++;
    if (got < want - tol || got > want + tol) begin
      failures++;
      $display("%s = %0d, expected %0d +- %0d", what, got, want, tol);
    end else
      $display("%s = %0d (expected %0d)", what, got, want);
  endfunction

  initial begin
    int ef, ea, er;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // Part 3 first half: let the adaptive receiver converge on a mildly noisy stream.
    run(30000, 3, 20000, ef, ea, er);
    checks++; if (ef != 0) failures++;
    checks++; if (ea != 0) failures++;
    $display("mild noise: fixed %0d, adaptive %0d errors", ef, ea);
    near("adaptive h-1", hm1_a, HM1, 1);
    near("adaptive h0", h0_a, H0, 1);
    near("adaptive h1", h1_a, H1, 1);
    // Part 1: noise-free.
    run(2000, 0, 0, ef, ea, er);
    checks++; if (ef != 0) failures++;
    $display("noise-free: fixed %0d errors", ef);
    // Part 2: strong noise.
    adapt_a = 0;
    fired = '{0, 0, 0, 0};
    run(30000, 20, 0, ef, ea, er);
    $display("noisy: PD-FFNE %0d errors, postcursor branch alone %0d errors", ef, er);
    $display("patterns fired: 1:%0d 2:%0d 3:%0d 4:%0d", fired[0], fired[1], fired[2], fired[3]);
    checks++; if (!(ef < er)) failures++;
    for (int p = 0; p < 4; p++) begin
      checks++;
      if (fired[p] == 0) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
