// tb_ffne_top: end-to-end test of the equalizer back end at its default
// parameters.
//
// Three phases, each after a reset, drive the sample port with the signal
// one of the equalizers is meant for:
//   1. NRZ, channel [h0, h1] = [40, 24] LSB, 10 % summer gain error: the
//      Win-2 receiver adapts h0, h1 and Gm2 and must then decode without
//      error.
//   2. PAM-4, channel [60, 15] LSB (h1 = h0/4): the PAM-4 FFNE must return
//      every transmitted symbol one clock later.
//   3. NRZ, channel [h-1, h0, h1] = [12, 40, 12] LSB: the PD-FFNE adapts
//      from h0 = 32, h1 = h-1 = 0 and must decode a mildly noisy stream
//      without error, then, on a noisy stream, make fewer errors than a
//      postcursor-only Win-2 rule on the same samples.
//   4. NRZ, channel [h0, h1] = [32, 16] LSB with noise: the Win-3 FFNE must
//      make fewer errors than the Win-2 rule on the same samples, and make
//      none without noise.
// Mechanisms counted (each must occur): decisions in the ambiguous central
// strip |V[k]| < h1, h1 and Gm2 adaptation moves, each PAM-4 symbol, PD tap
// adaptation, each of the four correction patterns and each of the five
// Win-3 region selects.
module tb_ffne_top;
  import ffne_pkg::*;

  localparam int W = SAMPLE_W, TW = TAP_W, GW = GAIN_W, CW = COEF_W;
  logic clk = 0, rst_n = 0, adapt_en = 0;
  logic signed [W-1:0] vin = '0;
  logic [GW-1:0] nrz_gm1 = GW'(282);
  logic nrz_d, pam4_msb, pam4_lsb, pd_d;
  logic signed [TW-1:0] nrz_h0, nrz_h1, pd_hm1, pd_h0, pd_h1;
  logic [GW-1:0] nrz_gm2;
  logic signed [TW-1:0] pam4_h1 = TW'(15), pam4_vth = TW'(40), pd_hx = TW'(20);
  logic signed [CW-1:0] pam4_h1_ratio = CW'(64);
  logic [1:0] pam4_sym;
  pd_fire_t pd_fire;
  logic signed [TW-1:0] w3_h0 = TW'(32), w3_h1 = TW'(16);
  logic signed [CW-1:0] w3_h1_ratio = CW'(128);
  logic w3_d;
  logic [4:0] w3_sel;
  int w3_used [5] = '{0, 0, 0, 0, 0};
  int checks = 0, failures = 0;
  int strip = 0, h1_moves = 0, gm2_moves = 0, pd_moves = 0;
  int sym_seen [4] = '{0, 0, 0, 0};
  int fired [4] = '{0, 0, 0, 0};

  ffne_top dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int pol(bit b);
    return b ? 1 : -1;
  endfunction

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

  task automatic do_reset();
    rst_n = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
  endtask

  function automatic void expect_true(string what, bit ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endfunction

  // Phase 1: NRZ Win-2 FFNE with adaptation.
  task automatic phase_nrz();
    int a_prev = 1, errs = 0;
    logic signed [TW-1:0] h1_last;
    logic [GW-1:0] gm2_last;
    do_reset();
    adapt_en = 1;
    h1_last = nrz_h1; gm2_last = nrz_gm2;
    for (int i = 0; i < 40000; i++) begin
      logic [31:0] r;
      int a, vv;
      r = $urandom;
      a = pol(r[0]);
      vv = 40 * a + 24 * a_prev + int'(r[4:1]) % 9 - 4;
      @(negedge clk);
      vin = W'(vv);
      if (vv < 24 && vv > -24) strip++;
      @(posedge clk); #1;
      if (nrz_h1 != h1_last) h1_moves++;
      if (nrz_gm2 != gm2_last) gm2_moves++;
      h1_last = nrz_h1; gm2_last = nrz_gm2;
      if (i >= 30000) begin
        checks++;
        if (nrz_d !== (a > 0)) begin failures++; errs++; end
      end
      a_prev = a;
    end
    $display("NRZ Win-2: h0=%0d h1=%0d gm2=%0d, %0d errors in last 10000", nrz_h0, nrz_h1, nrz_gm2, errs);
    expect_true("NRZ h1 estimate", nrz_h1 >= 23 && nrz_h1 <= 25);
    expect_true("NRZ Gm2 tracks Gm1", nrz_gm2 >= 274 && nrz_gm2 <= 290);
  endtask

  // Phase 2: PAM-4 Win-2 FFNE.
  task automatic phase_pam4();
    int s_prev = 0;
    do_reset();
    adapt_en = 0;
    for (int i = 0; i < 5000; i++) begin
      int s;
      s = int'($urandom % 4);
      @(negedge clk);
      vin = W'((60 * (2 * s - 3) + 15 * (2 * s_prev - 3)) / 3);
      @(posedge clk); #1;
      if (i > 0) begin
        checks++;
        if (int'(pam4_sym) != s || {pam4_msb, pam4_lsb} != {s >= 2, s == 1 || s == 2})
          failures++;
        sym_seen[s]++;
      end
      s_prev = s;
    end
  endtask

  // Phase 3: PD-FFNE. Returns errors of the PD-FFNE and of the
  // postcursor-only rule from symbol skip on.
  task automatic phase_pd(int n, int s, int skip, bit adapt, output int err_pd,
                          output int err_post);
    bit a [];
    int vs [];
    logic signed [TW-1:0] h1_last;
    a = new[n];
    vs = new[n];
    err_pd = 0; err_post = 0;
    adapt_en = adapt;
    for (int i = 0; i < n; i++) a[i] = ($urandom & 1) != 0;
    h1_last = pd_h1;
    for (int i = 0; i < n + 5; i++) begin
      @(negedge clk);
      if (i < n) begin
        int vv;
        vv = 40 * pol(a[i]) + (i > 0 ? 12 * pol(a[i-1]) : 0)
           + (i + 1 < n ? 12 * pol(a[i+1]) : 0) + noise(s);
        if (vv > 127) vv = 127;
        if (vv < -128) vv = -128;
        vs[i] = vv;
        vin = W'(vv);
      end else vin = '0;
      @(posedge clk); #1;
      if (pd_h1 != h1_last) pd_moves++;
      h1_last = pd_h1;
      // After this edge pd_d holds symbol i-4 (5-clock latency).
      if (i >= 4 && i - 4 >= skip && i - 4 < n - 1) begin
        int k = i - 4;
        if (pd_d !== a[k]) err_pd++;
        if (((vs[k] > 12) || (vs[k] > -12 && k > 0 && vs[k] >= vs[k-1])) != a[k]) err_post++;
        if (pd_fire.p1) fired[0]++;
        if (pd_fire.p2) fired[1]++;
        if (pd_fire.p3) fired[2]++;
        if (pd_fire.p4) fired[3]++;
      end
    end
  endtask

  // Phase 4: Win-3 FFNE on a strong postcursor.
  task automatic phase_win3(int ns, output int err3, output int err2);
    int v_prev = -48, a_prev = -1;
    err3 = 0; err2 = 0;
    do_reset();
    adapt_en = 0;
    for (int i = 0; i < 10000; i++) begin
      logic [31:0] r;
      int a, vv;
      r = $urandom;
      a = pol(r[0]);
      vv = 32 * a + 16 * a_prev;
      if (ns > 0) vv += (int'(r[15:8]) % (2 * ns + 1) - ns + int'(r[23:16]) % (2 * ns + 1) - ns) / 2;
      @(negedge clk);
      vin = W'(vv);
      @(posedge clk); #1;
      if (i >= 3) begin
        if (w3_d != (a > 0)) err3++;
        if (((vv > 16) || (vv > -16 && vv > 2 * v_prev)) != (a > 0)) err2++;
        if (vv < 16 && vv > -16)
          for (int j = 0; j < 5; j++) if (w3_sel[j]) w3_used[j]++;
      end
      a_prev = a; v_prev = vv;
    end
  endtask

  initial begin
    int e_pd, e_post, e3, e2;
    repeat (2) @(posedge clk);
    phase_nrz();
    phase_pam4();
    do_reset();
    phase_pd(30000, 3, 20000, 1, e_pd, e_post);
    $display("PD-FFNE adapted: h-1=%0d h0=%0d h1=%0d, %0d errors in last 10000", pd_hm1, pd_h0, pd_h1, e_pd);
    expect_true("PD adapted without errors", e_pd == 0);
    expect_true("PD h-1 estimate", pd_hm1 >= 11 && pd_hm1 <= 13);
    expect_true("PD h1 estimate", pd_h1 >= 11 && pd_h1 <= 13);
    phase_pd(30000, 20, 0, 0, e_pd, e_post);
    $display("PD-FFNE noisy: %0d errors, postcursor-only rule %0d errors", e_pd, e_post);
    expect_true("PD beats postcursor-only rule", e_pd < e_post);
    phase_win3(0, e3, e2);
    expect_true("Win-3 noise-free", e3 == 0);
    phase_win3(30, e3, e2);
    $display("Win-3 noisy: %0d errors, Win-2 rule %0d errors", e3, e2);
    expect_true("Win-3 beats Win-2", e3 < e2);
    $display("Win-3 region selects used: %0d %0d %0d %0d %0d", w3_used[0], w3_used[1], w3_used[2], w3_used[3], w3_used[4]);
    for (int j = 0; j < 5; j++) expect_true("Win-3 region used", w3_used[j] > 0);
    $display("mechanisms: strip=%0d h1_moves=%0d gm2_moves=%0d pd_moves=%0d", strip, h1_moves, gm2_moves, pd_moves);
    $display("PAM-4 symbols: %0d %0d %0d %0d", sym_seen[0], sym_seen[1], sym_seen[2], sym_seen[3]);
    $display("patterns fired: 1:%0d 2:%0d 3:%0d 4:%0d", fired[0], fired[1], fired[2], fired[3]);
    expect_true("central strip used", strip > 0);
    expect_true("NRZ h1 adaptation", h1_moves > 0);
    expect_true("NRZ Gm2 adaptation", gm2_moves > 0);
    expect_true("PD tap adaptation", pd_moves > 0);
    for (int s = 0; s < 4; s++) expect_true("PAM-4 symbol seen", sym_seen[s] > 0);
    for (int p = 0; p < 4; p++) expect_true("pattern fired", fired[p] > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
