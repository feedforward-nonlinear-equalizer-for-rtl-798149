// tb_win3_ffne: self-checking test of the window-length-3 NRZ equalizer.
//
// A random bit stream passes through the channel V[k] = h0 a[k] + h1 a[k-1]
// plus bounded noise, with h0 = 32 and h1 = 4, 8, 12, 16 and 20 LSB (0.125 to
// 0.625 h0, so h1/h0 is exact in the coefficient format). Every decision is
// compared with a brute-force nearest-point detector over the 16 sequences
// a[k..k-3] that can produce the window V[k], V[k-1], V[k-2]; samples at an
// exact tie of the two nearest distances are not judged. The decision must
// appear one clock after its sample. Each of the five region selects must be
// used, and at h1 = 16 the window-3 rule must make fewer bit errors than the
// window-2 rule evaluated on the same samples.
module tb_win3_ffne;
  import ffne_pkg::*;

  localparam int W = SAMPLE_W, TW = TAP_W, CW = COEF_W;
  localparam int H0 = 32;
  localparam int N = 6000;
  logic clk = 0, rst_n = 0;
  logic signed [W-1:0] vin = '0;
  logic signed [TW-1:0] h0 = TW'(H0), h1 = '0;
  logic signed [CW-1:0] h1_ratio = '0;
  logic d;
  logic [4:0] sel;
  int checks = 0, failures = 0;
  int used [5] = '{0, 0, 0, 0, 0};

  win3_ffne dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int pol(bit b);
    return b ? 1 : -1;
  endfunction

  // Nearest-point decision: +1 (one), -1 (zero) or 0 (exact tie).
  function automatic int ml(int v0, int v1, int v2, int hh1);
    int best [2] = '{1 << 30, 1 << 30};
    for (int m = 0; m < 16; m++) begin
      int a0, a1, a2, a3, e0, e1, e2, dsq;
      a0 = pol(m[0]); a1 = pol(m[1]); a2 = pol(m[2]); a3 = pol(m[3]);
      e0 = v0 - (H0 * a0 + hh1 * a1);
      e1 = v1 - (H0 * a1 + hh1 * a2);
      e2 = v2 - (H0 * a2 + hh1 * a3);
      dsq = e0 * e0 + e1 * e1 + e2 * e2;
      if (dsq < best[m[0]]) best[m[0]] = dsq;
    end
    return best[1] < best[0] ? 1 : (best[0] < best[1] ? -1 : 0);
  endfunction

  task automatic run(int hh1, int ns, output int err3, output int err2);
    bit a [];
    int v [];
    a = new[N];
    v = new[N];
    err3 = 0; err2 = 0;
    h1 = TW'(hh1);
    h1_ratio = CW'(hh1 * 8);            // hh1 / 32 with 8 fraction bits
    rst_n = 0;
    @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < N; i++) begin
      logic [31:0] r;
      int nz;
      r = $urandom;
      a[i] = r[0];
      nz = ns == 0 ? 0 : (int'(r[15:8]) % (2 * ns + 1) - ns + int'(r[23:16]) % (2 * ns + 1) - ns) / 2;
      v[i] = H0 * pol(a[i]) + (i > 0 ? hh1 * pol(a[i-1]) : -hh1) + nz;
      @(negedge clk);
      vin = W'(v[i]);
      @(posedge clk); #1;
      if (i >= 3) begin
        int ref_d;
        bit win2;
        ref_d = ml(v[i], v[i-1], v[i-2], hh1);
        if (ref_d != 0) begin
          checks++;
          if (d != (ref_d > 0)) begin
            failures++;
            if (failures < 10)
              $display("FAIL h1=%0d i=%0d v=%0d,%0d,%0d d=%0b ml=%0d sel=%b", hh1, i, v[i], v[i-1], v[i-2], d, ref_d, sel);
          end
        end
        if (v[i] < hh1 && v[i] > -hh1)
          for (int j = 0; j < 5; j++) if (sel[j]) used[j]++;
        if (d != a[i]) err3++;
        win2 = (v[i] > hh1) || (v[i] > -hh1 && v[i] * (H0 - hh1) > v[i-1] * H0);
        if (win2 != a[i]) err2++;
      end
    end
  endtask

  initial begin
    int e3, e2;
    repeat (2) @(posedge clk);
    for (int h = 4; h <= 20; h += 4) begin
      run(h, 0, e3, e2);
      checks++;
      if (e3 != 0) begin failures++; $display("FAIL: noise-free errors at h1=%0d: %0d", h, e3); end
      run(h, 30, e3, e2);
      $display("h1=%0d noisy: window-3 %0d errors, window-2 %0d errors", h, e3, e2);
      if (h == 16) begin
        checks++;
        if (!(e3 < e2)) begin failures++; $display("FAIL: window-3 not better than window-2"); end
      end
    end
    $display("region selects used in the strip: %0d %0d %0d %0d %0d", used[0], used[1], used[2], used[3], used[4]);
    for (int j = 0; j < 5; j++) begin
      checks++;
      if (used[j] == 0) begin failures++; $display("FAIL: region %0d never used", j + 1); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
