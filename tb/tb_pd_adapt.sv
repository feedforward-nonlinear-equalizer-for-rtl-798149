// tb_pd_adapt: self-checking test of the PD-FFNE tap adaptation.
//
// The testbench stands in for the detector: it drives the sample stream
// V[n] = h-1*a[n+1] + h0*a[n] + h1*a[n-1] + noise on v and, EDLY-1 = 4
// clocks later, the correct decision of the same symbol on d, which is how
// pd_ffne_core and pd_pattern_filter line them up. Checks: the taps keep
// their reset values while en is low, and after adaptation h-1, h0 and h1
// settle within one LSB of the channel, with h-1 and h1 told apart (the
// channel uses different values for them). Every clock no estimate may step
// by more than one LSB, and over the last 10000 symbols each must stay
// within 2 LSB of the channel.
module tb_pd_adapt;
  import ffne_pkg::*;

  localparam int W = SAMPLE_W, TW = TAP_W, N = 60000, DLY = 4;
  localparam int HM1 = 6, H0 = 40, H1 = 12;
  logic clk = 0, rst_n = 0, en = 0;
  logic signed [W-1:0] v = '0;
  logic d = 0;
  logic signed [TW-1:0] hm1, h0, h1;
  int checks = 0, failures = 0;
  bit a [N+2];

  pd_adapt dut (.clk, .rst_n, .en, .v, .d, .hm1, .h0, .h1);

  always #5 clk = ~clk;

  initial begin
    repeat (N + 1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int pol(bit b);
    return b ? 1 : -1;
  endfunction

  function automatic void near(string what, int got, int want, int tol);
    checks++;
    if (got < want - tol || got > want + tol) begin
      failures++;
      $display("%s = %0d, expected %0d +- %0d", what, got, want, tol);
    end else
      $display("%s = %0d (expected %0d)", what, got, want);
  endfunction

  initial begin
    logic signed [TW-1:0] pm1, p0, p1;
    int bad_step = 0, bad_hold = 0;
    for (int n = 0; n < N + 2; n++) a[n] = ($urandom & 1) != 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 1; n < N; n++) begin
      @(negedge clk);
      v = W'(HM1 * pol(a[n+1]) + H0 * pol(a[n]) + H1 * pol(a[n-1]) + int'($urandom % 5) - 2);
      d = (n > DLY) ? a[n-DLY] : 1'b0;
      if (n == 2000) begin
        near("h-1 (en low)", hm1, 0, 0);
        near("h0 (en low)", h0, 32, 0);
        near("h1 (en low)", h1, 0, 0);
        en = 1;
      end
      pm1 = hm1; p0 = h0; p1 = h1;
      @(posedge clk); #1;
      // Sign-sign steps: no estimate moves by more than one LSB per clock.
      checks++;
      if ((hm1 - pm1) > 1 || (pm1 - hm1) > 1 || (h0 - p0) > 1 || (p0 - h0) > 1 ||
          (h1 - p1) > 1 || (p1 - h1) > 1) begin
        failures++; bad_step++;
      end
      // Once converged the estimates stay within 2 LSB of the channel.
      if (n >= N - 10000) begin
        checks++;
        if (hm1 < HM1 - 2 || hm1 > HM1 + 2 || h0 < H0 - 2 || h0 > H0 + 2 ||
            h1 < H1 - 2 || h1 > H1 + 2) begin
          failures++; bad_hold++;
        end
      end
    end
    $display("steps over 1 LSB: %0d, converged samples out of range: %0d", bad_step, bad_hold);
    near("h-1", hm1, HM1, 1);
    near("h0", h0, H0, 1);
    near("h1", h1, H1, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
