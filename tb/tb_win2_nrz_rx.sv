// tb_win2_nrz_rx: closed-loop test of the NRZ Win-2 FFNE with adaptation.
//
// Channel V[k] = h0*a[k] + h1*a[k-1] + noise with h0 = 40, h1 = 12 LSB and a
// 10 % gain error on the V[k] input of the difference summer (Gm1 = 1.1).
// The receiver starts from h0 = 32, h1 = 0, Gm2 = 1.0. Checks: decisions
// arrive one clock after their sample; after convergence h0 and h1 are
// within one LSB, Gm2 has moved to cancel the Gm1 error, and no bit errors
// occur over the last 10000 symbols. A second run adds ISI the single-tap
// model leaves out (h-1 = 2, h2 = 3 LSB): the estimates and the decisions
// must still meet the same limits.
module tb_win2_nrz_rx;
  import ffne_pkg::*;

  localparam int W = SAMPLE_W, TW = TAP_W, GW = GAIN_W, N = 40000;
  logic clk = 0, rst_n = 0, adapt_en = 1;
  logic signed [W-1:0] vin = '0;
  logic [GW-1:0] gm1 = GW'(282);
  logic d;
  logic signed [TW-1:0] h0_hat, h1_hat;
  logic [GW-1:0] gm2_hat;
  int checks = 0, failures = 0, errs = 0;

  win2_nrz_rx dut (.clk, .rst_n, .adapt_en, .vin, .gm1, .d, .h0_hat, .h1_hat, .gm2_hat);

  always #5 clk = ~clk;

  initial begin
    repeat (2 * N + 1000) @(posedge clk);
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

  // One adaptation run from reset. hm1 and h2 add ISI outside the
  // single-postcursor model (a precursor and a second postcursor).
  task automatic run(int hm1, int h2);
    bit a [];
    a = new[N + 1];
    errs = 0;
    for (int i = 0; i <= N; i++) a[i] = ($urandom & 1) != 0;
    rst_n = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 2; i < N; i++) begin
      logic [31:0] r;
      r = $urandom;
      @(negedge clk);
      vin = W'(40 * pol(a[i]) + 12 * pol(a[i-1]) + hm1 * pol(a[i+1]) + h2 * pol(a[i-2])
               + int'(r[4:1]) % 9 - 4);
      @(posedge clk); #1;
      if (i >= N - 10000) begin
        checks++;
        if (d !== a[i]) begin failures++; errs++; end
      end
    end
    $display("channel h-1=%0d h0=40 h1=12 h2=%0d:", hm1, h2);
    near("h0", h0_hat, 40, 1);
    near("h1", h1_hat, 12, 1);
    near("gm2", gm2_hat, 282, 8);
    $display("bit errors in last 10000: %0d", errs);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    run(0, 0);
    run(2, 3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
