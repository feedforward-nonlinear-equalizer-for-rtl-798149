// tb_win2_adapt: self-checking test of the NRZ Win-2 adaptation block.
//
// The testbench plays the part of the detector: it feeds ideal decisions
// D[k] (the transmitted bits), the channel sample V[k] = h0*a[k] +
// h1*a[k-1] + noise and the summer sign C[k] = sign(Gm1*V[k] - Gm2*V[k-1])
// computed from the block's own Gm2 output and a mismatched Gm1. Checks:
// the taps hold their reset values while en is low, the error slicer output
// matches V[k] against the selected reference every cycle, and after
// adaptation h0, h1 and Gm2 settle at the channel values and the gain that
// cancels the mismatch.
module tb_win2_adapt;
  import ffne_pkg::*;

  localparam int W = SAMPLE_W, TW = TAP_W, GW = GAIN_W;
  localparam int H0 = 40, H1 = 12, G1 = 282;   // Gm1 = 1.10
  logic clk = 0, rst_n = 0, en = 0;
  logic signed [W-1:0] v = '0;
  logic d = 0, c = 0;
  logic signed [TW-1:0] h0, h1;
  logic [GW-1:0] gm2;
  logic e_out, sel_out;
  int checks = 0, failures = 0;

  win2_adapt dut (.clk, .rst_n, .en, .v, .d, .c, .h0, .h1, .gm2, .e_out, .sel_out);

  always #5 clk = ~clk;

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic drive(int n);
    int a_prev = 1, vp = 0;
    for (int i = 0; i < n; i++) begin
      int a = ($urandom % 2 != 0) ? 1 : -1;
      int vv = H0 * a + H1 * a_prev + int'($urandom % 7) - 3;
      int refl;
      @(negedge clk);
      v = W'(vv);
      d = (a > 0);
      c = (G1 * vv - int'(gm2) * vp) > 0;
      refl = sel_out ? (int'(h0) - int'(h1)) : (int'(h0) + int'(h1));
      #1;
      checks++;
      if (e_out !== (vv - refl >= 0)) failures++;
      vp = vv; a_prev = a;
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
    repeat (3) @(posedge clk);
    rst_n = 1;
    drive(500);
    near("h0 (en low)", h0, 32, 0);
    near("h1 (en low)", h1, 0, 0);
    near("gm2 (en low)", gm2, 256, 0);
    en = 1;
    drive(30000);
    near("h0", h0, H0, 1);
    near("h1", h1, H1, 1);
    near("gm2", gm2, G1, 6);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
