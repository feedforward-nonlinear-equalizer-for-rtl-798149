// tb_pd_ffne_core: self-checking test of the PD-FFNE dual FFNE core.
//
// A three-tap channel V[n] = h-1*a[n+1] + h0*a[n] + h1*a[n-1] (+ noise)
// feeds the core. For each symbol n the five outputs are compared with the
// rules written out from the text: precursor FFNE on (V[n], V[n+1]),
// postcursor FFNE on (V[n-1], V[n]), and the auxiliary comparators
// V[n] > 0, V[n] > -hx, V[n] > hx. The outputs must all refer to the same
// symbol, one clock after V[n] was presented. With a postcursor-only
// channel the postcursor branch must return the transmitted bits, and with
// a precursor-only channel the precursor branch must.
module tb_pd_ffne_core;
  import ffne_pkg::*;

  localparam int W = SAMPLE_W, TW = TAP_W, N = 3000;
  logic clk = 0, rst_n = 0;
  logic signed [W-1:0] vin = '0;
  logic signed [TW-1:0] hm1, h1, hx;
  logic dpre, dpost, dcomp, dxp, dxn;
  logic signed [W-1:0] v_d;
  int checks = 0, failures = 0;
  int a [N+2];
  int v [N+2];

  pd_ffne_core dut (.clk, .rst_n, .vin, .hm1, .h1, .hx, .dpre, .dpost, .dcomp, .dxp, .dxn, .v_d);

  always #5 clk = ~clk;

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(int thm1, int th0, int th1, int thx, int noise, int tx_branch);
    hm1 = TW'(thm1); h1 = TW'(th1); hx = TW'(thx);
    for (int n = 0; n < N + 2; n++) a[n] = ($urandom % 2 != 0) ? 1 : -1;
    for (int n = 0; n < N + 1; n++) begin
      v[n] = th0 * a[n] + (n > 0 ? th1 * a[n-1] : 0) + thm1 * a[n+1]
             + (noise > 0 ? int'($urandom % (2 * noise + 1)) - noise : 0);
      if (v[n] > 127) v[n] = 127;
      if (v[n] < -128) v[n] = -128;
    end
    for (int n = 0; n < N + 1; n++) begin
      @(negedge clk);
      vin = W'(v[n]);
      #1;
      // At this point the outputs refer to symbol n-1.
      if (n >= 2) begin
        int m = n - 1;
        bit e_pre  = (v[m] > thm1) || ((v[m] > -thm1) && (v[m] > v[m+1]));
        bit e_post = (v[m] > th1)  || ((v[m] > -th1)  && (v[m] >= v[m-1]));
        checks++;
        if ({dpre, dpost, dcomp, dxp, dxn} !== {e_pre, e_post, v[m] > 0, v[m] > -thx, v[m] > thx}
            || v_d !== W'(v[m])) begin
          failures++;
          if (failures < 10) $display("n=%0d got %b%b%b%b%b exp %b%b v=%0d %0d %0d vd=%0d", m, dpre, dpost, dcomp, dxp, dxn, e_pre, e_post, v[m-1], v[m], v[m+1], v_d);
        end
        if (tx_branch == 1) begin checks++; if (dpre  !== (a[m] > 0)) failures++; end
        if (tx_branch == 2) begin checks++; if (dpost !== (a[m] > 0)) failures++; end
      end
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(12, 40, 0, 20, 0, 1);     // precursor only: Dpre is exact
    run(0, 40, 12, 20, 0, 2);     // postcursor only: Dpost is exact
    run(12, 40, 12, 20, 12, 0);   // both, with noise: rule check
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
