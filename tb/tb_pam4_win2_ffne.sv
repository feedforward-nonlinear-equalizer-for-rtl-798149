// tb_pam4_win2_ffne: self-checking test of the PAM-4 Win-2 FFNE.
//
// Channel V[k] = h0*a[k] + h1*a[k-1] (+ noise) with a in {-1,-1/3,1/3,1}
// (scaled by 3 to stay in integers), h0 = 60 LSB, VTH = 2/3*h0 and
// h1 = 6, 9, 12, 15 LSB, i.e. 0.1 to 0.25 h0 (the range studied for PAM-4; the
// decision map itself holds up to h0/3); h1/h0 is rounded to 8 fraction bits. Checks:
// noise-free decisions equal the transmitted symbols; with noise, every
// decision equals the decision-region rule of the text (boundaries 1-9:
// vertical lines at +-h1 and +-h1+-VTH, sloped lines V[k] - h1/h0*V[k-1] =
// -VTH, 0, +VTH), evaluated in real arithmetic with the same rounded h1/h0; the two output bits are the
// Gray code of the symbol (00, 01, 11, 10); latency is one clock.
module tb_pam4_win2_ffne;
  import ffne_pkg::*;

  localparam int W = SAMPLE_W, TW = TAP_W, CW = COEF_W;
  localparam int H0 = 60, VTH = 40;
  int h1v = 15;                                  // swept 6..15 (0.1..0.25 h0)
  logic clk = 0, rst_n = 0;
  logic signed [W-1:0] vin = '0;
  logic signed [TW-1:0] h1 = TW'(15), vth = TW'(VTH);
  logic signed [CW-1:0] h1_ratio = CW'(64);     // h1/h0 * 2**8, rounded
  logic a_msb, a_lsb;
  logic [1:0] sym;
  int checks = 0, failures = 0;
  int seen [4] = '{0, 0, 0, 0};

  pam4_win2_ffne dut (.clk, .rst_n, .vin, .h1, .vth, .h1_ratio, .a_msb, .a_lsb, .sym);

  always #5 clk = ~clk;

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Decision rule from the boundary list, one NRZ-like detector per eye.
  function automatic int rule(real vp, real vc);
    real y = vc - real'(h1_ratio) / 256.0 * vp;
    int n = 0;
    real off [3] = '{-VTH, 0.0, VTH};
    for (int i = 0; i < 3; i++) begin
      if (vc > h1v + off[i]) n++;
      else if (vc > -h1v + off[i] && y > off[i]) n++;
    end
    return n;
  endfunction

  task automatic run(int n, int noise, bit check_tx);
    int s_prev = 0, vp = 0;
    for (int i = 0; i < n; i++) begin
      int s = int'($urandom % 4);
      int vv = (H0 * (2 * s - 3) + h1v * (2 * s_prev - 3)) / 3
               + (noise > 0 ? int'($urandom % (2 * noise + 1)) - noise : 0);
      int exp_s;
      @(negedge clk);
      vin = W'(vv);
      exp_s = rule(real'(vp), real'(vv));
      @(posedge clk); #1;
      if (i > 0) begin
        checks++;
        if (int'(sym) != exp_s) begin
          failures++;
          if (failures < 10) $display("i=%0d vp=%0d v=%0d sym=%0d exp=%0d", i, vp, vv, sym, exp_s);
        end
        checks++;
        if ({a_msb, a_lsb} != {exp_s >= 2, exp_s == 1 || exp_s == 2}) failures++;
        if (check_tx) begin
          checks++;
          if (int'(sym) != s) failures++;
          seen[s]++;
        end
      end
      vp = vv; s_prev = s;
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int hh = 6; hh <= 15; hh += 3) begin
      h1v = hh;
      h1 = TW'(hh);
      h1_ratio = CW'((hh * 256 + 30) / 60);
      run(1500, 0, 1);
      run(2500, 12, 0);
    end
    for (int s = 0; s < 4; s++) begin
      checks++;
      if (seen[s] == 0) failures++;
    end
    $display("symbols seen %0d %0d %0d %0d", seen[0], seen[1], seen[2], seen[3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
