// pam4_win2_ffne: window-length-2 FFNE for PAM-4 with a single postcursor h1.
//
// The PAM-4 decision map (valid for h1 <= h0/3, VTH = 2/3*h0) splits into
// three NRZ-like Win-2 detectors, one around each eye centre -VTH, 0, +VTH
// (Fig. 13):
//   y[k]   = V[k] - (h1/h0)*V[k-1]                      (multiplier on the
//                                                        1-UI delayed sample)
//   t1..t3 = y > -VTH, y > 0, y > +VTH
//   s1..s6 = V > -h1-VTH, h1-VTH, -h1, h1, -h1+VTH, h1+VTH
//   sel0 = s2 | (t1 & s1),  sel1 = s4 | (t2 & s3),  sel2 = s6 | (t3 & s5)
// (each sel is the NAND(~s, NAND(t, s')) pair of the figure). The
// thermometer code sel2..sel0 becomes Gray code:
//   a_msb = sel1,  a_lsb = sel2 ^ sel0
// and sym is the binary symbol index 0..3 (polar -1, -1/3, +1/3, +1).
//
// Interface and timing: one sample per clock; outputs are registered and
// belong to the sample presented one clock earlier (latency 1). h1 and vth
// are levels in sample LSBs; h1_ratio is h1/h0 as a signed fraction with
// CF fractional bits. The taps are inputs: the paper does not give a PAM-4
// adaptation. Comparators test "greater than". Widths, the ratio format and
// the sym output are this design's choices; the structure is the paper's.
module pam4_win2_ffne
  import ffne_pkg::*;
#(
  parameter int W  = SAMPLE_W,
  parameter int TW = TAP_W,
  parameter int CW = COEF_W,
  parameter int CF = COEF_FRAC
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic signed [W-1:0]  vin,
  input  logic signed [TW-1:0] h1,        // postcursor level
  input  logic signed [TW-1:0] vth,       // eye spacing 2/3*h0
  input  logic signed [CW-1:0] h1_ratio,  // h1/h0, CF fractional bits
  output logic                 a_msb,
  output logic                 a_lsb,
  output logic [1:0]           sym
);

  localparam int PW = W + CW + 1;
  localparam int XW = TW + 2;

  logic signed [W-1:0]  v_prev;
  logic signed [PW-1:0] prod, y_full, th;
  logic signed [XW-1:0] vx, h1x, vthx;
  logic [3:1] t;
  logic [6:1] s;
  logic [2:0] sel;

  always_comb begin
    prod   = PW'(v_prev) * PW'(h1_ratio);
    // y scaled by 2**CF to keep the fraction of the product.
    y_full = (PW'(vin) <<< CF) - prod;
    th     = PW'(vth) <<< CF;
    t[1]   = y_full > -th;
    t[2]   = y_full > 0;
    t[3]   = y_full > th;
    vx     = XW'(vin);
    h1x    = XW'(h1);
    vthx   = XW'(vth);
    s[1]   = vx > (-h1x - vthx);
    s[2]   = vx > ( h1x - vthx);
    s[3]   = vx > (-h1x);
    s[4]   = vx > ( h1x);
    s[5]   = vx > (-h1x + vthx);
    s[6]   = vx > ( h1x + vthx);
    sel[0] = ~(~s[2] & ~(t[1] & s[1]));
    sel[1] = ~(~s[4] & ~(t[2] & s[3]));
    sel[2] = ~(~s[6] & ~(t[3] & s[5]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_prev <= '0;
      a_msb  <= 1'b0;
      a_lsb  <= 1'b0;
      sym    <= 2'd0;
    end else begin
      v_prev <= vin;
      a_msb  <= sel[1];
      a_lsb  <= sel[2] ^ sel[0];
      sym    <= 2'(sel[0]) + 2'(sel[1]) + 2'(sel[2]);
    end
  end

endmodule
