// win3_ffne: window-length-3 feedforward nonlinear equalizer for NRZ with a
// single postcursor tap h1.
//
// The bit a[k] is decided from three samples V[k], V[k-1], V[k-2] with no
// decision feedback, as a nearest-point (3-D Voronoi) detector over the 16
// possible 4-bit sequences. As in the window-2 version, two comparators
// settle the bit outside the strip |V[k]| < h1:
//   D[k] = (V[k] > h1) | ((V[k] > -h1) & X)
// and inside the strip the tie-break X is one of five candidate slicers
// (r = h1/h0, A = (1-r)V[k] - V[k-1], B = V[k] - V[k-1]):
//   s1 = A + h1 > 0          s2 = A - h1 > 0
//   s3 = (1-r)B + V[k-2] - h1 > 0
//   s4 = (1-r)B + V[k-2] + h1 > 0
//   s5 = B + V[k-2] > 0
// The candidate is picked by a one-hot region select d1..d5 that depends only
// on V[k-1] and V[k-2], through three comparator groups
//   a: V[k-2] against -h0 and +h0
//   b: (1-r)V[k-2] + r V[k-1] against -h1 and +h1
//   c: V[k-2] + r V[k-1] against -2h1, 0 and +2h1
// and a small gate network:
//   d1 = (c>0 & a<-h0) | (a>h0 & c>2h1) | (mid & b>h1)
//   d2 = (mid & b<-h1) | (a<-h0 & c<-2h1) | (~c>0 & a>h0)
//   d3 = a>h0 & c>0 & ~c>2h1      d4 = a<-h0 & ~c>0 & ~c<-2h1
//   d5 = mid & ~b<-h1 & ~b>h1     (mid = |V[k-2]| < h0)
// Because the select depends only on older samples, it is computed one clock
// early, from the incoming sample (then V[k-1]) and the delayed one (then
// V[k-2]), and registered, so the comparators on V[k] only drive the five
// slicers and the final gates.
//
// Arithmetic: r is an input with COEF_FRAC fraction bits; every slicer sum
// is formed scaled by 2**COEF_FRAC, so the comparisons are exact and no
// rounding enters the decision. A sum of exactly zero counts as 0.
//
// Interface and timing: one sample per clock on vin. At the clock edge after
// V[k] is presented, d = D[k] and sel = the region select used for it
// (latency 1 cycle, same as the window-2 equalizer).
//
// Follows the paper: the comparator set, the gate network and the switch
// selection of the hardware diagram. The diagram labels the b comparators
// "< -h1" and "> h1" but draws h0 beside their summers; the labels were
// followed, as that reading reproduces the nearest-point decision exactly.
// Own choices: digital realisation, exact scaled arithmetic, precomputed and
// registered region select, widths and active-low reset.
module win3_ffne
  import ffne_pkg::*;
#(
  parameter int W  = SAMPLE_W,   // sample width
  parameter int TW = TAP_W,      // tap width
  parameter int CW = COEF_W,     // width of r = h1/h0
  parameter int CF = COEF_FRAC   // fraction bits of r
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic signed [W-1:0]  vin,       // V_IN[k]
  input  logic signed [TW-1:0] h0,        // main cursor level
  input  logic signed [TW-1:0] h1,        // postcursor level
  input  logic signed [CW-1:0] h1_ratio,  // r = h1/h0, CF fraction bits
  output logic                 d,         // D[k], 1 = bit one
  output logic [4:0]           sel        // region select d5..d1 used for D[k]
);
  localparam int AW = W + TW + CF + 4;   // scaled sum width
  typedef logic signed [AW-1:0] acc_t;

  logic signed [W-1:0] v1, v2;           // V[k-1], V[k-2]
  logic [4:0] dsel;                      // select for the sample now on vin

  function automatic acc_t sc(input acc_t x);
    return x <<< CF;
  endfunction

  // ---- current-sample slicers ------------------------------------------
  acc_t r, h1s, x0, x1, x2, bdif, a_s, e_s;
  logic c_hi, c_lo, x_sel;
  logic [4:0] s;

  always_comb begin
    r    = acc_t'(h1_ratio);
    h1s  = sc(acc_t'(h1));
    x0   = acc_t'(vin);
    x1   = acc_t'(v1);
    x2   = acc_t'(v2);
    bdif = x0 - x1;
    a_s  = sc(x0) - r * x0 - sc(x1);          // (1-r)V[k] - V[k-1]
    e_s  = sc(bdif) - r * bdif + sc(x2);      // (1-r)B + V[k-2]
    s[0] = (a_s + h1s) > 0;
    s[1] = (a_s - h1s) > 0;
    s[2] = (e_s - h1s) > 0;
    s[3] = (e_s + h1s) > 0;
    s[4] = (bdif + x2) > 0;
    c_hi = (x0 - acc_t'(h1)) > 0;
    c_lo = (x0 + acc_t'(h1)) > 0;
    x_sel = |(s & dsel);
  end

  // ---- region select, one clock ahead: vin is V[k-1], v1 is V[k-2] -------
  acc_t y_b, y_c, p1, p2;
  logic a_lt, a_gt, mid, b_lt, b_gt, c_lt, c_gt, c_0;
  logic [4:0] dsel_nxt;

  always_comb begin
    p1   = acc_t'(vin);
    p2   = acc_t'(v1);
    y_b  = sc(p2) - r * p2 + r * p1;         // (1-r)V[k-2] + r V[k-1]
    y_c  = sc(p2) + r * p1;                  // V[k-2] + r V[k-1]
    a_lt = !((p2 + acc_t'(h0)) > 0);
    a_gt = (p2 - acc_t'(h0)) > 0;
    mid  = !(a_lt || a_gt);
    b_lt = !((y_b + h1s) > 0);
    b_gt = (y_b - h1s) > 0;
    c_lt = !((y_c + 2 * h1s) > 0);
    c_gt = (y_c - 2 * h1s) > 0;
    c_0  = y_c > 0;
    dsel_nxt[0] = (c_0 && a_lt) || (a_gt && c_gt) || (mid && b_gt);
    dsel_nxt[1] = (mid && b_lt) || (a_lt && c_lt) || (!c_0 && a_gt);
    dsel_nxt[2] = a_gt && c_0 && !c_gt;
    dsel_nxt[3] = a_lt && !c_0 && !c_lt;
    dsel_nxt[4] = mid && !b_lt && !b_gt;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1   <= '0;
      v2   <= '0;
      dsel <= 5'b10000;
      d    <= 1'b0;
      sel  <= '0;
    end else begin
      v1   <= vin;
      v2   <= v1;
      dsel <= dsel_nxt;
      d    <= c_hi || (c_lo && x_sel);
      sel  <= dsel;
    end
  end

  // The region select is one-hot by construction. (Lint reports rst_n as
  // also used synchronously because of this disable condition; the logic
  // uses it only as an asynchronous reset.)
  assert property (@(posedge clk) disable iff (!rst_n) $onehot(dsel));

endmodule
