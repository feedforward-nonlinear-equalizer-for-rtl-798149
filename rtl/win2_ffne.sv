// win2_ffne: window-length-2 feedforward nonlinear equalizer for NRZ with a
// single postcursor tap h1.
//
// The detector decides the current bit from the two samples V[k-1], V[k]
// with no decision feedback. Short-window maximum-likelihood detection over
// the 8 candidate 3-bit sequences reduces to three comparisons:
//   c_hi  = V[k] - h1 > 0                 (bit is surely 1)
//   c_lo  = V[k] + h1 > 0                 (bit is not surely 0)
//   c_dif = Gm1*V[k] - Gm2*V[k-1] > 0     (tie-break in the strip |V[k]|<h1)
// combined by two NAND gates, the first with an inverting input (Fig. 3):
//   D[k] = NAND(~c_hi, NAND(c_lo, c_dif)) = c_hi | (c_lo & c_dif).
// The 1-UI delay element is a register holding V[k-1]. Gm1/Gm2 model the
// gains of the two inputs of the difference summer (Fig. 4); Gm2 is the one
// the adaptation loop trims, Gm1 is an input so a mismatch can be set.
// C[k] is the sign of that summer, used for the Gm2 update.
//
// Interface and timing: one sample per clock on vin. d, c and v_out are
// registered: at the clock edge after sample V[k] is presented, d = D[k],
// c = C[k] and v_out = V[k] (latency 1 cycle). A comparator output of exactly
// zero counts as 0 (the comparators test "greater than").
//
// Follows the paper: comparator set, gate network and gain-adapted summer.
// Own choices: digital (ADC-sample) realisation of the analog summers and
// comparators, the widths, the tie convention and active-low reset.
module win2_ffne
  import ffne_pkg::*;
#(
  parameter int W  = SAMPLE_W,   // sample width
  parameter int TW = TAP_W,      // tap width
  parameter int GW = GAIN_W      // gain width (fraction bits GAIN_FRAC)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic signed [W-1:0]  vin,    // V_IN[k]
  input  logic signed [TW-1:0] h1,     // postcursor estimate, sample LSBs
  input  logic        [GW-1:0] gm1,    // summer gain on V[k]
  input  logic        [GW-1:0] gm2,    // summer gain on V[k-1]
  output logic                 d,      // D[k], 1 = bit one
  output logic                 c,      // C[k], sign of the difference summer
  output logic signed [W-1:0]  v_out   // V[k] aligned with d and c
);

  localparam int PW = W + GW + 2;

  logic signed [W-1:0]  v_prev;        // the 1-UI delay element "D"
  logic signed [TW:0]   s_hi, s_lo;
  logic signed [PW-1:0] p1, p2, s_dif;
  logic                 c_hi, c_lo, c_dif, d_nxt;

  always_comb begin
    s_hi  = (TW+1)'(vin) - (TW+1)'(h1);
    s_lo  = (TW+1)'(vin) + (TW+1)'(h1);
    p1    = PW'(vin)    * PW'($signed({1'b0, gm1}));
    p2    = PW'(v_prev) * PW'($signed({1'b0, gm2}));
    s_dif = p1 - p2;
    c_hi  = s_hi  > 0;
    c_lo  = s_lo  > 0;
    c_dif = s_dif > 0;
    // Two NAND gates of Fig. 3.
    d_nxt = ~(~c_hi & ~(c_lo & c_dif));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_prev <= '0;
      d      <= 1'b0;
      c      <= 1'b0;
      v_out  <= '0;
    end else begin
      v_prev <= vin;
      d      <= d_nxt;
      c      <= c_dif;
      v_out  <= vin;
    end
  end

endmodule
