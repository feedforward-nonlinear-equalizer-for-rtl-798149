// win2_adapt: tap and summer-gain adaptation for the NRZ Win-2 FFNE.
//
// Error slicer: e[k] = sign(V[k] - ref), where ref is taken from a two-input
// mux of h0+h1 and h0-h1 (Fig. 4). The mux select toggles every sample, so
// one error comparator serves both reference levels by time division.
// dLev sign-sign LMS (data-level tracking):
//   dLev11 += mu*e[k]*D[k]  when D[k-1]=1, D[k]=1 and ref = h0+h1
//   dLev01 += mu*e[k]*D[k]  when D[k-1]=0, D[k]=1 and ref = h0-h1
//   h0 = (dLev11 + dLev01)/2,  h1 = (dLev11 - dLev01)/2
// D[k] is used in polar form (+1/-1); both updates need D[k]=1, so the step
// is +mu*e[k]. Summer gain (repeated-symbol patterns, ideal output 0):
//   Gm2 += mu_g*C[k]*D[k]   when D[k-2]=D[k-1]=D[k]
//
// Interface and timing: v, d and c must be aligned (the outputs of
// win2_ffne). Accumulators update on the clock edge after the sample is
// presented, while en is high; h0, h1 and gm2 are registered outputs of the
// accumulators. The accumulators carry LF extra fractional bits, so one
// update moves a level by MU/2**LF sample LSBs and the gain by
// MU_G/2**(GAIN_FRAC+LF).
//
// Follows the paper: the update rules, the pattern filtering and the
// time-multiplexed error reference. Own choices: toggling the mux every
// sample, the step sizes, widths, reset values, the sign of a zero error
// (counted as +1) and clamping Gm2 to its range.
module win2_adapt
  import ffne_pkg::*;
#(
  parameter int W   = SAMPLE_W,
  parameter int TW  = TAP_W,
  parameter int GW  = GAIN_W,
  parameter int LF  = LMS_FRAC,
  parameter int MU  = 4,                       // level step, 2**-LF LSB units
  parameter int MU_G = 4,                      // gain step
  parameter int H0_INIT = 32,                  // reset value of h0, LSBs
  parameter int H1_INIT = 0                    // reset value of h1, LSBs
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 en,       // adaptation enable
  input  logic signed [W-1:0]  v,        // V[k]
  input  logic                 d,        // D[k]
  input  logic                 c,        // C[k]
  output logic signed [TW-1:0] h0,
  output logic signed [TW-1:0] h1,
  output logic        [GW-1:0] gm2,
  output logic                 e_out,    // e[k] (1 = sample above ref)
  output logic                 sel_out   // 0: ref h0+h1, 1: ref h0-h1
);

  localparam int AW = TW + LF + 1;           // level accumulator width
  localparam int GA = GW + LF;               // gain accumulator width

  logic signed [AW-1:0] dlev11, dlev01, sum, dif;
  logic        [GA-1:0] gacc;
  logic                 sel, d1, d2, e;
  logic signed [TW:0]   ref_lvl, err;

  // Tap estimates from the two data levels.
  always_comb begin
    sum = dlev11 + dlev01;
    dif = dlev11 - dlev01;
    h0  = TW'(sum >>> (LF + 1));
    h1  = TW'(dif >>> (LF + 1));
    gm2 = gacc[GA-1 -: GW];
  end

  // Error slicer with the time-multiplexed reference.
  always_comb begin
    ref_lvl = sel ? ((TW+1)'(h0) - (TW+1)'(h1)) : ((TW+1)'(h0) + (TW+1)'(h1));
    err     = (TW+1)'(v) - ref_lvl;
    e       = (err >= 0);
  end
  assign e_out   = e;
  assign sel_out = sel;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dlev11 <= AW'((H0_INIT + H1_INIT) * (1 << LF));
      dlev01 <= AW'((H0_INIT - H1_INIT) * (1 << LF));
      gacc   <= GA'(GAIN_ONE) << LF;
      sel    <= 1'b0;
      d1     <= 1'b0;
      d2     <= 1'b0;
    end else begin
      sel <= ~sel;
      d1  <= d;
      d2  <= d1;
      if (en) begin
        if (d && d1 && !sel)
          dlev11 <= e ? dlev11 + AW'(MU) : dlev11 - AW'(MU);
        if (d && !d1 && sel)
          dlev01 <= e ? dlev01 + AW'(MU) : dlev01 - AW'(MU);
        if ((d == d1) && (d1 == d2)) begin
          // C[k]*D[k] in polar form: +1 when they agree.
          if (c == d) begin
            if (gacc <= {GA{1'b1}} - GA'(MU_G)) gacc <= gacc + GA'(MU_G);
          end else begin
            if (gacc >= GA'(MU_G)) gacc <= gacc - GA'(MU_G);
          end
        end
      end
    end
  end

endmodule
