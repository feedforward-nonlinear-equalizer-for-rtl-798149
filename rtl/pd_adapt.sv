// pd_adapt: dLev-based sign-sign LMS adaptation of h-1, h0 and h1 for the
// PD-FFNE (Fig. 17(a)).
//
// Error slicer: e = sign(Vd - ref), with ref chosen by a 4-input mux
//   sel 0: h-1+h0+h1   sel 1: -h-1+h0+h1   sel 2: h-1+h0-h1   sel 3: -h-1+h0-h1
// and the select stepping 0,1,2,3,0,... one per sample, so a single error
// comparator covers the four levels by time division. The error and its
// select pass through a delay line D^N so that e[k-1] meets the final
// decision D[k-1] of the same symbol. With the decisions D[k-2], D[k-1],
// D[k] of the pattern filter, the level of the sample k-1 is
// h0*D[k-1] + h1*D[k-2] + h-1*D[k], hence
//   dLev111 += mu*e[k-1]  when {D[k-2],D[k-1],D[k]} = 111 and sel was 0
//   dLev110 += mu*e[k-1]  when ... = 110 and sel was 1
//   dLev011 += mu*e[k-1]  when ... = 011 and sel was 2
//   dLev010 += mu*e[k-1]  when ... = 010 and sel was 3
// (D[k-1] = 1 in all four, so the D[k-1] factor of the rule is +1), and
//   h0  = (L111 + L010 + L110 + L011)/4
//   h1  = (L111 - L010 + (L110 - L011))/4
//   h-1 = (L111 - L010 - (L110 - L011))/4
//
// Interface and timing: v is the delayed sample Vd of pd_ffne_core, d is the
// pattern-filter output. EDLY is the number of clocks from v carrying a
// sample to d carrying that sample's decision, plus one (5 with
// pd_pattern_filter). Accumulators change on the clock edge while en is
// high and carry LF extra fractional bits.
//
// Follows the paper: the mux levels and order, the delay matching, the four
// pattern-filtered updates and h0. Own choices: the select sequence, step,
// widths, reset values, zero error counted as +1, and the h1/h-1 signs
// (see the design notes: the printed formulas exchange h1 and h-1 under the
// signal model the paper defines).
module pd_adapt
  import ffne_pkg::*;
#(
  parameter int W    = SAMPLE_W,
  parameter int TW   = TAP_W,
  parameter int LF   = LMS_FRAC,
  parameter int MU   = 4,
  parameter int EDLY = 5,
  parameter int H0_INIT  = 32,
  parameter int H1_INIT  = 0,
  parameter int HM1_INIT = 0
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 en,
  input  logic signed [W-1:0]  v,
  input  logic                 d,
  output logic signed [TW-1:0] hm1,
  output logic signed [TW-1:0] h0,
  output logic signed [TW-1:0] h1
);

  localparam int AW = TW + LF + 2;

  pd_lev_e              sel;
  pd_lev_e              sel_dly [EDLY];
  logic                 e_dly   [EDLY];
  logic signed [AW-1:0] lev [4];
  logic signed [AW+1:0] s_all, s_h1, s_hm1;
  logic signed [TW+1:0] ref_lvl, err;
  logic                 e, d1, d2;
  logic [2:0]           pat;

  always_comb begin
    s_all = (AW+2)'(lev[LEV_111]) + (AW+2)'(lev[LEV_010])
          + (AW+2)'(lev[LEV_110]) + (AW+2)'(lev[LEV_011]);
    s_h1  = (AW+2)'(lev[LEV_111]) - (AW+2)'(lev[LEV_010])
          + (AW+2)'(lev[LEV_110]) - (AW+2)'(lev[LEV_011]);
    s_hm1 = (AW+2)'(lev[LEV_111]) - (AW+2)'(lev[LEV_010])
          - (AW+2)'(lev[LEV_110]) + (AW+2)'(lev[LEV_011]);
    h0  = TW'(s_all >>> (LF + 2));
    h1  = TW'(s_h1  >>> (LF + 2));
    hm1 = TW'(s_hm1 >>> (LF + 2));
  end

  // Error slicer on the reference the mux currently selects.
  always_comb begin
    unique case (sel)
      LEV_111: ref_lvl =  (TW+2)'(hm1) + (TW+2)'(h0) + (TW+2)'(h1);
      LEV_110: ref_lvl = -(TW+2)'(hm1) + (TW+2)'(h0) + (TW+2)'(h1);
      LEV_011: ref_lvl =  (TW+2)'(hm1) + (TW+2)'(h0) - (TW+2)'(h1);
      default: ref_lvl = -(TW+2)'(hm1) + (TW+2)'(h0) - (TW+2)'(h1);
    endcase
    err = (TW+2)'(v) - ref_lvl;
    e   = err >= 0;
    pat = {d2, d1, d};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sel <= LEV_111;
      for (int i = 0; i < EDLY; i++) begin
        sel_dly[i] <= LEV_111;
        e_dly[i]   <= 1'b0;
      end
      lev[LEV_111] <= AW'(( HM1_INIT + H0_INIT + H1_INIT) * (1 << LF));
      lev[LEV_110] <= AW'((-HM1_INIT + H0_INIT + H1_INIT) * (1 << LF));
      lev[LEV_011] <= AW'(( HM1_INIT + H0_INIT - H1_INIT) * (1 << LF));
      lev[LEV_010] <= AW'((-HM1_INIT + H0_INIT - H1_INIT) * (1 << LF));
      d1 <= 1'b0;
      d2 <= 1'b0;
    end else begin
      sel <= pd_lev_e'(sel + 2'd1);
      sel_dly[0] <= sel;
      e_dly[0]   <= e;
      for (int i = 1; i < EDLY; i++) begin
        sel_dly[i] <= sel_dly[i-1];
        e_dly[i]   <= e_dly[i-1];
      end
      d1 <= d;
      d2 <= d1;
      if (en) begin
        unique case (sel_dly[EDLY-1])
          LEV_111: if (pat == 3'b111) lev[LEV_111] <= e_dly[EDLY-1] ? lev[LEV_111] + AW'(MU) : lev[LEV_111] - AW'(MU);
          LEV_110: if (pat == 3'b110) lev[LEV_110] <= e_dly[EDLY-1] ? lev[LEV_110] + AW'(MU) : lev[LEV_110] - AW'(MU);
          LEV_011: if (pat == 3'b011) lev[LEV_011] <= e_dly[EDLY-1] ? lev[LEV_011] + AW'(MU) : lev[LEV_011] - AW'(MU);
          default: if (pat == 3'b010) lev[LEV_010] <= e_dly[EDLY-1] ? lev[LEV_010] + AW'(MU) : lev[LEV_010] - AW'(MU);
        endcase
      end
    end
  end

endmodule
