// pd_ffne_core: dual Win-2 FFNE core and extra pattern extractor of the
// pattern-detection FFNE (PD-FFNE), after Fig. 15 (bottom).
//
// One register holds the delayed sample Vd = V[n], while vin carries V[n+1].
// Both FFNEs decide the symbol n:
//   difference comparator  c_dif = Vd - V[n+1] > 0        (shared)
//   precursor FFNE   Dpre  = (Vd > h-1) | ((Vd > -h-1) & c_dif)
//   postcursor FFNE  Dpost = (V > h1)   | ((V > -h1) & ~c_dif), evaluated
//                    on the current sample and re-timed by one register
// The precursor branch uses the next sample in the role the previous sample
// plays for the postcursor branch. Each decision is the two-NAND network of
// the figure, with inverting inputs where the figure draws bubbles.
// Extra pattern extractor (blue region): three comparators on V[k],
//   Dcomp = V > 0,  Dxp = V + hx > 0,  Dxn = V - hx > 0
// each re-timed by one register, so all five outputs refer to symbol n.
//
// Interface and timing: one sample per clock on vin. dpre is combinational
// from the delay register and vin; dpost, dcomp, dxp and dxn are register
// outputs; v_d is the delay register. At any cycle all six outputs belong
// to the sample that was presented one clock earlier. Comparators test
// "greater than".
//
// Follows the paper: comparator set, thresholds and gate network. Own
// choice: digital comparators on ADC codes, widths and reset.
module pd_ffne_core
  import ffne_pkg::*;
#(
  parameter int W  = SAMPLE_W,
  parameter int TW = TAP_W
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic signed [W-1:0]  vin,
  input  logic signed [TW-1:0] hm1,     // precursor estimate h-1
  input  logic signed [TW-1:0] h1,      // postcursor estimate h1
  input  logic signed [TW-1:0] hx,      // auxiliary detector level
  output logic                 dpre,
  output logic                 dpost,
  output logic                 dcomp,
  output logic                 dxp,
  output logic                 dxn,
  output logic signed [W-1:0]  v_d
);

  localparam int XW = TW + 1;

  logic signed [XW-1:0] vx, vdx, hm1x, h1x, hxx;
  logic c_dif, pre_hi, pre_lo, post_hi, post_lo;
  logic dpost_nxt;

  always_comb begin
    vx   = XW'(vin);
    vdx  = XW'(v_d);
    hm1x = XW'(hm1);
    h1x  = XW'(h1);
    hxx  = XW'(hx);
    c_dif   = (vdx - vx) > 0;
    pre_hi  = (vdx - hm1x) > 0;
    pre_lo  = (vdx + hm1x) > 0;
    post_lo = (vx + h1x) > 0;
    post_hi = (vx - h1x) > 0;
    // Precursor FFNE: NAND(~pre_hi, NAND(pre_lo, c_dif)).
    dpre      = ~(~pre_hi & ~(pre_lo & c_dif));
    // Postcursor FFNE: NAND(NAND(~c_dif, post_lo), ~post_hi).
    dpost_nxt = ~(~(~c_dif & post_lo) & ~post_hi);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_d   <= '0;
      dpost <= 1'b0;
      dcomp <= 1'b0;
      dxp   <= 1'b0;
      dxn   <= 1'b0;
    end else begin
      v_d   <= vin;
      dpost <= dpost_nxt;
      dcomp <= vx > 0;
      dxp   <= (vx + hxx) > 0;
      dxn   <= (vx - hxx) > 0;
    end
  end

endmodule
