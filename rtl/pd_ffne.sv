// pd_ffne: pattern-detection feedforward nonlinear equalizer for NRZ with
// one precursor (h-1) and one postcursor (h1) tap, wired as in Fig. 17.
//
// pd_ffne_core runs a precursor and a postcursor Win-2 FFNE on the same
// samples plus three auxiliary comparators (0, +hx, -hx); pd_pattern_filter
// resolves disagreements between the two FFNEs with correction patterns 1-4
// and emits the final decision; pd_adapt tracks h-1, h0, h1 from the final
// decisions and feeds h-1 and h1 back to the comparators. Every decision is
// feedforward: the loop closes only through the slow tap adaptation.
//
// Interface and timing: one sample per clock on vin. d is the decision of
// the sample presented LAT = 5 clocks earlier (1 in the core, 4 in the
// filter). fire flags the correction patterns centred on that symbol. hx is
// the fixed auxiliary level (nominally h0/2). With adapt_en low the taps
// keep their reset values H*_INIT.
module pd_ffne
  import ffne_pkg::*;
#(
  parameter int W   = SAMPLE_W,
  parameter int TW  = TAP_W,
  parameter int MU  = 4,
  parameter int H0_INIT  = 32,
  parameter int H1_INIT  = 0,
  parameter int HM1_INIT = 0
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 adapt_en,
  input  logic signed [W-1:0]  vin,
  input  logic signed [TW-1:0] hx,
  output logic                 d,
  output pd_fire_t             fire,
  output logic signed [TW-1:0] hm1_hat,
  output logic signed [TW-1:0] h0_hat,
  output logic signed [TW-1:0] h1_hat
);

  localparam int LAT_FILTER = 4;

  logic                dpre, dpost, dcomp, dxp, dxn;
  logic signed [W-1:0] v_d;

  pd_ffne_core #(.W(W), .TW(TW)) u_core (
    .clk, .rst_n, .vin, .hm1(hm1_hat), .h1(h1_hat), .hx,
    .dpre, .dpost, .dcomp, .dxp, .dxn, .v_d
  );

  pd_pattern_filter u_filter (
    .clk, .rst_n, .dpre, .dpost, .dcomp, .dxp, .dxn,
    .d_out(d), .fire
  );

  pd_adapt #(.W(W), .TW(TW), .MU(MU), .EDLY(LAT_FILTER + 1),
             .H0_INIT(H0_INIT), .H1_INIT(H1_INIT), .HM1_INIT(HM1_INIT)) u_adapt (
    .clk, .rst_n, .en(adapt_en), .v(v_d), .d,
    .hm1(hm1_hat), .h0(h0_hat), .h1(h1_hat)
  );

endmodule
