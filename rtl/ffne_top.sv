// ffne_top: receiver equalizer back end with the three feedforward nonlinear
// equalizers (FFNEs) of this design on one stream of received samples.
//
//   NRZ Win-2 FFNE + adaptation (win2_nrz_rx): postcursor h1 cancellation,
//     with dLev SS-LMS of h0/h1 and SS-LMS trimming of the summer gain Gm2.
//   PAM-4 Win-2 FFNE (pam4_win2_ffne): postcursor cancellation for 4-level
//     signalling; its taps come from ports.
//   PD-FFNE (pd_ffne): joint precursor/postcursor cancellation for NRZ with
//     pattern detection and h-1/h0/h1 adaptation.
//   NRZ Win-3 FFNE (win3_ffne): three-sample window, the high-cost upper
//     bound of the family; its taps come from ports.
// All three see the same sample port vin (one ADC code per clock, supplied
// by an analog front end outside this design); each produces its own
// decisions, so the one that matches the line's modulation and channel is
// used. The latencies are 1 clock (NRZ Win-2), 1 clock (PAM-4) and 5 clocks
// (PD-FFNE) and 1 clock (Win-3) from the sample to its decision.
module ffne_top
  import ffne_pkg::*;
#(
  parameter int W  = SAMPLE_W,
  parameter int TW = TAP_W,
  parameter int GW = GAIN_W,
  parameter int CW = COEF_W,
  parameter int H0_INIT = 32
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic signed [W-1:0]  vin,          // V_IN[k] from the ADC
  input  logic                 adapt_en,
  // NRZ Win-2 FFNE
  input  logic        [GW-1:0] nrz_gm1,      // gain of the V[k] summer input
  output logic                 nrz_d,
  output logic signed [TW-1:0] nrz_h0,
  output logic signed [TW-1:0] nrz_h1,
  output logic        [GW-1:0] nrz_gm2,
  // PAM-4 Win-2 FFNE
  input  logic signed [TW-1:0] pam4_h1,
  input  logic signed [TW-1:0] pam4_vth,
  input  logic signed [CW-1:0] pam4_h1_ratio,
  output logic                 pam4_msb,
  output logic                 pam4_lsb,
  output logic [1:0]           pam4_sym,
  // PD-FFNE
  input  logic signed [TW-1:0] pd_hx,
  output logic                 pd_d,
  output pd_fire_t             pd_fire,
  output logic signed [TW-1:0] pd_hm1,
  output logic signed [TW-1:0] pd_h0,
  output logic signed [TW-1:0] pd_h1,
  // NRZ Win-3 FFNE
  input  logic signed [TW-1:0] w3_h0,
  input  logic signed [TW-1:0] w3_h1,
  input  logic signed [CW-1:0] w3_h1_ratio,
  output logic                 w3_d,
  output logic [4:0]           w3_sel
);

  win2_nrz_rx #(.W(W), .TW(TW), .GW(GW), .H0_INIT(H0_INIT)) u_nrz (
    .clk, .rst_n, .adapt_en, .vin, .gm1(nrz_gm1),
    .d(nrz_d), .h0_hat(nrz_h0), .h1_hat(nrz_h1), .gm2_hat(nrz_gm2)
  );

  pam4_win2_ffne #(.W(W), .TW(TW), .CW(CW)) u_pam4 (
    .clk, .rst_n, .vin, .h1(pam4_h1), .vth(pam4_vth),
    .h1_ratio(pam4_h1_ratio), .a_msb(pam4_msb), .a_lsb(pam4_lsb),
    .sym(pam4_sym)
  );

  pd_ffne #(.W(W), .TW(TW), .H0_INIT(H0_INIT)) u_pd (
    .clk, .rst_n, .adapt_en, .vin, .hx(pd_hx),
    .d(pd_d), .fire(pd_fire), .hm1_hat(pd_hm1), .h0_hat(pd_h0),
    .h1_hat(pd_h1)
  );

  win3_ffne #(.W(W), .TW(TW), .CW(CW)) u_win3 (
    .clk, .rst_n, .vin, .h0(w3_h0), .h1(w3_h1), .h1_ratio(w3_h1_ratio),
    .d(w3_d), .sel(w3_sel)
  );

endmodule
