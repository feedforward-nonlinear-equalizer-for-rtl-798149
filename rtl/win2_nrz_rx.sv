// win2_nrz_rx: NRZ Win-2 FFNE with its adaptation loop closed, as in Fig. 4.
//
// win2_ffne makes the decisions D[k] and the summer sign C[k]; win2_adapt
// watches V[k], D[k] and C[k] and feeds back the h1 estimate to the data
// comparators and the Gm2 gain to the difference summer. The feedback runs
// only through the slow adaptation loop: every decision is feedforward.
//
// Interface and timing: one sample per clock; d is D[k] one clock after
// V[k] is presented (latency 1). gm1 sets the gain of the V[k] summer input
// (GAIN_ONE for an ideal summer). The loop structure follows the paper; the
// widths and steps are this design's choice (see the two sub-blocks).
module win2_nrz_rx
  import ffne_pkg::*;
#(
  parameter int W   = SAMPLE_W,
  parameter int TW  = TAP_W,
  parameter int GW  = GAIN_W,
  parameter int MU  = 4,
  parameter int MU_G = 4,
  parameter int H0_INIT = 32,
  parameter int H1_INIT = 0
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 adapt_en,
  input  logic signed [W-1:0]  vin,
  input  logic        [GW-1:0] gm1,
  output logic                 d,
  output logic signed [TW-1:0] h0_hat,
  output logic signed [TW-1:0] h1_hat,
  output logic        [GW-1:0] gm2_hat
);

  logic                c;
  logic signed [W-1:0] v_k;
  logic                e_unused, sel_unused;

  win2_ffne #(.W(W), .TW(TW), .GW(GW)) u_ffne (
    .clk, .rst_n, .vin, .h1(h1_hat), .gm1, .gm2(gm2_hat),
    .d, .c, .v_out(v_k)
  );

  win2_adapt #(.W(W), .TW(TW), .GW(GW), .MU(MU), .MU_G(MU_G),
               .H0_INIT(H0_INIT), .H1_INIT(H1_INIT)) u_adapt (
    .clk, .rst_n, .en(adapt_en), .v(v_k), .d, .c,
    .h0(h0_hat), .h1(h1_hat), .gm2(gm2_hat),
    .e_out(e_unused), .sel_out(sel_unused)
  );

endmodule
