// ffne_pkg: constants and types shared by the feedforward nonlinear
// equalizer (FFNE) blocks.
//
// All blocks treat the received sample V_IN[k] as a signed two's-complement
// ADC code of SAMPLE_W bits. Tap estimates (h-1, h0, h1, hx, VTH) are held in
// the same LSB units with TAP_W bits, so that sums such as h-1+h0+h1 cannot
// overflow. Summer gains (Gm1, Gm2) are unsigned fixed point with GAIN_FRAC
// fractional bits (1.0 = 2**GAIN_FRAC). These widths are this design's own
// choice; the equalizer algorithms themselves do not depend on them.
package ffne_pkg;

  // Default datapath sizes.
  localparam int SAMPLE_W  = 8;              // ADC sample width
  localparam int TAP_W     = SAMPLE_W + 2;   // tap / level width
  localparam int GAIN_W    = 10;             // summer gain width (unsigned)
  localparam int GAIN_FRAC = 8;              // fractional bits of a gain
  localparam int COEF_W    = 9;              // signed h1/h0 ratio (PAM-4, Win-3)
  localparam int COEF_FRAC = 8;              // fractional bits of the ratio
  localparam int LMS_FRAC  = 6;              // extra LSBs in SS-LMS accumulators

  localparam logic [GAIN_W-1:0] GAIN_ONE = GAIN_W'(1 << GAIN_FRAC);

  // Reference level selected for the PD-FFNE error slicer (Fig. 17 mux).
  // The level is the noiseless sample D[k-1] for the data pattern
  // {D[k-2], D[k-1], D[k]} named in the enumerator.
  typedef enum logic [1:0] {
    LEV_111 = 2'd0,   //  h-1 + h0 + h1
    LEV_110 = 2'd1,   // -h-1 + h0 + h1
    LEV_011 = 2'd2,   //  h-1 + h0 - h1
    LEV_010 = 2'd3    // -h-1 + h0 - h1
  } pd_lev_e;

  // Which PD-FFNE correction patterns fired on the symbol at the filter
  // centre (one flag per pattern, for a firing histogram).
  typedef struct packed {
    logic p4;
    logic p3;
    logic p2;
    logic p1;
  } pd_fire_t;

endpackage
