// decim_pkg: constants shared by the decimation chain.
//
// The chain takes a 6.144 MHz oversampled stream down to 48 kHz (oversampling
// ratio 128) in four stages: a 5-stage CIC filter (16:1), a half-band filter
// (2:1), a droop correction filter (2:1) and a second half-band filter (2:1).
// The CIC parameters N=5, M=1, R=16, the 25-bit full-precision register width,
// the pruned widths 25/22/20/18/16 and the filter orders 4, 8 and 40 are the
// paper's. The input word width B_IN=5 and all FIR coefficients are this
// design's own: B_IN is the value that makes N*log2(R)+B_IN equal the 25-bit
// register width, and the coefficients were designed for the stated orders
// (Kaiser-windowed half-band sinc, least-squares inverse-sinc fit).
// Coefficients are signed fixed point with COEF_FRAC fractional bits.
package decim_pkg;

  // CIC filter (Hogenauer): N stages, differential delay M, decimation R
  localparam int unsigned CIC_N    = 5;
  localparam int unsigned CIC_M    = 1;
  localparam int unsigned CIC_R    = 16;
  localparam int unsigned B_IN     = 5;   // input word width (assumed)
  localparam int unsigned CIC_BMAX = 25;  // full-precision register width

  // Register widths of the truncated CIC (Fig. 4): integrators 1..5, combs 1..5
  localparam int unsigned TRUNC_INT_W [CIC_N] = '{25, 22, 20, 18, 16};
  localparam int unsigned TRUNC_COMB_W        = 16;

  // Which CIC structure the chain uses
  typedef enum logic {
    CIC_PIPELINED = 1'b0,   // Fig. 6: 25-bit stages, a register after every adder
    CIC_TRUNCATED = 1'b1    // Fig. 4: pruned 25/22/20/18/16-bit stages
  } cic_mode_e;

  // Data word carried between the FIR stages (the pipelined CIC output width)
  localparam int unsigned DW = 25;

  // FIR coefficients: signed, COEF_W bits, COEF_FRAC fractional bits
  localparam int unsigned COEF_W    = 18;
  localparam int unsigned COEF_FRAC = 17;

  // First half-band filter, order 4: only the taps at offsets +-1 are
  // non-zero besides the centre tap 0.5 -> h = {0.25, 0.5, 0.25}
  localparam int unsigned HB1_ORDER = 4;
  localparam int          HB1_COEF [1] = '{32768};

  // Second half-band filter, order 40: taps at offsets +-1, +-3, ... +-19
  // (even offsets, including the end taps +-20, are zero; centre is 0.5).
  // Kaiser-windowed (beta 4.5) half-band sinc, rounded to 17 fractional bits
  // with the first pair adjusted so that all taps sum to exactly 1.0.
  localparam int unsigned HB2_ORDER = 40;
  localparam int          HB2_COEF [10] =
    '{41525, -13239, 7263, -4520, 2904, -1848, 1129, -642, 322, -126};

  // Droop correction, order 8 (9 symmetric taps h0..h4, h4 is the centre).
  // Fitted to 1/(CIC sinc^5 * HB1) over 0..20 kHz at 192 kHz, DC gain 1.0.
  localparam int unsigned DROOP_ORDER = 8;
  localparam int          DROOP_COEF [5] = '{1201, 215, -17683, 35314, 92978};

endpackage
