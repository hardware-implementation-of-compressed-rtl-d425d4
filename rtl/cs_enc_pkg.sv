// Shared widths, types and arithmetic helpers of the compressed-sensing video
// encoder (3-D lifting DWT followed by Bernoulli projections).
//
// Widths: 8-bit pixels (a choice of this design), 15-bit sub-band
// coefficients (the width the CS module input has in the source
// architecture), 16-bit measurements (also from the source architecture) and
// a 24-bit internal lifting word (a choice of this design, wide enough for
// the worst-case growth of the column pass).
//
// The shift-and-add constants are those of the flipped 9/7 lifting scheme:
//   a' = 1/alpha       ~ -(1/2 + 1/8 + 1/128)        = -0.6328
//   b' = 1/(alpha beta) ~  4 + 8                       = 12
//   c' = 1/(beta gamma) ~ -(1 + 16 + 4 + 1/4 + 1/8)    = -21.375
//   d' = 1/(gamma delta)~  2 + 1/2 + 1/16              = 2.5625
//   K0 ~ 1/16 (H scaling), K1 ~ 1/32 (L scaling)
// and 1/sqrt(2) ~ 1/2 + 1/8 + 1/16 + 1/64 = 0.703 for the temporal Haar step.
package cs_enc_pkg;

  localparam int unsigned PIX_W  = 8;
  localparam int unsigned COEF_W = 15;
  localparam int unsigned ACC_W  = 24;
  localparam int unsigned Y_W    = 16;

  typedef logic        [PIX_W-1:0]  pix_t;
  typedef logic signed [COEF_W-1:0] coef_t;
  typedef logic signed [ACC_W-1:0]  acc_t;
  typedef logic signed [Y_W-1:0]    meas_t;

  // Sub-band order used on every 4-wide spatial bus.
  typedef enum logic [1:0] {SB_LL = 2'd0, SB_LH = 2'd1, SB_HL = 2'd2, SB_HH = 2'd3} subband_e;

  // Band order of the 3-D DWT output bus: temporal band first, then the
  // spatial sub-band (L frame: LLL LLH LHL LHH, H frame: HLL HLH HHL HHH).
  typedef enum logic [2:0] {
    B_LLL = 3'd0, B_LLH = 3'd1, B_LHL = 3'd2, B_LHH = 3'd3,
    B_HLL = 3'd4, B_HLH = 3'd5, B_HHL = 3'd6, B_HHH = 3'd7
  } band_e;

endpackage
