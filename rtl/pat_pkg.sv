// Shared types and constants of the photoacoustic delay-and-sum reconstructor.
//
// The reconstructor turns delay-and-sum beamforming into table-driven memory
// look-ups: for every pixel a precomputed table gives the sample number at
// which each transducer channel saw that pixel, and the sample found there is
// the channel's contribution. Eight channels are processed side by side; a
// frame with more channels takes several "imaging cycles" of eight channels.
//
// The widths below are this design's own choices (the source gives no ADC
// resolution and no record length); the lane count, the 256x256 image and the
// 128-channel array are the numbers of the evaluated system.
package pat_pkg;

  // Algorithm selected per frame.
  typedef enum logic [1:0] {
    MODE_DAS    = 2'd0,  // plain delay-and-sum
    MODE_DAS_CF = 2'd1,  // coherence-factor weighting: (sum s)^2 / sum s^2
    MODE_DMAS   = 2'd2   // delay-multiply-and-sum via signed square roots
  } mode_e;


  localparam int unsigned SAMPLE_W     = 16;     // signed ADC sample
  localparam int unsigned ROOT_FRAC    = 8;      // fraction bits of sign(s)*sqrt|s|
  localparam int unsigned ROOT_W       = SAMPLE_W + 2;  // signed root incl. sign
  localparam int unsigned TERM_B_W     = 2 * SAMPLE_W;  // s^2 or |s|<<16, unsigned
  localparam int unsigned ACC_A_W      = 32;     // signed sum A over all channels
  localparam int unsigned ACC_B_W      = 48;     // unsigned sum B over all channels
  localparam int unsigned OUT_W        = 64;     // output pixel word
  localparam int unsigned CF_FRAC      = 10;     // fraction bits of the DAS-CF quotient
  localparam int unsigned DIV_Q_W      = 20;     // quotient bits = divider latency
  localparam int unsigned SQRT_LAT     = 16;     // square-root latency in clocks
  localparam int unsigned COMB_LAT     = 1 + SQRT_LAT + 1;      // abs, root, SUM

endpackage
