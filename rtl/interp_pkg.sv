// interp_pkg -- constants and types shared by the 128x interpolator.
//
// The interpolator raises a 44.1 kHz PCM stream to 128 x 44.1 kHz = 5.6448 MHz in
// three stages: two half-band FIR interpolators by 2 and a CIC interpolator by 32.
// The stage ratios, the CIC ratio of 32 and the stop-band targets (80 dB for the
// half-band stages, 65 dB for the CIC) follow the paper that proposed the design.
// Word lengths and the half-band coefficients below are this design's own choice;
// the paper generated its coefficients with a filter-design tool and does not list them.
//
// Half-band filter: 47 taps (order 46), equiripple, pass band 0 .. 0.39*pi and stop
// band 0.61*pi .. pi at the filter's output rate, stop-band attenuation 82.6 dB after
// quantisation. The taps are multiplied by the interpolation gain 2 so that the
// centre tap is exactly 1.0; every other tap at an even distance from the centre is 0.
// The 24 remaining taps h2[2i], i = 0..23, form the FIR branch of the polyphase
// filter. They are symmetric (h2[2i] = h2[46-2i]) and stored as signed Q1.15 words:
// value = HB_COEF[i] / 2^15. They were obtained with the Parks-McClellan algorithm
// for a 47-tap low-pass with band edges 0.195 and 0.305 (cycles/sample), the taps at
// even offsets from the centre forced to 0 and the centre to 0.5, then scaled by 2
// and rounded to 16 bits. Their sum is exactly 2^15 (DC gain 1.0 per branch).
package interp_pkg;

  // Half-band FIR branch
  localparam int HB_COEF_W = 16;               // signed, Q1.15
  localparam int HB_FRAC   = HB_COEF_W - 1;    // fraction bits of the taps
  localparam int HB_NTAP   = 24;               // non-zero taps off the centre
  localparam int HB_CDLY   = 11;               // centre tap sits between branch taps 11 and 12

  // First half of the symmetric FIR branch, h2[0], h2[2], .. h2[22]
  localparam logic signed [HB_COEF_W-1:0] HB_COEF_HALF [HB_NTAP/2] = '{
    -16'sd8,    16'sd26,   -16'sd66,   16'sd144,  -16'sd278,  16'sd495,
    -16'sd832,  16'sd1348, -16'sd2156, 16'sd3543, -16'sd6558, 16'sd20726
  };

  // Tap i of the FIR branch, i = 0 .. HB_NTAP-1, using the symmetry.
  function automatic logic signed [HB_COEF_W-1:0] hb_coef(int i);
    return (i < HB_NTAP/2) ? HB_COEF_HALF[i] : HB_COEF_HALF[HB_NTAP-1-i];
  endfunction

  // Which polyphase branch a half-band stage emits next.
  typedef enum logic {
    PH_FIR  = 1'b0,   // interpolated point: the 24-tap branch
    PH_ORIG = 1'b1    // original sample, delayed to line up with the branch
  } hb_phase_e;

  // Stage ratios of the cascade
  localparam int HB_RATIO     = 2;
  localparam int CIC_RATIO    = 32;

endpackage
