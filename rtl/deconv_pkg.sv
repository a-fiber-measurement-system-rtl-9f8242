// deconv_pkg: shared constants and helpers of the approximate-deconvolution unit.
//
// The unit removes the "fault cluster" that a Linearized Bregman Iteration (LBI) solver leaves
// around every step it finds in a fiber profile: each detected peak is kept, and a scaled copy of
// a fixed cluster shape (centre set to zero) is subtracted from its neighbours.
//
// What follows the paper: the compensation vector length S = 65 and the worst-case number of
// simultaneously listed peaks (20). Everything else here is this design's own choice: 16-bit
// two's-complement samples, unsigned Q1.15 coefficients, and the default coefficient table,
// which is a two-sided geometric decay (ratio DEFAULT_DECAY_Q15 / 2^15 per position) that only
// approximates the averaged cluster shape measured in the paper. Replace it with measured
// coefficients for real use.
package deconv_pkg;

  // Compensation vector length (number of ROM coefficients and shift register stages).
  localparam int unsigned DEFAULT_S          = 65;
  // Depth of the multiplier / cluster index lists (peaks whose clusters overlap at once).
  localparam int unsigned DEFAULT_LIST_DEPTH = 20;
  // Width of one estimate sample beta_hat[k], two's complement.
  localparam int unsigned DEFAULT_DATA_W     = 16;
  // Coefficient width and the position of its binary point (unsigned, 1.0 = 2^COEF_FRAC).
  localparam int unsigned DEFAULT_COEF_W     = 16;
  localparam int unsigned DEFAULT_COEF_FRAC  = 15;
  // Decay per position of the default cluster shape, Q0.15 (0.58).
  localparam int unsigned DEFAULT_DECAY_Q15  = 19005;

  // Coefficient k (0..S-1) of the default compensation vector. Position k sits k-(S-1)/2 samples
  // from the peak; the centre is zero so the peak itself is preserved. Away from the centre the
  // value is round-down(2^COEF_FRAC * r^|d|), r = decay/2^15, built by repeated fixed-point
  // multiplication so that it elaborates as a constant.
  function automatic int unsigned default_coef(int unsigned k, int unsigned s,
                                               int unsigned coef_frac, int unsigned decay_q15);
    int unsigned c;
    int unsigned d;
    int unsigned centre;
    centre = (s - 1) / 2;
    d = (k >= centre) ? (k - centre) : (centre - k);
    if (d == 0) return 0;
    c = 1 << coef_frac;
    for (int unsigned i = 0; i < d; i++) c = (c * decay_q15) >> 15;
    return c;
  endfunction

endpackage
