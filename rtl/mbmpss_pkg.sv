// mbmpss_pkg -- shared widths and number formats of the multi-band
// magnitude-and-phase spectral subtraction (MBMPSS) speech enhancer.
//
// All spectrum samples travel as 16-bit two's complement words, the output
// width the CORDIC blocks are given. Fixed-point formats used across modules:
//   * time samples, FFT real/imag, magnitude : integer scale, 16 bit signed
//     (the forward FFT divides by the frame length, so |X[k]| <= full scale)
//   * phase                                   : radians, Q3.13 (pi = 25736)
//   * cos / sin                               : Q1.14 (1.0 = 16384)
//   * SNR ratio max(S)/max(N)                 : unsigned Q8.8
//   * over-subtraction factor alpha*delta     : unsigned Q4.8
// The frame length (256) and the number of bands (4) follow the paper; the
// number formats are this design's own choice.
package mbmpss_pkg;
  localparam int unsigned DW        = 16;   // sample / spectrum word width
  localparam int unsigned NFFT      = 256;  // frame (window) length
  localparam int unsigned NBANDS    = 4;    // linearly spaced bands
  localparam int unsigned PH_FRAC   = 13;   // phase fraction bits
  localparam int unsigned TRIG_FRAC = 14;   // cos/sin fraction bits
  localparam int unsigned FAC_FRAC  = 8;    // alpha*delta fraction bits
  localparam int unsigned SNR_FRAC  = 8;    // SNR ratio fraction bits
  localparam int unsigned FACW      = 12;   // alpha*delta word width (max 12.5)
  localparam int unsigned NOISE_FRAMES_DEF = 5; // noise-only frames learnt

  typedef logic signed [DW-1:0] sample_t;

  // Saturate a wider signed value to DW bits.
  function automatic sample_t sat_dw(input logic signed [DW+15:0] v);
    if (v > $signed({{17{1'b0}}, {(DW-1){1'b1}}}))       return sample_t'({1'b0, {(DW-1){1'b1}}});
    else if (v < -$signed({{17{1'b0}}, {(DW-1){1'b1}}}) - 1) return sample_t'({1'b1, {(DW-1){1'b0}}});
    else return v[DW-1:0];
  endfunction
endpackage
