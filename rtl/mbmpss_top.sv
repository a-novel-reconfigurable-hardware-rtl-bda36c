// mbmpss_top -- multi-band magnitude-and-phase spectral subtraction speech
// enhancer, the whole chain.
//
//   in_sample -> FFT (256) -> CORDIC ARCTAN -+-> magnitude path --------+
//                                            |                          +-> mult -> IFFT -> out_sample
//                                            +-> phase path -> SINCOS --+
//
// Each path (spectral_path) estimates the noise spectrum from the first five
// frames, splits the spectrum into four linear bands, derives an
// over-subtraction factor from each band's SNR and subtracts the scaled
// noise. The enhanced phase is turned into cos/sin and multiplied with the
// enhanced magnitude, and the IFFT rebuilds the time frame. The block
// structure follows the paper; the fixed-point formats, the frame-serial
// FFT cores and all timing are this design's own.
//
// Interface: a stream of 16-bit signed time samples. in_ready is high while
// the FFT loads a frame; frames are non-overlapping windows of 256 samples.
// The FFT holds a computed frame until the IFFT is empty (frame-level
// back-pressure); after that the 256 bins flow through the spectral
// pipeline with no stall at one bin per clock, and the IFFT sends out 256
// enhanced samples (out_valid, out_index = sample number, out_last).
// Latency between FFT and IFFT: CORDIC 13 + path 7 + SINCOS 11 + mult 1 =
// 32 clocks. Status: learning (noise frames in progress), per-band factors.
module mbmpss_top import mbmpss_pkg::*; #(
  parameter int unsigned N            = NFFT,
  parameter int unsigned NB           = NBANDS,
  parameter int unsigned FS_HZ        = 16000,
  parameter int unsigned NOISE_FRAMES = NOISE_FRAMES_DEF
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  output logic                   in_ready,
  input  sample_t                in_sample,
  output logic                   out_valid,
  output logic                   out_last,
  output logic [$clog2(N)-1:0]   out_index,
  output sample_t                out_sample,
  output sample_t                out_imag,      // ideally ~0, for inspection
  output logic                   learning,
  output logic [FACW-1:0]        mag_factor [NB],
  output logic [FACW-1:0]        ph_factor  [NB],
  output logic [NB-1:0]          mag_floored,
  output logic                   fft_waiting    // computed frame held back
);
  localparam int unsigned AW = $clog2(N);
  localparam int unsigned SC_IT  = 10;
  localparam int unsigned SC_LAT = SC_IT + 1;

  // FFT
  logic          fft_edone, f_v, f_last, ifft_empty;
  logic [AW-1:0] f_idx;
  sample_t       f_re, f_im;
  logic          fft_in_empty, fft_hold, ifft_hold;

  fft_core #(.N(N), .INVERSE(1'b0), .W(DW)) u_fft (
    .clk, .rst_n, .in_valid, .in_ready, .in_empty(fft_in_empty),
    .in_re(in_sample), .in_im('0),
    .out_frame_ready(ifft_empty), .edone(fft_edone), .holding(fft_hold),
    .out_valid(f_v), .out_last(f_last), .out_index(f_idx), .out_re(f_re), .out_im(f_im)
  );

  // magnitude / phase separation
  logic          a_v;
  logic [AW-1:0] a_idx;
  sample_t       a_mag, a_ph;
  cordic_arctan #(.W(DW), .IT(11), .TAGW(AW)) u_atan (
    .clk, .rst_n, .in_valid(f_v), .in_tag(f_idx), .in_x(f_re), .in_y(f_im),
    .out_valid(a_v), .out_tag(a_idx), .out_mag(a_mag), .out_phase(a_ph)
  );

  // magnitude and phase paths, in parallel
  logic          m_v, p_v, p_learning;
  logic [AW-1:0] m_idx, p_idx;
  sample_t       m_out, p_out;
  logic [FACW-1:0] m_alpha [NB];
  logic [FACW-1:0] p_alpha [NB];
  logic [NB-1:0]   p_floored;

  spectral_path #(.W(DW), .N(N), .NB(NB), .FS_HZ(FS_HZ), .NOISE_FRAMES(NOISE_FRAMES)) u_mag (
    .clk, .rst_n, .edone(fft_edone), .in_valid(a_v), .in_index(a_idx), .in_data(a_mag),
    .out_valid(m_v), .out_index(m_idx), .out_data(m_out), .learning,
    .factor(mag_factor), .alpha(m_alpha), .floored(mag_floored)
  );
  spectral_path #(.W(DW), .N(N), .NB(NB), .FS_HZ(FS_HZ), .NOISE_FRAMES(NOISE_FRAMES)) u_ph (
    .clk, .rst_n, .edone(fft_edone), .in_valid(a_v), .in_index(a_idx), .in_data(a_ph),
    .out_valid(p_v), .out_index(p_idx), .out_data(p_out), .learning(p_learning),
    .factor(ph_factor), .alpha(p_alpha), .floored(p_floored)
  );

  // reconstruction: SINCOS on the phase, magnitude delayed to match
  logic          s_v;
  logic [AW-1:0] s_idx;
  sample_t       s_cos, s_sin, m_dly;
  cordic_sincos #(.W(DW), .IT(SC_IT), .TAGW(AW)) u_sc (
    .clk, .rst_n, .in_valid(p_v), .in_tag(p_idx), .in_phase(p_out),
    .out_valid(s_v), .out_tag(s_idx), .out_cos(s_cos), .out_sin(s_sin)
  );
  pipe_delay #(.W(DW), .D(SC_LAT)) u_mdly (.clk, .rst_n, .d(m_out), .q(m_dly));

  logic          r_v;
  logic [AW-1:0] r_idx;
  sample_t       r_re, r_im;
  recon_mult #(.W(DW), .TAGW(AW)) u_mult (
    .clk, .rst_n, .in_valid(s_v), .in_tag(s_idx), .mag(m_dly), .cos_v(s_cos), .sin_v(s_sin),
    .out_valid(r_v), .out_tag(r_idx), .re(r_re), .im(r_im)
  );

  // IFFT
  logic ifft_in_ready, ifft_edone;
  fft_core #(.N(N), .INVERSE(1'b1), .W(DW)) u_ifft (
    .clk, .rst_n, .in_valid(r_v), .in_ready(ifft_in_ready), .in_empty(ifft_empty),
    .in_re(r_re), .in_im(r_im),
    .out_frame_ready(1'b1), .edone(ifft_edone), .holding(ifft_hold),
    .out_valid, .out_last, .out_index, .out_re(out_sample), .out_im(out_imag)
  );

  assign fft_waiting = fft_hold && !ifft_empty;

  // Rules of the frame hand-over: the IFFT must be loading whenever a bin
  // arrives, and bins must arrive in order (the IFFT stores by arrival).
  a_ifft_ready: assert property (@(posedge clk) disable iff (!rst_n) r_v |-> ifft_in_ready)
    else $error("IFFT not ready for bin %0d", r_idx);
  // the two paths must stay aligned
  a_paths_aligned: assert property (@(posedge clk) disable iff (!rst_n) (m_v == p_v) && (m_idx == p_idx))
    else $error("magnitude/phase paths misaligned");

  logic unused;
  assign unused = ^{f_last, fft_in_empty, p_learning, ifft_edone, m_alpha[0], p_alpha[0], p_floored, r_idx, ifft_hold};
endmodule
