// spectral_path -- one noise estimation and subtraction path.
//
// The enhancer runs two of these side by side, one on the magnitude spectrum
// and one on the phase spectrum, exactly alike (the paper's "magnitude/phase
// multi band separation" plus "noise estimation & subtraction" blocks):
//   noise_estimator      per-bin noise N[k] from the first 5 frames
//   band_controller      which of the 4 linear bands bin k belongs to
//   multiband_separator  4 band registers fed by the spectrum
//   snr_compute   x4     max(S)/max(N) of each band over the frame
//   oversub_factor x4    alpha_i(SNR_i) * delta_i
//   spectral_subtractor x4  max(Y - alpha_i*delta_i*N, N) per band
//   band_adder           the 4 enhanced bands joined again
// delta_i comes from the band's upper frequency f_i = (i+1)*FS/(2*NB):
// 1 below 1 kHz, 2.5 up to FS/2 - 2 kHz, 1.5 above (FS = 16 kHz gives
// 2.5, 2.5, 2.5, 1.5; f_i equal to FS/2 - 2 kHz is taken as the middle case).
// Timing: latency PATH_LAT = 7 clocks from in_* to out_* (2 estimator,
// 1 separator, 3 subtractor, 1 adder), one bin per clock. The band factors
// used on frame t come from the SNR of frame t-1.
module spectral_path import mbmpss_pkg::*; #(
  parameter int unsigned W            = DW,
  parameter int unsigned N            = NFFT,
  parameter int unsigned NB           = NBANDS,
  parameter int unsigned FS_HZ        = 16000,
  parameter int unsigned NOISE_FRAMES = NOISE_FRAMES_DEF
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    edone,
  input  logic                    in_valid,
  input  logic [$clog2(N)-1:0]    in_index,
  input  logic signed [W-1:0]     in_data,
  output logic                    out_valid,
  output logic [$clog2(N)-1:0]    out_index,
  output logic signed [W-1:0]     out_data,
  output logic                    learning,
  output logic [FACW-1:0]         factor [NB],
  output logic [FACW-1:0]         alpha  [NB],
  output logic [NB-1:0]           floored
);
  localparam int unsigned AW = $clog2(N);
  localparam int unsigned SUB_LAT = 3;

  function automatic int unsigned delta_q8(input int unsigned b);
    int unsigned fu;
    fu = (b + 1) * FS_HZ / (2 * NB);
    if (fu < 1000)                 return 256;   // 1.0
    else if (fu <= FS_HZ/2 - 2000) return 640;   // 2.5
    else                           return 384;   // 1.5
  endfunction

  // noise estimation
  logic                 v2;
  logic [AW-1:0]        idx2;
  logic signed [W-1:0]  sig2, noise2;
  noise_estimator #(.W(W), .N(N), .NOISE_FRAMES(NOISE_FRAMES)) u_ne (
    .clk, .rst_n, .edone, .in_valid, .in_index, .in_data,
    .out_valid(v2), .out_index(idx2), .out_signal(sig2), .out_noise(noise2),
    .learning
  );

  // band controllers and separation
  logic [NB-1:0]        en2, en3, en6;
  logic                 last2, last3;
  logic signed [W-1:0]  band_q [NB];
  logic signed [W-1:0]  noise3;
  logic [AW-1:0]        idx3, idx6;
  logic signed [W-1:0]  sub_s [NB];

  band_controller #(.N(N), .NB(NB)) u_bc (
    .in_valid(v2), .in_index(idx2), .band_en(en2), .frame_last(last2)
  );
  multiband_separator #(.W(W), .NB(NB)) u_sep (
    .clk, .rst_n, .band_en(en2), .d(sig2), .band_q(band_q), .band_valid(en3)
  );
  pipe_delay #(.W(W + 1 + AW), .D(1)) u_d3 (
    .clk, .rst_n, .d({noise2, last2, idx2}), .q({noise3, last3, idx3})
  );

  for (genvar b = 0; b < int'(NB); b++) begin : g_band
    logic [15:0] snr;
    logic        snr_v;
    logic        sv_unused;
    logic signed [15:0] db_unused;
    snr_compute #(.W(W)) u_snr (
      .clk, .rst_n, .en(en3[b]), .frame_last(last3), .sig(band_q[b]), .noise(noise3),
      .snr, .snr_valid(snr_v)
    );
    oversub_factor #(.DELTA_Q8(delta_q8(b))) u_of (
      .clk, .rst_n, .snr, .snr_valid(snr_v), .factor(factor[b]), .snr_db(db_unused),
      .alpha(alpha[b])
    );
    spectral_subtractor #(.W(W)) u_sub (
      .clk, .rst_n, .in_valid(en3[b]), .y(band_q[b]), .n(noise3), .factor(factor[b]),
      .out_valid(sv_unused), .s(sub_s[b]), .floored(floored[b])
    );
  end

  pipe_delay #(.W(NB + AW), .D(SUB_LAT)) u_d6 (
    .clk, .rst_n, .d({en3, idx3}), .q({en6, idx6})
  );

  band_adder #(.W(W), .NB(NB)) u_add (
    .clk, .rst_n, .band_en(en6), .band_s(sub_s), .out_valid, .out_s(out_data)
  );
  pipe_delay #(.W(AW), .D(1)) u_d7 (.clk, .rst_n, .d(idx6), .q(out_index));
endmodule
