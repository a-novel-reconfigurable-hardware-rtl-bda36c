// tb_mbmpss_top -- end-to-end test of the whole enhancer at its default
// parameters (256-point frames, 4 bands, 5 noise frames, FS = 16 kHz).
// Input: 13 frames of 256 samples, streamed whenever in_ready is high.
//   frames 0..4  : white noise, uniform +-1500 (learnt as the noise)
//   frames 5..10 : a cosine of amplitude 8000 on bin 20 (1.25 kHz) + noise
//   frames 11,12 : quiet noise, uniform +-200 (drives alpha to 5)
// Checked:
//   * 13 output frames of 256 samples, in order, out_last on sample 255
//   * the delay from the last input sample of a frame to its first output
//     sample: FFT compute (1024) + hand-over (1) + 256 bins + 32 clocks of
//     spectral pipeline + IFFT compute (1024) + hand-over (1) = 2338 clocks
//     for the first frame; later frames wait 33 more clocks in the FFT
//     until the IFFT has sent out the previous frame (2371)
//   * the tone survives: for frames 7..10 the output's component at bin 20
//     has an amplitude of 0.5..1.1 times the input tone
//   * mechanisms, each counted and required at least once: input stall
//     (in_ready low), FFT holding a frame for the IFFT, noise learning
//     frames (exactly 5) and the switch to read-only, the subtraction floor,
//     alpha = 1, alpha = 5 and alpha in between on the magnitude path.
module tb_mbmpss_top;
  import mbmpss_pkg::*;
  localparam int N = 256, NFR = 13, NB = 4;
  localparam int FRAME_LAT0 = 2338, FRAME_LAT = 2371;
  localparam real PI = 3.14159265358979;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid, in_ready, out_valid, out_last, learning, fft_waiting;
  logic [7:0] out_index;
  sample_t in_sample, out_sample, out_imag;
  logic [FACW-1:0] mag_factor [NB];
  logic [FACW-1:0] ph_factor [NB];
  logic [NB-1:0] mag_floored;

  mbmpss_top dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  int x [NFR][N];
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // mechanism counters
  int n_stall = 0, n_hold = 0, n_learn_frames = 0, n_floor = 0, n_a1 = 0, n_a5 = 0, n_amid = 0;
  logic learning_q = 0;
  int n_switch = 0;
  int t_last_in [NFR];

  // ---------------- stimulus
  initial begin
    for (int f = 0; f < NFR; f++)
      for (int n = 0; n < N; n++) begin
        automatic int amp = (f >= 11) ? 200 : 1500;
        automatic int v = int'($urandom_range(0, 2 * amp)) - amp;
        if (f >= 5 && f <= 10) v += $rtoi(8000.0 * $cos(2.0 * PI * 20 * n / N));
        x[f][n] = v;
      end
    in_valid = 0; in_sample = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int f = 0; f < NFR; f++) begin
      for (int n = 0; n < N; n++) begin
        in_valid <= 1; in_sample <= sample_t'(x[f][n]);
        @(posedge clk);
        while (!in_ready) begin n_stall++; @(posedge clk); end
        if (n == N - 1) t_last_in[f] = cyc;
      end
    end
    in_valid <= 0;
  end

  // ---------------- monitors
  always @(posedge clk) if (rst_n) begin
    if (fft_waiting) n_hold++;
    learning_q <= learning;
    if (!learning && learning_q) n_switch++;
    if (|mag_floored) n_floor++;
  end
  // count learning frames on the FFT's frame start
  always @(posedge clk) if (rst_n && dut.fft_edone) begin
    @(posedge clk);
    if (learning) n_learn_frames++;
  end
  // alpha of the magnitude path, sampled once per output frame
  always @(posedge clk) if (out_valid && out_index == 0) begin
    for (int b = 0; b < NB; b++) begin
      if (dut.m_alpha[b] == 12'd256) n_a1++;
      else if (dut.m_alpha[b] == 12'd1280) n_a5++;
      else n_amid++;
    end
  end

  int of = 0, on = 0;
  real cs, sn;
  initial begin
    wait (rst_n);
    while (of < NFR) begin
      @(posedge clk);
      if (out_valid) begin
        if (on == 0) begin
          check(cyc - t_last_in[of] == ((of == 0) ? FRAME_LAT0 : FRAME_LAT) + 1,
                $sformatf("frame %0d delay %0d", of, cyc - t_last_in[of] - 1));
          cs = 0.0; sn = 0.0;
        end
        check(out_index == 8'(on), "output order");
        check(out_last == (on == N - 1), "out_last");
        cs += out_sample * $cos(2.0 * PI * 20 * on / N);
        sn += out_sample * $sin(2.0 * PI * 20 * on / N);
        on++;
        if (on == N) begin
          automatic real a = 2.0 / N * $sqrt(cs * cs + sn * sn);
          $display("frame %0d: output amplitude at bin 20 = %0.1f", of, a);
          if (of >= 7 && of <= 10) check(a > 4000.0 && a < 8800.0, $sformatf("tone frame %0d amplitude %f", of, a));
          on = 0; of++;
        end
      end
    end
    repeat (10) @(posedge clk);
    $display("mechanisms: stall=%0d hold=%0d learn_frames=%0d switch=%0d floor=%0d alpha1=%0d alpha5=%0d alpha_mid=%0d",
             n_stall, n_hold, n_learn_frames, n_switch, n_floor, n_a1, n_a5, n_amid);
    check(n_stall > 0, "input stall happened");
    check(n_hold > 0, "FFT held a frame for the IFFT");
    check(n_learn_frames == 5, $sformatf("5 noise learning frames (%0d)", n_learn_frames));
    check(n_switch == 1, "switch to read-only noise RAM");
    check(n_floor > 0, "subtraction floor applied");
    check(n_a1 > 0 && n_a5 > 0 && n_amid > 0, "alpha = 1, 5 and in between");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NFR * 2700 + 5000) @(posedge clk);
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
