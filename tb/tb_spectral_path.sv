// tb_spectral_path -- self-checking test of one noise estimation and
// subtraction path (magnitude path, FS = 16 kHz, delta = 2.5/2.5/2.5/1.5).
// Twelve frames of 256 bins: frames 0..4 are a fixed noise spectrum with
// +-20% jitter (learnt by the estimator), frames 5..11 scale each band by a
// per-frame gain between 0.1 and 30, so every alpha region is reached.
// A frame-level reference computed here gives, per bin,
//   N[k]   : sum of round(0.2*Y[k]) over the frames learnt so far
//   S[k]   : max(sat16(Y[k] - ((N[k]*f_b) >> 8)), N[k])
// with f_b the band factor the DUT holds during the frame. f_b itself is
// checked against alpha(SNR) * delta_b computed in floating point from the
// previous frame's band maxima (tolerance 0.1*delta, the -5 dB step
// skipped). Also checked: latency 7 clocks, bin order, learning flag.
module tb_spectral_path;
  localparam int N = 256, W = 16, NB = 4, LAT = 7, NF = 12, FACW = 12;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;  // a real falling edge, so the asynchronous reset acts at once
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic edone, in_valid, out_valid, learning;
  logic [7:0] in_index, out_index;
  logic signed [W-1:0] in_data, out_data;
  logic [FACW-1:0] factor [NB];
  logic [FACW-1:0] alpha [NB];
  logic [NB-1:0] floored;
  spectral_path #(.W(W), .N(N), .NB(NB), .FS_HZ(16000), .NOISE_FRAMES(5)) dut (.*);

  int y0 [N];
  int acc [N];
  int yv [N];
  int exp_s [$];
  int exp_i [$];
  real delta [NB] = '{2.5, 2.5, 2.5, 1.5};
  int n_a1 = 0, n_a5 = 0, n_amid = 0, n_floor = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask
  function automatic int g02(input int v);
    return (v * 13107 + 32768) >>> 16;
  endfunction
  function automatic int band_of(input int k);
    automatic int f = (k <= N/2) ? k : N - k;
    return (f < 32) ? 0 : (f < 64) ? 1 : (f < 96) ? 2 : 3;
  endfunction

  int cyc = 0, t0 = -1, lat = -1;
  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) begin
    if (out_valid) begin
      if (lat < 0) lat = cyc - t0;
      if (exp_s.size() == 0) check(0, "unexpected output");
      else begin
        automatic int e = exp_s.pop_front(), i = exp_i.pop_front();
        check(out_data == W'(e) && out_index == 8'(i),
              $sformatf("bin %0d got %0d want %0d", i, out_data, e));
      end
    end
    if (|floored) n_floor++;
  end

  initial begin
    int smax [NB], nmax [NB];
    real gain [NB];
    edone = 0; in_valid = 0; in_index = 0; in_data = 0;
    for (int k = 0; k < N; k++) y0[k] = int'($urandom_range(200, 1000));
    repeat (3) @(posedge clk);
    rst_n <= 1;
    repeat (2) @(posedge clk);
    for (int f = 0; f < NF; f++) begin
      edone <= 1; @(posedge clk); edone <= 0;
      repeat (4) @(posedge clk);
      check(learning == (f < 5), "learning flag");
      // factor check: from previous frame's maxima
      if (f > 0) begin
        for (int b = 0; b < NB; b++) begin
          automatic int r = (smax[b] <= 0) ? 0 : (nmax[b] <= 0) ? 65535 : (smax[b] * 256) / nmax[b];
          automatic real db, a;
          if (r > 65535) r = 65535;
          db = (r == 0) ? -200.0 : 20.0 * $log10(r / 256.0);
          a  = (db < -5.0) ? 5.0 : (db > 20.0) ? 1.0 : 4.0 - 0.15 * db;
          if (db < -5.6 || db > -4.4)
            check(factor[b] / 256.0 - a * delta[b] < 0.1 * delta[b] + 0.01 &&
                  a * delta[b] - factor[b] / 256.0 < 0.1 * delta[b] + 0.01,
                  $sformatf("frame %0d band %0d factor %f want %f", f, b, factor[b] / 256.0, a * delta[b]));
          if (alpha[b] == 12'd256) n_a1++; else if (alpha[b] == 12'd1280) n_a5++; else n_amid++;
        end
      end
      for (int b = 0; b < NB; b++) begin
        smax[b] = -32768; nmax[b] = -32768;
        gain[b] = (f < 5) ? 1.0 : (b == (f % 4)) ? 30.0 : (b == ((f + 1) % 4)) ? 0.1 : 1.0 + 0.5 * b;
      end
      for (int k = 0; k < N; k++) begin
        automatic int b = band_of(k);
        automatic real jit = 0.8 + 0.4 * ($urandom_range(0, 1000) / 1000.0);
        automatic int y = $rtoi(y0[k] * jit * gain[b]);
        automatic int d, s;
        if (y > 32767) y = 32767;
        if (f < 5) acc[k] = (f == 0) ? g02(y) : acc[k] + g02(y);
        d = y - ((acc[k] * int'(factor[b])) >>> 8);
        if (d < -32768) d = -32768;
        s = (d < acc[k]) ? acc[k] : d;
        exp_s.push_back(s); exp_i.push_back(k);
        if (y > smax[b]) smax[b] = y;
        if (acc[k] > nmax[b]) nmax[b] = acc[k];
        in_valid <= 1; in_index <= 8'(k); in_data <= W'(y);
        if (t0 < 0) t0 = cyc;
        @(posedge clk);
      end
      in_valid <= 0;
      repeat (60) @(posedge clk);
    end
    check(exp_s.size() == 0, "all bins came out");
    check(lat == LAT + 1, $sformatf("path latency %0d", lat - 1));
    check(n_a1 > 0 && n_a5 > 0 && n_amid > 0, $sformatf("alpha regions 1/5/mid: %0d %0d %0d", n_a1, n_a5, n_amid));
    check(n_floor > 0, "noise floor applied");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (NF * 330 + 200) @(posedge clk);
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
