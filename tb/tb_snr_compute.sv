// tb_snr_compute -- self-checking test of one band's SNR block.
// Ten frames of 256 bins; the band is enabled on a random subset of bins.
// Reference: running maxima of signal and noise over the enabled bins of the
// frame, ratio floor(256*max(S)/max(N)) saturated to 16 bits, 0 when
// max(S) <= 0 and 0xFFFF when max(N) <= 0 (frames 7 and 8 force these).
// The result must appear exactly once per frame, QW + 2 = 26 clocks after
// the frame's last bin (1 clock in the two special cases).
module tb_snr_compute;
  localparam int W = 16, N = 256, LAT = 26;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic en, frame_last, snr_valid;
  logic signed [W-1:0] sig, noise;
  logic [15:0] snr;
  snr_compute #(.W(W)) dut (.*);

  int exp_snr, exp_lat, t_last, n_valid;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) if (snr_valid) begin
    n_valid++;
    check(snr == 16'(exp_snr), $sformatf("snr got %0d want %0d", snr, exp_snr));
    check(cyc - t_last == exp_lat + 1, $sformatf("snr latency %0d", cyc - t_last - 1));
  end

  initial begin
    en = 0; frame_last = 0; sig = 0; noise = 0; n_valid = 0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int f = 0; f < 10; f++) begin
      automatic int smax = -32768, nmax = -32768;
      automatic int scale = (f < 3) ? 30000 : (f < 6) ? 3000 : 300;
      for (int k = 0; k < N; k++) begin
        automatic logic e = ($urandom_range(0, 3) == 0) || k == N - 1;
        automatic int s = int'($urandom_range(0, scale));
        automatic int n = int'($urandom_range(1, (f < 3) ? 300 : 30000));
        if (f == 7) s = -s - 1;          // signal max <= 0
        if (f == 8) n = -n;              // noise max <= 0
        en <= e; sig <= W'(s); noise <= W'(n); frame_last <= (k == N - 1);
        if (e) begin if (s > smax) smax = s; if (n > nmax) nmax = n; end
        if (k == N - 1) t_last = cyc;
        @(posedge clk);
      end
      en <= 0; frame_last <= 0;
      exp_lat = 1;
      if (smax <= 0) exp_snr = 0;
      else if (nmax <= 0) exp_snr = 65535;
      else begin
        exp_lat = LAT;
        exp_snr = (smax * 256) / nmax;
        if (exp_snr > 65535) exp_snr = 65535;
      end
      repeat (40) @(posedge clk);
      check(n_valid == f + 1, $sformatf("one result per frame (%0d)", n_valid));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10 * 300 + 100) @(posedge clk);
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
