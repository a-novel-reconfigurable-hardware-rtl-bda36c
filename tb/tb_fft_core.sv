// tb_fft_core -- self-checking test of the forward 256-point FFT.
// Feeds three frames (random real, random complex, a single cosine),
// compares every bin with a DFT computed here in floating point and scaled
// by 1/N, and checks the frame timing: in_ready low during CALC, edone one
// clock before the first output, first output (N/2)*log2(N) + 2 clocks
// after the last input sample, outputs on N consecutive clocks in order.
module tb_fft_core;
  localparam int N = 256, LG = 8, W = 16, TOL = 6;
  localparam real PI = 3.14159265358979;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid, in_ready, in_empty, edone, holding, out_valid, out_last, frame_ready;
  logic [LG-1:0] out_index;
  logic signed [W-1:0] in_re, in_im, out_re, out_im;

  fft_core #(.N(N), .INVERSE(1'b0), .W(W)) dut (
    .clk, .rst_n, .in_valid, .in_ready, .in_empty, .in_re, .in_im,
    .out_frame_ready(frame_ready), .edone, .holding, .out_valid, .out_last, .out_index,
    .out_re, .out_im);

  int xr [N], xi [N];
  real er [N], ei [N];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  task automatic run_frame(input int kind);
    int t_last, t_first, t_edone, cyc;
    for (int n = 0; n < N; n++) begin
      case (kind)
        0: begin xr[n] = int'($urandom_range(0, 32000)) - 16000; xi[n] = 0; end
        1: begin xr[n] = int'($urandom_range(0, 16000)) - 8000; xi[n] = int'($urandom_range(0, 16000)) - 8000; end
        default: begin xr[n] = $rtoi(20000.0 * $cos(2.0 * PI * 13 * n / N)); xi[n] = 0; end
      endcase
    end
    for (int k = 0; k < N; k++) begin
      er[k] = 0.0; ei[k] = 0.0;
      for (int n = 0; n < N; n++) begin
        er[k] += xr[n] * $cos(2.0*PI*k*n/N) + xi[n] * $sin(2.0*PI*k*n/N);
        ei[k] += xi[n] * $cos(2.0*PI*k*n/N) - xr[n] * $sin(2.0*PI*k*n/N);
      end
      er[k] /= N; ei[k] /= N;
    end
    cyc = 0;
    for (int n = 0; n < N; n++) begin
      check(in_ready, "in_ready during load");
      in_valid <= 1; in_re <= W'(xr[n]); in_im <= W'(xi[n]);
      @(posedge clk); cyc++;
    end
    in_valid <= 0;
    t_last = cyc; t_edone = -1;
    // computing: in_ready must stay low
    while (!out_valid) begin
      @(posedge clk); cyc++;
      if (edone) t_edone = cyc;
      if (!out_valid) check(!in_ready, "in_ready low while computing");
    end
    t_first = cyc;
    check(t_first - t_last == (N/2)*LG + 2, $sformatf("FFT first output after %0d clocks", t_first - t_last));
    check(t_edone == t_first - 1, "edone one clock before first output");
    for (int k = 0; k < N; k++) begin
      check(out_valid && out_index == LG'(k), $sformatf("output order bin %0d", k));
      check((out_re - er[k]) < TOL && (er[k] - out_re) < TOL && (out_im - ei[k]) < TOL && (ei[k] - out_im) < TOL,
            $sformatf("kind %0d bin %0d: got %0d,%0d want %f,%f", kind, k, out_re, out_im, er[k], ei[k]));
      check(out_last == (k == N-1), "out_last");
      @(posedge clk);
    end
    check(!out_valid && in_ready && in_empty, "back to LOAD after unload");
  endtask

  initial begin
    in_valid = 0; in_re = 0; in_im = 0; frame_ready = 1;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    run_frame(0);
    run_frame(1);
    run_frame(2);
    // hold: frame must wait while out_frame_ready is low
    frame_ready <= 0;
    for (int n = 0; n < N; n++) begin in_valid <= 1; in_re <= 16'(n); in_im <= 0; @(posedge clk); end
    in_valid <= 0;
    repeat ((N/2)*LG + 50) @(posedge clk);
    check(holding && !out_valid, "frame held while consumer not ready");
    frame_ready <= 1;
    @(posedge clk); @(posedge clk);
    check(out_valid && out_index == 0, "frame released");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
