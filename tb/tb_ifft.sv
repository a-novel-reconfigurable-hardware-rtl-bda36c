// tb_ifft -- self-checking test of the inverse FFT (fft_core, INVERSE = 1).
// 1) a random spectrum is transformed and compared with an inverse DFT
//    computed here (no scaling);
// 2) round trip: a random real frame goes through a forward core and then the
//    inverse core and must come back within 48 LSB (the forward core keeps
//    16 bits per bin, so each bin carries about 1 LSB of rounding error and
//    the 256-term inverse sum adds these up to about 11 LSB rms, 40 peak).
// Also checks the frame timing of the inverse core.
module tb_ifft;
  localparam int N = 256, LG = 8, W = 16;
  localparam real PI = 3.14159265358979;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic iv, ir, ie, ied, ih, ov, ol;
  logic [LG-1:0] oi;
  logic signed [W-1:0] ire, iim, ore, oim;

  fft_core #(.N(N), .INVERSE(1'b1), .W(W)) dut (
    .clk, .rst_n, .in_valid(iv), .in_ready(ir), .in_empty(ie), .in_re(ire), .in_im(iim),
    .out_frame_ready(1'b1), .edone(ied), .holding(ih), .out_valid(ov), .out_last(ol),
    .out_index(oi), .out_re(ore), .out_im(oim));

  // forward core for the round trip
  logic fv, fr, fe, fed, fh, fov, fol;
  logic [LG-1:0] foi;
  logic signed [W-1:0] fre, fim, fore, foim;
  fft_core #(.N(N), .INVERSE(1'b0), .W(W)) fwd (
    .clk, .rst_n, .in_valid(fv), .in_ready(fr), .in_empty(fe), .in_re(fre), .in_im(fim),
    .out_frame_ready(ie), .edone(fed), .holding(fh), .out_valid(fov), .out_last(fol),
    .out_index(foi), .out_re(fore), .out_im(foim));

  int Xr [N], Xi [N], x [N];
  real er [N], ei [N];
  bit  use_fwd;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  always_comb begin
    if (use_fwd) begin iv = fov; ire = fore; iim = foim; end
    else begin iv = 1'b0; ire = '0; iim = '0; end
  end

  initial begin
    int cyc, t_last;
    use_fwd = 0; fv = 0; fre = 0; fim = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    // ---- 1) direct inverse DFT check
    for (int k = 0; k < N; k++) begin
      Xr[k] = int'($urandom_range(0, 160)) - 80;
      Xi[k] = int'($urandom_range(0, 160)) - 80;
    end
    for (int n = 0; n < N; n++) begin
      er[n] = 0.0; ei[n] = 0.0;
      for (int k = 0; k < N; k++) begin
        er[n] += Xr[k] * $cos(2.0*PI*k*n/N) - Xi[k] * $sin(2.0*PI*k*n/N);
        ei[n] += Xi[k] * $cos(2.0*PI*k*n/N) + Xr[k] * $sin(2.0*PI*k*n/N);
      end
    end
    force dut.in_valid = 1'b1;
    for (int k = 0; k < N; k++) begin
      force dut.in_re = W'(Xr[k]); force dut.in_im = W'(Xi[k]);
      @(posedge clk);
    end
    release dut.in_valid; release dut.in_re; release dut.in_im;
    cyc = 0; t_last = 0;
    while (!ov) begin @(posedge clk); cyc++; end
    check(cyc == (N/2)*LG + 1, $sformatf("IFFT first output after %0d clocks", cyc));
    for (int n = 0; n < N; n++) begin
      check(ov && oi == LG'(n), "order");
      // error grows with unscaled stages: allow 1 LSB per stage on each part
      check((ore - er[n]) < 10 && (er[n] - ore) < 10 && (oim - ei[n]) < 10 && (ei[n] - oim) < 10,
            $sformatf("ifft sample %0d got %0d,%0d want %f,%f", n, ore, oim, er[n], ei[n]));
      @(posedge clk);
    end
    // ---- 2) round trip through forward + inverse
    use_fwd = 1;
    for (int n = 0; n < N; n++) begin
      x[n] = int'($urandom_range(0, 20000)) - 10000;
      fv <= 1; fre <= W'(x[n]); fim <= 0;
      @(posedge clk);
    end
    fv <= 0;
    while (!ov) @(posedge clk);
    for (int n = 0; n < N; n++) begin
      check(ore - x[n] <= 48 && x[n] - ore <= 48 && oim <= 48 && oim >= -48,
            $sformatf("round trip sample %0d got %0d,%0d want %0d", n, ore, oim, x[n]));
      @(posedge clk);
    end
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
