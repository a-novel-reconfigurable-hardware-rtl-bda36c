// tb_spectral_subtractor -- self-checking test of the subtraction block.
// Random Y, N (signed) and factor, one per clock. Reference:
// d = sat16(Y - ((N*factor) >> 8)), S = (d < N) ? N : d, 3 clocks later.
// Counts both outcomes of the floor comparison.
module tb_spectral_subtractor;
  localparam int W = 16, FACW = 12, LAT = 3;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;  // a real falling edge, so the asynchronous reset acts at once
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic in_valid, out_valid, floored;
  logic signed [W-1:0] y, n, s;
  logic [FACW-1:0] factor;
  spectral_subtractor #(.W(W)) dut (.*);
  int exp_s [$];
  bit exp_f [$];
  int n_floor = 0, n_pass = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) if (out_valid) begin
    if (exp_s.size() == 0) check(0, "unexpected output");
    else begin
      automatic int e = exp_s.pop_front();
      automatic bit ef = exp_f.pop_front();
      check(s == W'(e), $sformatf("S got %0d want %0d", s, e));
      check(floored == ef, "floored flag");
      if (ef) n_floor++; else n_pass++;
    end
  end

  initial begin
    in_valid = 0; y = 0; n = 0; factor = 0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int i = 0; i < 3000; i++) begin
      automatic int yy = (i % 2) ? int'($urandom_range(0, 32767)) : int'($urandom_range(0, 65535)) - 32768;
      automatic int nn = (i % 3) ? int'($urandom_range(0, 4000)) : int'($urandom_range(0, 65535)) - 32768;
      automatic int ff = int'($urandom_range(256, 3200));
      automatic int d = yy - ((nn * ff) >>> 8);
      if (d > 32767) d = 32767;
      if (d < -32768) d = -32768;
      @(negedge clk);
      in_valid = 1; y = W'(yy); n = W'(nn); factor = FACW'(ff);
      exp_s.push_back((d < nn) ? nn : d);
      exp_f.push_back(d < nn);
    end
    @(negedge clk) in_valid = 0;
    repeat (LAT + 3) @(posedge clk);
    check(exp_s.size() == 0, "all outputs after 3 clocks");
    check(n_floor > 100 && n_pass > 100, "both floor outcomes seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (4000) @(posedge clk);
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
