// tb_noise_estimator -- self-checking test of the per-bin noise estimate.
// Eight frames of 256 random bins (signed, as on the phase path), each frame
// preceded by an edone pulse. A reference computed here accumulates
// round(0.2*Y[k]) over frames 1..5 (first frame overwrites). During those
// frames out_noise must equal the partial sum, afterwards the final sum,
// unchanged by new data; out_signal is Y delayed, latency 2 clocks.
module tb_noise_estimator;
  localparam int N = 256, W = 16, LAT = 2;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;  // a real falling edge, so the asynchronous reset acts at once
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic edone, in_valid, out_valid, learning;
  logic [7:0] in_index, out_index;
  logic signed [W-1:0] in_data, out_signal, out_noise;
  noise_estimator #(.W(W), .N(N), .NOISE_FRAMES(5)) dut (.*);

  int acc [N];
  int y [N];
  int exp_q [$];
  int exp_y [$];
  int exp_i [$];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  function automatic int g02(input int v);   // round(v * 13107 / 65536)
    return (v * 13107 + 32768) >>> 16;
  endfunction

  int cyc = 0, lat_seen = -1, t_in0 = -1;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    edone = 0; in_valid = 0; in_index = 0; in_data = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    repeat (2) @(posedge clk);
    for (int f = 0; f < 8; f++) begin
      edone <= 1; @(posedge clk); edone <= 0;
      repeat (10) @(posedge clk);
      check(learning == (f < 5), $sformatf("learning in frame %0d", f));
      for (int k = 0; k < N; k++) begin
        y[k] = int'($urandom_range(0, 40000)) - 20000;
        if (f < 5) acc[k] = (f == 0) ? g02(y[k]) : acc[k] + g02(y[k]);
        exp_q.push_back(acc[k]); exp_y.push_back(y[k]); exp_i.push_back(k);
        in_valid <= 1; in_index <= 8'(k); in_data <= W'(y[k]);
        if (f == 0 && k == 0) t_in0 = cyc;
        @(posedge clk);
      end
      in_valid <= 0;
      repeat (5) @(posedge clk);
    end
    check(exp_q.size() == 0, "all outputs seen");
    check(lat_seen == LAT + 1, $sformatf("latency %0d", lat_seen - 1));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (out_valid) begin
      if (lat_seen < 0) lat_seen = cyc - t_in0;
      if (exp_q.size() == 0) check(0, "unexpected output");
      else begin
        automatic int q = exp_q.pop_front(), yy = exp_y.pop_front(), ii = exp_i.pop_front();
        check(out_noise == W'(q), $sformatf("noise bin %0d got %0d want %0d", ii, out_noise, q));
        check(out_signal == W'(yy) && out_index == 8'(ii), "signal / index alignment");
      end
    end
  end

  initial begin
    repeat (8 * 300 + 200) @(posedge clk);
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
