// tb_cordic_sincos -- self-checking test of the phase-to-cos/sin CORDIC.
// Random phases over the whole Q3.13 word (about +-4 rad) plus 0, +-pi/2,
// +-pi; cos and sin (Q1.14) are compared with $cos/$sin computed here, the
// tag must follow its data and the latency must be 11 clocks.
module tb_cordic_sincos;
  localparam int W = 16, LAT = 11, NV = 2000;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;  // a real falling edge, so the asynchronous reset acts at once
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid, out_valid;
  logic [15:0] in_tag, out_tag;
  logic signed [W-1:0] in_phase, out_cos, out_sin;
  cordic_sincos #(.W(W), .IT(10), .TAGW(16)) dut (.*);

  int ph [NV];
  int sent_cycle [NV];
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  initial begin
    for (int i = 0; i < NV; i++) ph[i] = int'($urandom_range(0, 65535)) - 32768;
    ph[0] = 0; ph[1] = 12868; ph[2] = -12868; ph[3] = 25736; ph[4] = -25736; ph[5] = 32767; ph[6] = -32768;
    in_valid = 0; in_phase = 0; in_tag = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int i = 0; i < NV; i++) begin
      in_valid <= 1; in_phase <= W'(ph[i]); in_tag <= 16'(i);
      sent_cycle[i] = cyc;
      @(posedge clk);
    end
    in_valid <= 0;
    repeat (LAT + 5) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int got = 0;
  always @(posedge clk) begin
    if (out_valid) begin
      automatic int i = int'(out_tag);
      automatic real a = ph[i] / 8192.0;
      automatic real c = $cos(a) * 16384.0, s = $sin(a) * 16384.0;
      check(i == got, "tag order");
      // driven after edge c, registered output sampled at edge c + LAT + 1
      check(cyc - sent_cycle[i] == LAT + 1, $sformatf("latency %0d", cyc - sent_cycle[i] - 1));
      check(out_cos - c < 40.0 && c - out_cos < 40.0 && out_sin - s < 40.0 && s - out_sin < 40.0,
            $sformatf("phase %0d: got %0d,%0d want %f,%f", ph[i], out_cos, out_sin, c, s));
      got++;
    end
  end

  initial begin
    repeat (NV + 200) @(posedge clk);
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
