// tb_cordic_arctan -- self-checking test of the magnitude/phase CORDIC.
// Random (x, y) pairs, one per clock, plus the axes and corners; each output
// is compared with sqrt(x^2+y^2) (0.2% + 4 LSB) and atan2(y, x) (Q3.13,
// 24 LSB = 0.003 rad: 11 iterations leave up to atan(2^-10) plus rounding)
// computed here, the
// tag must come back with its data and the latency must be 13 clocks.
module tb_cordic_arctan;
  localparam int W = 16, LAT = 13, NV = 2000;
  localparam real PI = 3.14159265358979;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid, out_valid;
  logic [15:0] in_tag, out_tag;
  logic signed [W-1:0] in_x, in_y, out_mag, out_phase;
  cordic_arctan #(.W(W), .IT(11), .TAGW(16)) dut (.*);

  int xs [NV], ys [NV];
  int sent_cycle [NV];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    for (int i = 0; i < NV; i++) begin
      if (i < 8) begin
        xs[i] = (i == 0) ? 20000 : (i == 1) ? -20000 : (i == 2) ? 0 : (i == 3) ? 0 :
                (i == 4) ? 23000 : (i == 5) ? -23000 : (i == 6) ? -23000 : 23000;
        ys[i] = (i == 0) ? 0 : (i == 1) ? 100 : (i == 2) ? 20000 : (i == 3) ? -20000 :
                (i == 4) ? 23000 : (i == 5) ? 23000 : (i == 6) ? -23000 : -23000;
      end else begin
        xs[i] = int'($urandom_range(0, 46000)) - 23000;
        ys[i] = int'($urandom_range(0, 46000)) - 23000;
      end
    end
    in_valid = 0; in_x = 0; in_y = 0; in_tag = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int i = 0; i < NV; i++) begin
      in_valid <= 1; in_x <= W'(xs[i]); in_y <= W'(ys[i]); in_tag <= 16'(i);
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
      automatic real m = $sqrt(real'(xs[i]) * xs[i] + real'(ys[i]) * ys[i]);
      automatic real p = $atan2(real'(ys[i]), real'(xs[i])) * 8192.0;
      automatic real dp = out_phase - p;
      if (i == 1) dp = (out_phase < 0) ? out_phase + 2.0 * PI * 8192.0 - p : dp; // +-pi ambiguity
      check(i == got, "tag order");
      // driven after edge c, registered output sampled at edge c + LAT + 1
      check(cyc - sent_cycle[i] == LAT + 1, $sformatf("latency %0d", cyc - sent_cycle[i] - 1));
      check(out_mag - m < 4.0 + m * 0.002 && m - out_mag < 4.0 + m * 0.002,
            $sformatf("mag %0d: got %0d want %f", i, out_mag, m));
      check(dp < 24.0 && dp > -24.0, $sformatf("phase %0d: got %0d want %f", i, out_phase, p));
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
