// tb_recon_mult -- self-checking test of the reconstruction multipliers.
// Random magnitude and a random angle whose cos/sin (Q1.14) are computed
// here; re/im must equal mag*cos and mag*sin within 1 LSB, one clock later,
// with the tag passed along.
module tb_recon_mult;
  localparam int W = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic in_valid, out_valid;
  logic [7:0] in_tag, out_tag;
  logic signed [W-1:0] mag, cos_v, sin_v, re, im;
  recon_mult #(.W(W), .TAGW(8)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  initial begin
    in_valid = 0; in_tag = 0; mag = 0; cos_v = 0; sin_v = 0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int i = 0; i < 2000; i++) begin
      automatic real a = ($urandom_range(0, 62831) / 10000.0);
      automatic int c = $rtoi($cos(a) * 16384.0), s = $rtoi($sin(a) * 16384.0);
      automatic int m = int'($urandom_range(0, 32767));
      automatic real er = m * c / 16384.0, ei = m * s / 16384.0;
      @(negedge clk);
      in_valid = 1; in_tag = 8'(i); mag = W'(m); cos_v = W'(c); sin_v = W'(s);
      @(posedge clk); #1;
      check(out_valid && out_tag == 8'(i), "valid / tag");
      check(re - er <= 1.0 && er - re <= 1.0 && im - ei <= 1.0 && ei - im <= 1.0,
            $sformatf("got %0d,%0d want %f,%f", re, im, er, ei));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
