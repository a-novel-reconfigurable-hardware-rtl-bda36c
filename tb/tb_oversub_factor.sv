// tb_oversub_factor -- self-checking test of alpha(SNR) * delta.
// Sweeps the SNR ratio word over its range. Reference computed here in
// floating point: dB = 20*log10(ratio/256); alpha = 5 below -5 dB,
// 4 - 0.15*dB up to 20 dB, 1 above; factor = alpha * delta (delta = 2.5).
// Tolerance 0.1 on alpha (log2 is approximated with a linear mantissa, at
// most 0.52 dB); ratios within 0.6 dB of the -5 dB step are skipped.
// Also checks that the register only changes on snr_valid.
module tb_oversub_factor;
  localparam int FACW = 12;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [15:0] snr;
  logic snr_valid;
  logic [FACW-1:0] factor, alpha;
  logic signed [15:0] snr_db;
  oversub_factor #(.DELTA_Q8(640)) dut (.*);
  int n_one = 0, n_five = 0, n_mid = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  initial begin
    snr = 0; snr_valid = 0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk); #1;
    check(factor == 12'd640 && alpha == 12'd256, "reset value alpha = 1");
    for (int r = 0; r < 65536; r += 37) begin
      automatic real db = (r == 0) ? -200.0 : 20.0 * $log10(r / 256.0);
      automatic real a  = (db < -5.0) ? 5.0 : (db > 20.0) ? 1.0 : 4.0 - 0.15 * db;
      automatic logic [FACW-1:0] old_f;
      @(negedge clk);
      snr = 16'(r); snr_valid = 1;
      @(negedge clk);
      snr_valid = 0;
      if (db < -5.6 || db > -4.4) begin
        check(alpha / 256.0 - a < 0.1 && a - alpha / 256.0 < 0.1,
              $sformatf("ratio %0d (%f dB): alpha %f want %f", r, db, alpha / 256.0, a));
        check(factor / 256.0 - 2.5 * a < 0.26 && 2.5 * a - factor / 256.0 < 0.26, "factor = alpha * delta");
      end
      if (alpha == 12'd256) n_one++; else if (alpha == 12'd1280) n_five++; else n_mid++;
      old_f = factor;
      snr = 16'(r ^ 16'h5a5a);
      @(negedge clk);
      check(factor == old_f, "holds without snr_valid");
    end
    check(n_one > 0 && n_five > 0 && n_mid > 0, "all three alpha regions visited");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
