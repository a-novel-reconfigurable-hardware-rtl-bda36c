// tb_band_controller -- exhaustive test of the four band controllers.
// Every bin index 0..255 with valid high and low: the enable must be one-hot
// on the band of the folded frequency min(k, 256-k) split into 32/32/32/33,
// all-zero when not valid; frame_last only on bin 255.
module tb_band_controller;
  int checks = 0, failures = 0;
  logic in_valid, frame_last;
  logic [7:0] in_index;
  logic [3:0] band_en;
  band_controller #(.N(256), .NB(4)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  initial begin
    for (int v = 0; v < 2; v++) begin
      for (int k = 0; k < 256; k++) begin
        automatic int f = (k <= 128) ? k : 256 - k;
        automatic int b = (f < 32) ? 0 : (f < 64) ? 1 : (f < 96) ? 2 : 3;
        in_valid = 1'(v); in_index = 8'(k);
        #1;
        check(band_en == (v ? 4'(1 << b) : 4'b0), $sformatf("bin %0d en %b", k, band_en));
        check(frame_last == (v == 1 && k == 255), "frame_last");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
