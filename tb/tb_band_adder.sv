// tb_band_adder -- self-checking test of the multi band adder.
// Random band values with one-hot, idle and (for the saturation check)
// multi-hot enables. Reference: sum of the enabled bands, saturated to 16
// bits, one clock later; out_valid = any band enabled.
module tb_band_adder;
  localparam int W = 16, NB = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [NB-1:0] band_en;
  logic signed [W-1:0] band_s [NB];
  logic out_valid;
  logic signed [W-1:0] out_s;
  band_adder #(.W(W), .NB(NB)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  initial begin
    band_en = 0;
    for (int b = 0; b < NB; b++) band_s[b] = 0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int i = 0; i < 3000; i++) begin
      automatic int sum = 0;
      automatic logic [NB-1:0] e = (i % 5 == 4) ? 4'($urandom_range(0, 15)) :
                                   (i % 5 == 3) ? 4'b0 : 4'(1 << (i % 4));
      @(negedge clk);
      band_en = e;
      for (int b = 0; b < NB; b++) begin
        band_s[b] = W'(int'($urandom_range(0, 65535)) - 32768);
        if (e[b]) sum += band_s[b];
      end
      if (sum > 32767) sum = 32767;
      if (sum < -32768) sum = -32768;
      @(posedge clk); #1;
      check(out_s == W'(sum) && out_valid == (e != 0), $sformatf("sum got %0d want %0d", out_s, sum));
    end
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
