// tb_ram_controller -- self-checking test of the noise RAM write control.
// Pulses edone ten times with gaps; before the first pulse we is low, after
// pulses 1..5 we is high (first only after pulse 1), from pulse 6 on low.
module tb_ram_controller;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic edone, we, first;
  ram_controller #(.NOISE_FRAMES(5)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    edone = 0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    repeat (3) @(posedge clk);
    #1 check(!we && !first, "idle before first frame");
    for (int p = 1; p <= 10; p++) begin
      @(negedge clk) edone = 1;
      @(negedge clk) edone = 0;
      for (int g = 0; g < 5; g++) begin
        @(negedge clk);
        check(we == (p <= 5), $sformatf("we after pulse %0d", p));
        check(first == (p == 1), $sformatf("first after pulse %0d", p));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
