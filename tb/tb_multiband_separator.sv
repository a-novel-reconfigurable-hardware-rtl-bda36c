// tb_multiband_separator -- self-checking test of the band registers.
// Drives the band sequence of a real frame (1,2,3,4,4,3,2,1 by folded
// frequency) and then random one-hot / idle enables with random data.
// Reference: register b loads d when its enable is high, is cleared while
// any other band is enabled and otherwise holds; band_valid is the enable
// one clock later.
module tb_multiband_separator;
  localparam int W = 16, NB = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [NB-1:0] band_en, band_valid;
  logic signed [W-1:0] d;
  logic signed [W-1:0] band_q [NB];
  multiband_separator #(.W(W), .NB(NB)) dut (.*);
  int rq [NB];
  logic [NB-1:0] ren;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  initial begin
    band_en = 0; d = 0;
    for (int b = 0; b < NB; b++) rq[b] = 0;
    ren = 0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int i = 0; i < 3000; i++) begin
      automatic logic [NB-1:0] e;
      automatic int dv = int'($urandom_range(0, 65535)) - 32768;
      if (i < 256) begin
        automatic int f = (i <= 128) ? i : 256 - i;
        e = 4'(1 << ((f < 32) ? 0 : (f < 64) ? 1 : (f < 96) ? 2 : 3));
      end else begin
        automatic int r = int'($urandom_range(0, 5));
        e = (r < 4) ? 4'(1 << r) : 4'b0;
      end
      @(negedge clk);
      band_en = e; d = W'(dv);
      for (int b = 0; b < NB; b++) begin
        if ((e & ~(4'(1) << b)) != 0) rq[b] = 0;
        else if (e[b]) rq[b] = dv;
      end
      ren = e;
      @(posedge clk); #1;
      for (int b = 0; b < NB; b++) check(band_q[b] == W'(rq[b]), $sformatf("step %0d band %0d", i, b));
      check(band_valid == ren, "band_valid");
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
