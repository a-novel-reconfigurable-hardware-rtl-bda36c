// tb_spram_wf -- self-checking test of the write-first single-port RAM.
// Random reads and writes against a reference array: rdata must show the
// stored word at once, q the written word in a write clock (write-first)
// and the stored word otherwise, one clock later.
module tb_spram_wf;
  localparam int W = 16, DEPTH = 256;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic we;
  logic [7:0] addr;
  logic [W-1:0] wdata, rdata, q;
  spram_wf #(.W(W), .DEPTH(DEPTH)) dut (.*);
  logic [W-1:0] ref_mem [DEPTH];
  logic [W-1:0] exp_q;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  initial begin
    we = 1; addr = 0; wdata = 0;
    for (int a = 0; a < DEPTH; a++) begin
      addr <= 8'(a); wdata <= 16'(a * 37 + 5); ref_mem[a] = 16'(a * 37 + 5);
      @(posedge clk);
    end
    for (int i = 0; i < 3000; i++) begin
      automatic logic w = 1'($urandom_range(0, 1));
      automatic logic [7:0] a = 8'($urandom_range(0, 255));
      automatic logic [W-1:0] d = 16'($urandom);
      we <= w; addr <= a; wdata <= d;
      #1;
      check(rdata == ref_mem[a], "asynchronous read");
      exp_q = w ? d : ref_mem[a];
      if (w) ref_mem[a] = d;
      @(posedge clk);
      #1;
      check(q == exp_q, $sformatf("q write-first (we=%0d)", w));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
