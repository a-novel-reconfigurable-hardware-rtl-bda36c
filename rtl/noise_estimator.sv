// noise_estimator -- per-bin noise spectrum estimate (magnitude or phase).
//
// Over the first NOISE_FRAMES (5) frames, assumed to hold noise only, each
// bin k accumulates GAIN * Y[k] with GAIN = 0.2, so after five frames the RAM
// holds the average noise spectrum N[k]; from then on the RAM is only read
// and N[k] comes out next to every new Y[k]. This is the structure of the
// paper's figure: bin index -> convert -> delay -> RAM address, input ->
// x0.2 -> adder (other input: RAM output) -> RAM data, RAM controller -> we.
// During learning frames the output is the partial sum just written
// (write-first RAM output).
// Pipeline: stage 1 registers index (the "Delay"), 0.2*Y and Y; stage 2 is
// the RAM read-add-write and the registered RAM output. Latency 2 clocks,
// one bin per clock; out_signal is Y delayed to match out_noise.
// Values are signed 16-bit (magnitude or Q3.13 phase). 0.2 is 13107/65536.
module noise_estimator import mbmpss_pkg::*; #(
  parameter int unsigned W            = DW,
  parameter int unsigned N            = NFFT,
  parameter int unsigned NOISE_FRAMES = NOISE_FRAMES_DEF,
  parameter int unsigned GAIN_Q16     = 13107
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    edone,        // frame start, from the FFT
  input  logic                    in_valid,
  input  logic [$clog2(N)-1:0]    in_index,     // xK_index
  input  logic signed [W-1:0]     in_data,
  output logic                    out_valid,
  output logic [$clog2(N)-1:0]    out_index,
  output logic signed [W-1:0]     out_signal,
  output logic signed [W-1:0]     out_noise,
  output logic                    learning      // RAM write enable level
);
  localparam int unsigned AW = $clog2(N);

  logic                   ctl_we, ctl_first;
  logic                   v1;
  logic [AW-1:0]          a1;          // delayed address
  logic signed [W-1:0]    y1, y2;
  logic signed [W-1:0]    g1;          // 0.2 * Y
  logic signed [W+16:0]   prod;
  logic [W-1:0]           rdata, q;
  logic signed [W:0]      sum;
  logic signed [W-1:0]    wdata;
  logic                   v2;
  logic [AW-1:0]          a2;

  ram_controller #(.NOISE_FRAMES(NOISE_FRAMES)) u_ctl (
    .clk, .rst_n, .edone, .we(ctl_we), .first(ctl_first)
  );

  assign prod = in_data * $signed({1'b0, 16'(GAIN_Q16)});

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; a1 <= '0; y1 <= '0; g1 <= '0;
      v2 <= 1'b0; a2 <= '0; y2 <= '0;
    end else begin
      v1 <= in_valid;
      a1 <= AW'(in_index);                         // convert + delay
      y1 <= in_data;
      g1 <= W'((prod + (W+17)'(1 << 15)) >>> 16);
      v2 <= v1; a2 <= a1; y2 <= y1;
    end
  end

  // adder: 0.2*Y + stored sum (first frame: RAM content ignored)
  assign sum   = (W+1)'(g1) + (ctl_first ? '0 : (W+1)'($signed(rdata)));
  assign wdata = sat_dw((DW+16)'(sum));

  spram_wf #(.W(W), .DEPTH(N)) u_ram (
    .clk, .we(v1 && ctl_we), .addr(a1), .wdata(wdata), .rdata(rdata), .q(q)
  );

  assign out_valid  = v2;
  assign out_index  = a2;
  assign out_signal = y2;
  assign out_noise  = $signed(q);
  assign learning   = ctl_we;
endmodule
