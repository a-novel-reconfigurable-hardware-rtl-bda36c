// ram_controller -- write-enable control of the noise RAM.
//
// The paper builds it from one counter and one relational block: the counter
// counts frames (one edone pulse from the FFT per frame) and the comparison
// keeps the RAM write enable on only while the frame number is within the
// first NOISE_FRAMES (5) frames, which must contain noise only. After that
// the RAM is read only. `first` marks the first frame, in which the RAM is
// overwritten rather than accumulated (the RAM has no reset).
// Interface: edone pulse in; we / first are levels for the whole frame that
// follows the pulse. The counter saturates at NOISE_FRAMES + 1.
module ram_controller import mbmpss_pkg::*; #(
  parameter int unsigned NOISE_FRAMES = NOISE_FRAMES_DEF
) (
  input  logic clk,
  input  logic rst_n,
  input  logic edone,
  output logic we,
  output logic first
);
  localparam int unsigned CW = $clog2(NOISE_FRAMES + 2);
  logic [CW-1:0] frame_cnt;   // number of frames begun so far

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                                       frame_cnt <= '0;
    else if (edone && frame_cnt <= CW'(NOISE_FRAMES)) frame_cnt <= frame_cnt + 1'b1;
  end

  // relational block
  assign we    = (frame_cnt != '0) && (frame_cnt <= CW'(NOISE_FRAMES));
  assign first = (frame_cnt == CW'(1));
endmodule
