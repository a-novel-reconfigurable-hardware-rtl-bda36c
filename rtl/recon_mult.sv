// recon_mult -- the two reconstruction multipliers.
//
// Combine the enhanced magnitude with cos and sin of the enhanced phase into
// the real and imaginary parts of the enhanced spectrum for the IFFT:
// re = |S| * cos(phi), im = |S| * sin(phi). cos/sin are Q1.14; results are
// rounded and saturated to 16 bit. Latency 1 clock; valid and a TAGW-bit tag
// (the bin index) pass alongside. Two multipliers as in the paper.
module recon_mult import mbmpss_pkg::*; #(
  parameter int unsigned W    = DW,
  parameter int unsigned TAGW = 8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic [TAGW-1:0]      in_tag,
  input  logic signed [W-1:0]  mag,
  input  logic signed [W-1:0]  cos_v,
  input  logic signed [W-1:0]  sin_v,
  output logic                 out_valid,
  output logic [TAGW-1:0]      out_tag,
  output logic signed [W-1:0]  re,
  output logic signed [W-1:0]  im
);
  logic signed [2*W-1:0] pr, pi;
  assign pr = mag * cos_v + (2*W)'(1 << (TRIG_FRAC - 1));
  assign pi = mag * sin_v + (2*W)'(1 << (TRIG_FRAC - 1));
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_tag <= '0; re <= '0; im <= '0;
    end else begin
      out_valid <= in_valid;
      out_tag   <= in_tag;
      re        <= sat_dw((DW+16)'(pr >>> TRIG_FRAC));
      im        <= sat_dw((DW+16)'(pi >>> TRIG_FRAC));
    end
  end
endmodule
