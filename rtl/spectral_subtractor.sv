// spectral_subtractor -- subtraction block of one band (paper eq. 16).
//
// S = Y - (alpha*delta) * N, then a floor: an a<b comparator of the result
// (a) against the noise estimate (b) selects the noise estimate whenever the
// difference has fallen below it, i.e. S = max(Y - f*N, N). The multiplier,
// subtractor, a<b comparator and multiplexer follow the paper's figure;
// which multiplexer input the comparator selects is not printed and is this
// design's choice. Works on signed words, so the same block serves the
// magnitude and the phase path.
// Three pipeline stages (multiply, subtract with saturation, compare/mux):
// latency 3, one bin per clock. factor is Q4.8.
module spectral_subtractor import mbmpss_pkg::*; #(
  parameter int unsigned W = DW
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic signed [W-1:0]  y,
  input  logic signed [W-1:0]  n,
  input  logic [FACW-1:0]      factor,
  output logic                 out_valid,
  output logic signed [W-1:0]  s,
  output logic                 floored     // the floor was applied
);
  logic signed [W+FACW:0]  prod;
  logic signed [W+4:0]     p1;
  logic signed [W-1:0]     y1, n1, n2, d2;
  logic                    v1, v2;
  logic signed [W+5:0]     diff;

  assign prod = n * $signed({1'b0, factor});
  assign diff = (W+6)'(y1) - (W+6)'(p1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      p1 <= '0; y1 <= '0; n1 <= '0; v1 <= 1'b0;
      d2 <= '0; n2 <= '0; v2 <= 1'b0;
      s <= '0; out_valid <= 1'b0; floored <= 1'b0;
    end else begin
      // multiplier
      p1 <= (W+5)'(prod >>> FAC_FRAC);
      y1 <= y; n1 <= n; v1 <= in_valid;
      // subtractor
      d2 <= sat_dw((DW+16)'(diff));
      n2 <= n1; v2 <= v1;
      // a < b, multiplexer
      floored   <= v2 && (d2 < n2);
      s         <= (d2 < n2) ? n2 : d2;
      out_valid <= v2;
    end
  end
endmodule
