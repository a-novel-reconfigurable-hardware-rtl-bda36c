// band_adder -- multi band adder: joins the enhanced bands into one spectrum.
//
// Each band's subtraction output is gated by that band's controller enable
// (delayed to line up with it), which the paper describes as passing the
// bands through the same controllers and registers again so they keep the
// time format of the original spectrum; the gated bands are then added.
// Exactly one band is enabled per bin, so the sum is that band's value.
// Latency 1 clock, saturating.
module band_adder import mbmpss_pkg::*; #(
  parameter int unsigned W  = DW,
  parameter int unsigned NB = NBANDS
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [NB-1:0]        band_en,
  input  logic signed [W-1:0]  band_s [NB],
  output logic                 out_valid,
  output logic signed [W-1:0]  out_s
);
  logic signed [W+3:0] acc;
  always_comb begin
    acc = '0;
    for (int b = 0; b < int'(NB); b++)
      if (band_en[b]) acc = acc + (W+4)'(band_s[b]);
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_s <= '0;
    end else begin
      out_valid <= |band_en;
      out_s     <= sat_dw((DW+16)'(acc));
    end
  end
endmodule
