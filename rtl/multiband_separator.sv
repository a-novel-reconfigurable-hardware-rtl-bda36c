// multiband_separator -- the multi band separation block.
//
// Four registers share the spectrum input d; register b loads d when its
// controller enable band_en[b] is high, so register b carries the samples of
// band b and then holds. As in the paper, a register is cleared while the
// next band's enable is high (Register1 reset by Controller2, and so on), so
// a register that has finished its band does not leak old samples into its
// subtraction block. Because bins are visited as bands 1,2,3,4,4,3,2,1 over
// a frame (folded frequency, see band_controller), this design generalises
// the rule to "cleared while any other band is enabled", which also clears
// Register4; the paper's Register4 has no reset.
// Latency 1 clock. band_valid is the registered enable of each band.
module multiband_separator import mbmpss_pkg::*; #(
  parameter int unsigned W  = DW,
  parameter int unsigned NB = NBANDS
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [NB-1:0]        band_en,
  input  logic signed [W-1:0]  d,
  output logic signed [W-1:0]  band_q [NB],
  output logic [NB-1:0]        band_valid
);
  for (genvar b = 0; b < int'(NB); b++) begin : g_reg
    logic rst_b;
    assign rst_b = |(band_en & ~(NB'(1) << b));
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)          band_q[b] <= '0;
      else if (rst_b)      band_q[b] <= '0;
      else if (band_en[b]) band_q[b] <= d;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) band_valid <= '0;
    else        band_valid <= band_en;
  end
endmodule
