// oversub_factor -- over-subtraction factor alpha_i * delta_i of one band.
//
// alpha follows the band SNR in dB (Berouti / Kamath rule, eq. 11 of the
// paper): 5 below -5 dB, 4 - (3/20)*SNR between -5 and 20 dB, 1 above 20 dB.
// The paper prints the limits of the three cases as "<5", "-5..5" and ">20";
// this design uses -5 and 20 dB, the limits of the rule the paper cites, and
// keeps the paper's 5 for the lowest case. delta_i (eq. 12) is a constant
// per band, set by the parameter DELTA_Q8 (1.0, 2.5 or 1.5 in Q.8).
// SNR in dB = 20*log10(ratio), ratio = max(S)/max(N) in Q8.8. log2 is the
// leading-one position plus the following 8 bits taken as a linear mantissa
// (error < 0.09 in log2, 0.52 dB), times 6.0206 (20*log10(2)).
// The factor register (Q4.8) is updated one clock after snr_valid and holds
// until the next update; reset value is alpha = 1, i.e. delta.
module oversub_factor import mbmpss_pkg::*; #(
  parameter int unsigned DELTA_Q8 = 256
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [15:0]      snr,        // Q8.8
  input  logic             snr_valid,
  output logic [FACW-1:0]  factor,     // Q4.8
  output logic signed [15:0] snr_db,   // Q8.8 dB, last computed
  output logic [FACW-1:0]  alpha       // Q4.8
);
  logic [3:0]          lead;
  logic [7:0]          mant;
  logic signed [15:0]  log2_q8;
  logic signed [31:0]  db_full;
  logic signed [15:0]  db_q8;
  logic signed [31:0]  a_full;
  logic [FACW-1:0]     alpha_c;
  logic [FACW+9:0]     fac_full;
  logic [23:0]         mshift;

  always_comb begin
    a_full = '0;
    lead = '0;
    for (int i = 0; i < 16; i++) if (snr[i]) lead = 4'(i);
    mshift  = {8'd0, snr} << (5'd23 - 5'(lead));   // leading one to bit 23
    mant    = mshift[22:15];
    log2_q8 = $signed({4'd0, lead, mant}) - 16'sd2048;  // (lead - 8) . mant
    db_full = 32'(log2_q8) * 32'sd1541;                  // * 6.0206 * 256
    db_q8   = 16'(db_full >>> 8);
    if (snr == '0 || db_q8 < -16'sd1280)  alpha_c = FACW'(1280);   // 5.0
    else if (db_q8 > 16'sd5120)           alpha_c = FACW'(256);    // 1.0
    else begin
      a_full  = 32'sd1024 - ((32'(db_q8) * 32'sd154) >>> 10);     // 4 - 0.15*dB
      alpha_c = FACW'(a_full);
    end
    fac_full = (FACW+10)'(alpha_c) * (FACW+10)'(DELTA_Q8);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      factor <= FACW'(DELTA_Q8);
      alpha  <= FACW'(256);
      snr_db <= '0;
    end else if (snr_valid) begin
      factor <= FACW'(fac_full >> FAC_FRAC);
      alpha  <= alpha_c;
      snr_db <= db_q8;
    end
  end
endmodule
