// snr_compute -- SNR computation block of one band.
//
// Following the paper's figure, two compare-and-hold loops track the
// largest signal sample and the largest noise-estimate sample of the band:
// an a>b comparator of the new sample against the held maximum drives a
// multiplexer whose output the band's controller enable loads into the
// "Max Value" register. A division block then forms SNR = max(S) / max(N).
// Timing (this design's choice, the paper gives none): the maxima are taken
// over one whole frame. On frame_last the final maxima (including the last
// sample) are handed to a restoring divider and the registers restart, so
// the ratio of frame t is ready SNR_LAT = QW + 2 clocks after frame_last and
// is used for frame t+1 (when a maximum is <= 0, see below, the result
// follows one clock after frame_last).
// Output: snr as unsigned Q8.8 (saturating at 255.996), snr_valid a pulse.
// A maximum that is <= 0 (possible on the signed phase path) gives 0 for
// the signal and "no noise", i.e. full scale SNR, for the noise.
module snr_compute import mbmpss_pkg::*; #(
  parameter int unsigned W = DW
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 en,          // band controller enable
  input  logic                 frame_last,
  input  logic signed [W-1:0]  sig,
  input  logic signed [W-1:0]  noise,
  output logic [15:0]          snr,         // Q8.8
  output logic                 snr_valid
);
  localparam int unsigned QW = W + SNR_FRAC;           // quotient / dividend width
  localparam logic signed [W-1:0] MINV = {1'b1, {(W-1){1'b0}}};

  logic signed [W-1:0] smax, nmax, smax_n, nmax_n;

  // compare + mux (a > b selects the new sample)
  always_comb begin
    smax_n = (en && (sig   > smax)) ? sig   : smax;
    nmax_n = (en && (noise > nmax)) ? noise : nmax;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      smax <= MINV; nmax <= MINV;
    end else if (frame_last) begin
      smax <= MINV; nmax <= MINV;
    end else begin
      smax <= smax_n; nmax <= nmax_n;
    end
  end

  // ---------------- division X / Y (restoring, one bit per clock) -------
  logic                busy;
  logic [$clog2(QW+1)-1:0] bit_cnt;
  logic [QW-1:0]       quo;        // dividend shifts out, quotient shifts in
  logic [W:0]          rem;
  logic [W-1:0]        dvs;
  logic [W:0]          rem_sh;

  assign rem_sh = {rem[W-1:0], quo[QW-1]};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; bit_cnt <= '0; quo <= '0; rem <= '0; dvs <= '0;
      snr <= '0; snr_valid <= 1'b0;
    end else begin
      snr_valid <= 1'b0;
      if (frame_last) begin
        if (smax_n <= 0) begin
          snr <= '0; snr_valid <= 1'b1;
        end else if (nmax_n <= 0) begin
          snr <= '1; snr_valid <= 1'b1;
        end else begin
          busy    <= 1'b1;
          bit_cnt <= '0;
          quo     <= QW'(smax_n) << SNR_FRAC;
          rem     <= '0;
          dvs     <= W'(nmax_n);
        end
      end else if (busy) begin
        if (rem_sh >= {1'b0, dvs}) begin
          rem <= rem_sh - {1'b0, dvs};
          quo <= {quo[QW-2:0], 1'b1};
        end else begin
          rem <= rem_sh;
          quo <= {quo[QW-2:0], 1'b0};
        end
        bit_cnt <= bit_cnt + 1'b1;
        if (bit_cnt == ($clog2(QW+1))'(QW-1)) busy <= 1'b0;
      end else if (bit_cnt == ($clog2(QW+1))'(QW)) begin
        snr       <= (|quo[QW-1:16]) ? 16'hFFFF : quo[15:0];
        snr_valid <= 1'b1;
        bit_cnt   <= '0;
      end
    end
  end
endmodule
