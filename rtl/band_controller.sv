// band_controller -- the four band controllers of the multi-band blocks.
//
// Splits the spectrum into NB (4) linearly spaced, non-overlapping bands and
// raises the enable of the band the current bin belongs to (one-hot while
// in_valid). The paper gives the controllers' role only. Here each
// controller is a relational comparison of the bin frequency with the band
// edges. Bins k and N-k carry the same frequency in the spectrum of a real
// signal, so the comparison uses the folded index f = min(k, N-k), 0..N/2;
// band b holds f in [b*N/(2*NB), (b+1)*N/(2*NB)), the last band also the
// Nyquist bin (bands of 32, 32, 32 and 33 frequencies for N = 256).
// frame_last marks the last bin of a frame. Purely combinational.
module band_controller import mbmpss_pkg::*; #(
  parameter int unsigned N  = NFFT,
  parameter int unsigned NB = NBANDS
) (
  input  logic                  in_valid,
  input  logic [$clog2(N)-1:0]  in_index,
  output logic [NB-1:0]         band_en,
  output logic                  frame_last
);
  localparam int unsigned AW = $clog2(N);
  localparam int unsigned BW = N / (2 * NB);     // frequencies per band

  logic [AW:0] f;
  always_comb begin
    f = (in_index <= AW'(N/2)) ? {1'b0, in_index} : (AW+1)'(N) - {1'b0, in_index};
    band_en = '0;
    for (int b = 0; b < int'(NB); b++) begin
      if (in_valid && f >= (AW+1)'(b * BW) && (b == int'(NB) - 1 || f < (AW+1)'((b + 1) * BW)))
        band_en[b] = 1'b1;
    end
  end
  assign frame_last = in_valid && (in_index == AW'(N-1));
endmodule
