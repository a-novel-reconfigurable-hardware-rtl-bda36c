// cordic_arctan -- magnitude and phase separation of the spectrum.
//
// Turns each FFT bin (X = real, Y = imaginary) into its magnitude and its
// phase in radians, as the paper's CORDIC ARCTAN block does (parallel
// architecture, maximum pipelining, radian phase, 16-bit outputs, outputs
// magnitude, phase and ready). The inside is a standard vectoring-mode
// CORDIC, this design's own since the paper uses a vendor core:
//   stage 0      : quadrant fold, so the vector lies in the right half plane
//                  (x < 0 is turned by -+pi/2 and the angle preset to +-pi/2)
//   stages 1..IT : x += y>>i / y -= x>>i driving y to 0, z accumulates atan(2^-i)
//   last stage   : magnitude = x * 1/K (K = CORDIC gain), saturated to 16 bit
// Latency is IT + 2 clocks (13 with the default IT = 11, the value Table 3 of
// the paper gives for this block); one bin is accepted every clock.
// Phase: Q3.13 radians in [-pi, pi]; magnitude: same scale as the inputs.
// A TAGW-bit tag (the bin index) travels with the data; out_valid (the
// paper's "ready" pin) follows in_valid by the latency.
module cordic_arctan import mbmpss_pkg::*; #(
  parameter int unsigned W    = DW,
  parameter int unsigned IT   = 11,
  parameter int unsigned TAGW = 8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic [TAGW-1:0]      in_tag,
  input  logic signed [W-1:0]  in_x,
  input  logic signed [W-1:0]  in_y,
  output logic                 out_valid,
  output logic [TAGW-1:0]      out_tag,
  output logic signed [W-1:0]  out_mag,
  output logic signed [W-1:0]  out_phase
);
  localparam int unsigned XW = W + 2;          // guard bits for CORDIC gain
  localparam int unsigned ZW = W + 1;          // phase accumulator
  localparam real PI = 3.14159265358979;

  typedef logic signed [ZW-1:0] z_t;
  typedef z_t atan_t [IT];
  function automatic atan_t gen_atan();
    atan_t r;
    for (int i = 0; i < int'(IT); i++)
      r[i] = z_t'($rtoi($atan(2.0 ** (-i)) * (2.0 ** PH_FRAC) + 0.5));
    return r;
  endfunction
  localparam atan_t ATAN_T = gen_atan();
  localparam z_t HALF_PI = z_t'($rtoi(PI / 2.0 * (2.0 ** PH_FRAC) + 0.5));
  // 1/K for IT iterations, Q0.16
  function automatic int gen_invk();
    real k = 1.0;
    for (int i = 0; i < int'(IT); i++) k = k * $sqrt(1.0 + 2.0 ** (-2 * i));
    return $rtoi(65536.0 / k + 0.5);
  endfunction
  localparam logic [16:0] INV_K = 17'(gen_invk());

  logic signed [XW-1:0] xs [IT+1];
  logic signed [XW-1:0] ys [IT+1];
  z_t                   zs [IT+1];
  logic                 vs [IT+2];
  logic [TAGW-1:0]      ts [IT+2];

  // stage 0: quadrant fold
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      xs[0] <= '0; ys[0] <= '0; zs[0] <= '0;
    end else if (in_x < 0) begin
      if (in_y >= 0) begin
        xs[0] <= XW'(in_y);  ys[0] <= -XW'(in_x); zs[0] <= HALF_PI;
      end else begin
        xs[0] <= -XW'(in_y); ys[0] <= XW'(in_x);  zs[0] <= -HALF_PI;
      end
    end else begin
      xs[0] <= XW'(in_x); ys[0] <= XW'(in_y); zs[0] <= '0;
    end
  end

  for (genvar i = 0; i < int'(IT); i++) begin : g_it
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        xs[i+1] <= '0; ys[i+1] <= '0; zs[i+1] <= '0;
      end else if (ys[i] >= 0) begin
        xs[i+1] <= xs[i] + (ys[i] >>> i);
        ys[i+1] <= ys[i] - (xs[i] >>> i);
        zs[i+1] <= zs[i] + ATAN_T[i];
      end else begin
        xs[i+1] <= xs[i] - (ys[i] >>> i);
        ys[i+1] <= ys[i] + (xs[i] >>> i);
        zs[i+1] <= zs[i] - ATAN_T[i];
      end
    end
  end

  // valid / tag shift register
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(IT) + 2; i++) begin vs[i] <= 1'b0; ts[i] <= '0; end
    end else begin
      vs[0] <= in_valid; ts[0] <= in_tag;
      for (int i = 1; i < int'(IT) + 2; i++) begin vs[i] <= vs[i-1]; ts[i] <= ts[i-1]; end
    end
  end

  // gain compensation stage
  logic signed [XW+17:0] mag_full;
  logic signed [XW+1:0]  mag_sc;
  assign mag_full = xs[IT] * $signed({1'b0, INV_K});
  assign mag_sc   = (XW+2)'((mag_full + (XW+18)'(1 << 15)) >>> 16);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_mag <= '0; out_phase <= '0;
    end else begin
      out_mag   <= sat_dw((DW+16)'(mag_sc));
      out_phase <= sat_dw((DW+16)'(zs[IT]));
    end
  end
  assign out_valid = vs[IT+1];
  assign out_tag   = ts[IT+1];
endmodule
