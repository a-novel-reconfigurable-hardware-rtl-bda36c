// cordic_sincos -- phase to cosine/sine for signal reconstruction.
//
// Takes the enhanced phase (radians, Q3.13, any value the 16-bit word holds,
// i.e. about +-4 rad) and returns cos and sin in Q1.14, as the paper's CORDIC
// SINCOS block does (parallel architecture, maximum pipelining, radian
// input, 16-bit outputs, ports Ph_in, X_r, Y_i). The inside is a standard
// rotation-mode CORDIC, this design's own:
//   stage 0      : angles beyond +-pi/2 are moved by -+pi and the start
//                  vector is negated, which keeps the iterations convergent;
//                  the start vector is (1/K, 0) so no output scaling is needed
//   stages 1..IT : rotate by -+atan(2^-i) until the residual angle is 0
// Latency IT + 1 clocks (11 with the default IT = 10, the value Table 3 of
// the paper gives for this block); one phase per clock. A TAGW-bit tag and
// valid travel with the data.
module cordic_sincos import mbmpss_pkg::*; #(
  parameter int unsigned W    = DW,
  parameter int unsigned IT   = 10,
  parameter int unsigned TAGW = 8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic [TAGW-1:0]      in_tag,
  input  logic signed [W-1:0]  in_phase,
  output logic                 out_valid,
  output logic [TAGW-1:0]      out_tag,
  output logic signed [W-1:0]  out_cos,
  output logic signed [W-1:0]  out_sin
);
  localparam int unsigned XW = W + 2;
  localparam int unsigned ZW = W + 2;
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
  localparam z_t PI_Q    = z_t'($rtoi(PI * (2.0 ** PH_FRAC) + 0.5));
  function automatic int gen_x0();
    real k = 1.0;
    for (int i = 0; i < int'(IT); i++) k = k * $sqrt(1.0 + 2.0 ** (-2 * i));
    return $rtoi((2.0 ** TRIG_FRAC) / k + 0.5);
  endfunction
  localparam logic signed [XW-1:0] X0 = XW'(gen_x0());

  logic signed [XW-1:0] xs [IT+1];
  logic signed [XW-1:0] ys [IT+1];
  z_t                   zs [IT+1];
  logic                 vs [IT+1];
  logic [TAGW-1:0]      ts [IT+1];

  z_t zin;
  assign zin = ZW'(in_phase);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      xs[0] <= '0; ys[0] <= '0; zs[0] <= '0;
    end else if (zin > HALF_PI) begin
      xs[0] <= -X0; ys[0] <= '0; zs[0] <= zin - PI_Q;
    end else if (zin < -HALF_PI) begin
      xs[0] <= -X0; ys[0] <= '0; zs[0] <= zin + PI_Q;
    end else begin
      xs[0] <= X0;  ys[0] <= '0; zs[0] <= zin;
    end
  end

  for (genvar i = 0; i < int'(IT); i++) begin : g_it
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        xs[i+1] <= '0; ys[i+1] <= '0; zs[i+1] <= '0;
      end else if (zs[i] >= 0) begin
        xs[i+1] <= xs[i] - (ys[i] >>> i);
        ys[i+1] <= ys[i] + (xs[i] >>> i);
        zs[i+1] <= zs[i] - ATAN_T[i];
      end else begin
        xs[i+1] <= xs[i] + (ys[i] >>> i);
        ys[i+1] <= ys[i] - (xs[i] >>> i);
        zs[i+1] <= zs[i] + ATAN_T[i];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i <= int'(IT); i++) begin vs[i] <= 1'b0; ts[i] <= '0; end
    end else begin
      vs[0] <= in_valid; ts[0] <= in_tag;
      for (int i = 1; i <= int'(IT); i++) begin vs[i] <= vs[i-1]; ts[i] <= ts[i-1]; end
    end
  end

  assign out_cos   = sat_dw((DW+16)'(xs[IT]));
  assign out_sin   = sat_dw((DW+16)'(ys[IT]));
  assign out_valid = vs[IT];
  assign out_tag   = ts[IT];
endmodule
