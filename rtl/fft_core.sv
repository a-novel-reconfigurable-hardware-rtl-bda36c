// fft_core -- N-point radix-2 frame FFT / IFFT (N = 256 by default).
//
// One module serves both ends of the enhancer: INVERSE = 0 is the forward FFT
// that turns the noisy speech frame into its spectrum, INVERSE = 1 the IFFT
// that rebuilds the enhanced frame. The paper uses a vendor FFT core with a
// 256-sample non-overlapping window; only its interface is given (real and
// imaginary inputs, imaginary input tied to 0, real/imag/edone outputs), so
// the inside here is the simplest core that computes the same transform: an
// in-place iterative decimation-in-time FFT with one butterfly per clock.
//
// Operation, one frame at a time:
//   LOAD   : in_ready = 1; N samples accepted (in_valid) in natural order and
//            stored at bit-reversed addresses.
//   CALC   : log2(N) stages of N/2 butterflies, one per clock. Twiddles are a
//            cos/sin table computed at elaboration (W = exp(-+j*2*pi*k/N)).
//   WAIT   : until out_frame_ready (the consumer can take a whole frame).
//            edone pulses in the cycle the core leaves WAIT; holding is
//            high throughout WAIT.
//   UNLOAD : N outputs on consecutive clocks, natural order, with out_index
//            (the bin or sample number) and out_last on the final one.
// Forward scaling: every stage halves, rounding half to even (X[k] = DFT/N), so real input of
// magnitude <= full scale keeps every spectrum value in range. Inverse: no
// scaling, saturating adders; with forward 1/N the pair is an identity.
// Frame period: N + (N/2)*log2(N) + 1 + N clocks = 1537 for N = 256, unlike
// the 278-cycle pipelined vendor core of the paper (a departure).
// The paper keeps the frame in two block-RAM stages; this core keeps one
// frame in a register array (two read and two write ports per butterfly).
module fft_core import mbmpss_pkg::*; #(
  parameter int unsigned N       = NFFT,
  parameter bit          INVERSE = 1'b0,
  parameter int unsigned W       = DW
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // input frame
  input  logic                         in_valid,
  output logic                         in_ready,
  output logic                         in_empty,   // LOAD with nothing stored yet
  input  logic signed [W-1:0]          in_re,
  input  logic signed [W-1:0]          in_im,
  // output frame
  input  logic                         out_frame_ready,
  output logic                         edone,
  output logic                         holding,    // computed frame waiting
  output logic                         out_valid,
  output logic                         out_last,
  output logic [$clog2(N)-1:0]         out_index,
  output logic signed [W-1:0]          out_re,
  output logic signed [W-1:0]          out_im
);
  localparam int unsigned LG = $clog2(N);
  localparam int unsigned TF = W - 2;        // twiddle fraction bits (Q1.TF)

  typedef logic signed [W-1:0] word_t;
  typedef word_t tw_t [N/2];

  function automatic tw_t gen_cos();
    tw_t r;
    for (int i = 0; i < int'(N/2); i++)
      r[i] = word_t'($rtoi($cos(2.0 * 3.14159265358979 * i / N) * (2.0 ** TF) + 0.5));
    return r;
  endfunction
  function automatic tw_t gen_sin();
    tw_t r;
    real s;
    for (int i = 0; i < int'(N/2); i++) begin
      s = $sin(2.0 * 3.14159265358979 * i / N) * (2.0 ** TF);
      r[i] = word_t'((s >= 0.0) ? $rtoi(s + 0.5) : -$rtoi(-s + 0.5));
    end
    return r;
  endfunction
  localparam tw_t COS_T = gen_cos();
  localparam tw_t SIN_T = gen_sin();

  function automatic logic [LG-1:0] bitrev(input logic [LG-1:0] a);
    for (int i = 0; i < int'(LG); i++) bitrev[i] = a[LG-1-i];
  endfunction

  typedef enum logic [1:0] {S_LOAD, S_CALC, S_WAIT, S_UNLOAD} state_t;
  state_t state;

  word_t mre [N];
  word_t mim [N];

  logic [LG-1:0]          cnt;     // load / unload counter
  logic [$clog2(LG)-1:0]  stage;
  logic [LG-2:0]          bfly;    // butterfly within stage

  // ---------------- butterfly datapath (combinational) -------------------
  logic [LG-1:0] i0, i1, half_mask;
  logic [LG-2:0] tw_idx;
  word_t wre, wim;
  logic signed [2*W:0] pre, pim;
  logic signed [W:0]   tre, tim;
  logic signed [W+1:0] sa_re, sa_im, sb_re, sb_im;
  word_t na_re, na_im, nb_re, nb_im;

  function automatic word_t sat_w(input logic signed [W+1:0] v);
    if (v > $signed({3'b000, {(W-1){1'b1}}}))        return word_t'({1'b0, {(W-1){1'b1}}});
    else if (v < $signed({3'b111, {(W-1){1'b0}}}))   return word_t'({1'b1, {(W-1){1'b0}}});
    else return v[W-1:0];
  endfunction

  // v/2 rounded half to even: unbiased, so no DC error builds up over stages
  function automatic logic signed [W+1:0] half_even(input logic signed [W+1:0] v);
    logic signed [W+1:0] r;
    r = v + $signed({{(W+1){1'b0}}, v[1] & v[0]});
    return r >>> 1;
  endfunction

  always_comb begin
    half_mask = LG'((1 << stage) - 1);
    i0 = LG'(((LG'(bfly) & ~half_mask) << 1) | (LG'(bfly) & half_mask));
    i1 = i0 | LG'(1 << stage);
    tw_idx = (LG-1)'((LG'(bfly) & half_mask) << (($clog2(LG))'(LG - 1) - stage));
    wre = COS_T[tw_idx];
    wim = INVERSE ? SIN_T[tw_idx] : -SIN_T[tw_idx];
    // t = b * w, rounded back to Q0 scale
    pre = (2*W+1)'(mre[i1] * wre) - (2*W+1)'(mim[i1] * wim) + (2*W+1)'(1 << (TF-1));
    pim = (2*W+1)'(mre[i1] * wim) + (2*W+1)'(mim[i1] * wre) + (2*W+1)'(1 << (TF-1));
    tre = (W+1)'(pre >>> TF);
    tim = (W+1)'(pim >>> TF);
    sa_re = (W+2)'(mre[i0]) + (W+2)'(tre);
    sa_im = (W+2)'(mim[i0]) + (W+2)'(tim);
    sb_re = (W+2)'(mre[i0]) - (W+2)'(tre);
    sb_im = (W+2)'(mim[i0]) - (W+2)'(tim);
    if (!INVERSE) begin
      na_re = sat_w(half_even(sa_re)); na_im = sat_w(half_even(sa_im));
      nb_re = sat_w(half_even(sb_re)); nb_im = sat_w(half_even(sb_im));
    end else begin
      na_re = sat_w(sa_re); na_im = sat_w(sa_im);
      nb_re = sat_w(sb_re); nb_im = sat_w(sb_im);
    end
  end

  // ---------------- control ---------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_LOAD;
      cnt   <= '0;
      stage <= '0;
      bfly  <= '0;
    end else begin
      unique case (state)
        S_LOAD: if (in_valid) begin
          cnt <= cnt + 1'b1;
          if (cnt == LG'(N-1)) begin
            state <= S_CALC;
            stage <= '0;
            bfly  <= '0;
          end
        end
        S_CALC: begin
          bfly <= bfly + 1'b1;
          if (bfly == (LG-1)'(N/2-1)) begin
            stage <= stage + 1'b1;
            if (stage == ($clog2(LG))'(LG-1)) state <= S_WAIT;
          end
        end
        S_WAIT: if (out_frame_ready) begin
          state <= S_UNLOAD;
          cnt   <= '0;
        end
        S_UNLOAD: begin
          cnt <= cnt + 1'b1;
          if (cnt == LG'(N-1)) state <= S_LOAD;
        end
        default: state <= S_LOAD;
      endcase
    end
  end

  // ---------------- frame memory ----------------------------------------
  always_ff @(posedge clk) begin
    if (state == S_LOAD && in_valid) begin
      mre[bitrev(cnt)] <= in_re;
      mim[bitrev(cnt)] <= in_im;
    end else if (state == S_CALC) begin
      mre[i0] <= na_re; mim[i0] <= na_im;
      mre[i1] <= nb_re; mim[i1] <= nb_im;
    end
  end

  assign in_ready  = (state == S_LOAD);
  assign in_empty  = (state == S_LOAD) && (cnt == '0);
  assign edone     = (state == S_WAIT) && out_frame_ready;
  assign holding   = (state == S_WAIT);
  assign out_valid = (state == S_UNLOAD);
  assign out_last  = (state == S_UNLOAD) && (cnt == LG'(N-1));
  assign out_index = cnt;
  assign out_re    = mre[cnt];
  assign out_im    = mim[cnt];
endmodule
