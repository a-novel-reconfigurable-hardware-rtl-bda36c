// pipe_delay -- D-cycle shift register of a W-bit word, used to keep side
// signals (valid, bin index, band enables, magnitude) aligned with the
// pipelined arithmetic next to them. D = 0 is a plain wire. Stages reset to 0
// so that valid bits start cleared. Alignment delays are this design's own;
// the paper's "Delay" block in the noise estimator is one such stage.
module pipe_delay #(
  parameter int unsigned W = 1,
  parameter int unsigned D = 1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [W-1:0] d,
  output logic [W-1:0] q
);
  if (D == 0) begin : g_wire
    assign q = d;
  end else begin : g_pipe
    logic [W-1:0] sr [D];
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        for (int i = 0; i < int'(D); i++) sr[i] <= '0;
      end else begin
        sr[0] <= d;
        for (int i = 1; i < int'(D); i++) sr[i] <= sr[i-1];
      end
    end
    assign q = sr[D-1];
  end
endmodule
