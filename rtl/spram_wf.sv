// spram_wf -- single-port RAM in write-before-read (write-first) mode.
//
// Holds the per-bin noise estimate of one spectrum path (DEPTH = 256 bins).
// One address port serves both the read and the write of a clock:
//   rdata : the word at addr, read without a clock (distributed / LUT RAM),
//           which lets the accumulating adder in front of it read, add and
//           write back the same bin in one clock
//   q     : registered output; in a write clock it takes the word being
//           written (write-first), otherwise the stored word
// The paper names a single-port RAM in write-before-read mode; the
// asynchronous read port is this design's choice. Contents are not reset.
module spram_wf #(
  parameter int unsigned W     = 16,
  parameter int unsigned DEPTH = 256
) (
  input  logic                       clk,
  input  logic                       we,
  input  logic [$clog2(DEPTH)-1:0]   addr,
  input  logic [W-1:0]               wdata,
  output logic [W-1:0]               rdata,
  output logic [W-1:0]               q
);
  logic [W-1:0] mem [DEPTH];

  assign rdata = mem[addr];

  always_ff @(posedge clk) begin
    if (we) begin
      mem[addr] <= wdata;
      q         <= wdata;
    end else begin
      q         <= mem[addr];
    end
  end
endmodule
