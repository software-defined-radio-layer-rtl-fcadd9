// sample_delay: fixed delay line for the received sample stream.
//
// The matched-filter synchronisation can only tell where a pulse began
// after the whole pulse has been seen. The correlators therefore work on
// a copy of the sample stream delayed by DEPTH samples, so that the
// start-of-chip mark from the synchroniser arrives in time for the first
// sample of the pulse. The line shifts only on cycles where en is high;
// dout is din of DEPTH enabled cycles earlier. Reset clears it to zero.
// This delay line is this design's own choice.
module sample_delay #(
  parameter int W     = 64,
  parameter int DEPTH = 8
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         en,
  input  logic [W-1:0] din,
  output logic [W-1:0] dout
);

  logic [W-1:0] sr [DEPTH];

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < DEPTH; i++) sr[i] <= '0;
    end else if (en) begin
      sr[0] <= din;
      for (int i = 1; i < DEPTH; i++) sr[i] <= sr[i-1];
    end
  end

  assign dout = sr[DEPTH-1];

endmodule
