// maj_vote3: bitwise two-out-of-three majority voter.
//
// The scrubber is built as three identical cores; every output that leaves
// them (TCK, TMS, TDI, UART TX, reset request) passes through one of these
// voters, and the memory scrubbers use it to form the word written back to
// the three BRAM copies. Purely combinational. `mismatch` flags that the
// three copies do not all agree, which the memory scrubbers use to decide
// whether a write-back is needed. Voting the outputs follows the paper; the
// mismatch output is this design's addition.
module maj_vote3 #(
  parameter int unsigned W = 1
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  input  logic [W-1:0] c,
  output logic [W-1:0] y,
  output logic         mismatch
);
  always_comb begin
    y        = (a & b) | (a & c) | (b & c);
    mismatch = (a != b) || (a != c);
  end
endmodule
