// maj_vote_n: bitwise majority vote of one word from N target devices.
//
// This is the heart of intermodular scrubbing: identical front-end FPGAs hold
// the same bitstream, so for each configuration bit the value held by a
// strict majority of the enabled devices is taken as correct. For every bit
// the module counts the enabled devices reading 1; the voted bit is 1 when
// that count is more than half of the enabled devices. `diff` marks, per
// device, the bits that differ from the vote (the upsets to log and fix);
// `tie` marks bits with no strict majority (for example 3 against 3), which
// the controller does not correct. Combinational. The tie rule is this
// design's choice; the paper only says frames are majority voted.
module maj_vote_n #(
  parameter int unsigned N = 6,
  parameter int unsigned W = 16
) (
  input  logic [N-1:0][W-1:0] words,
  input  logic [N-1:0]        en,
  output logic [W-1:0]        voted,
  output logic [N-1:0][W-1:0] diff,
  output logic [W-1:0]        tie
);
  localparam int unsigned CW = $clog2(N + 1);

  logic [CW-1:0] n_en;

  always_comb begin
    n_en = '0;
    for (int d = 0; d < N; d++) n_en += CW'(en[d]);
  end

  always_comb begin
    logic [CW-1:0] ones;
    for (int b = 0; b < W; b++) begin
      ones = '0;
      for (int d = 0; d < N; d++) ones += CW'(en[d] & words[d][b]);
      voted[b] = ({ones, 1'b0} > {1'b0, n_en});
      tie[b]   = (n_en != '0) && ({ones, 1'b0} == {1'b0, n_en});
    end
    for (int d = 0; d < N; d++) diff[d] = en[d] ? (words[d] ^ voted) & ~tie : '0;
  end
endmodule
