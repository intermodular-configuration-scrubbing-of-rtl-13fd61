// tb_maj_vote_n: checks the N-device voter with random words, random enable
// masks and deliberate 3-3 ties, against an independent bit count.
module tb_maj_vote_n;
  localparam int N = 6, W = 16;
  int checks = 0, failures = 0;
  logic [N-1:0][W-1:0] words, diff;
  logic [N-1:0] en;
  logic [W-1:0] voted, tie;

  maj_vote_n #(.N(N), .W(W)) dut (.words, .en, .voted, .diff, .tie);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 3000; i++) begin
      logic [W-1:0] base, ev, et;
      logic [N-1:0][W-1:0] ed;
      int ne;
      base = W'($urandom);
      en = (i % 4 == 0) ? N'($urandom) : '1;
      for (int d = 0; d < N; d++)
        words[d] = (i % 2 == 0) ? (base ^ (($urandom % 8 == 0) ? W'(1) << ($urandom % W) : '0)) : W'($urandom);
      #1;
      ne = $countones(en);
      for (int b = 0; b < W; b++) begin
        int ones;
        ones = 0;
        for (int d = 0; d < N; d++) if (en[d] && words[d][b]) ones++;
        ev[b] = 2 * ones > ne;
        et[b] = ne > 0 && 2 * ones == ne;
      end
      for (int d = 0; d < N; d++) ed[d] = en[d] ? ((words[d] ^ ev) & ~et) : '0;
      checks += 3;
      if (voted !== ev) begin failures++; $display("voted %h exp %h en %b", voted, ev, en); end
      if (tie !== et) failures++;
      if (diff !== ed) failures++;
    end
    // a single upset among six is found exactly
    words = '{default: 16'h1234}; en = '1; words[4][4] = 1'b0; words[4][7] = 1'b1;
    #1;
    checks += 2;
    if (voted !== 16'h1234) failures++;
    if (diff[4] !== 16'h0090 || diff[0] !== '0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
