// tb_ram_scrubber: three RAM copies under a continuous scrubber and three
// under a one-sweep scrubber. Random corruptions of one copy at a time are
// repaired to the majority value; a port A write that races the scrubber is
// not overwritten; the one-sweep scrubber finishes a sweep in bounded time.
module tb_ram_scrubber;
  localparam int W = 8, DEPTH = 16;
  int checks = 0, failures = 0;
  logic clk = 0, rst = 1;

  // two sets of three copies: set 0 continuous, set 1 one sweep
  logic [1:0][2:0]        a_en, a_we;
  logic [1:0][2:0][3:0]   a_addr;
  logic [1:0][2:0][W-1:0] a_wdata, a_rdata;
  logic [1:0]             b_en, b_we;
  logic [1:0][3:0]        b_addr;
  logic [1:0][W-1:0]      b_wdata;
  logic [1:0][2:0][W-1:0] b_rdata;
  logic [1:0]             start, done, busy, fixed;
  int nfixed = 0;

  for (genvar s = 0; s < 2; s++) begin : g_set
    for (genvar c = 0; c < 3; c++) begin : g_copy
      dp_ram #(.W(W), .DEPTH(DEPTH)) u_ram (
        .clk, .a_en(a_en[s][c]), .a_we(a_we[s][c]), .a_addr(a_addr[s][c]), .a_wdata(a_wdata[s][c]),
        .a_rdata(a_rdata[s][c]), .b_en(b_en[s]), .b_we(b_we[s]), .b_addr(b_addr[s]),
        .b_wdata(b_wdata[s]), .b_rdata(b_rdata[s][c])
      );
    end
    ram_scrubber #(.W(W), .DEPTH(DEPTH), .CONTINUOUS(s == 0)) u_scrub (
      .clk, .rst, .start(start[s]), .done(done[s]), .busy(busy[s]), .fixed(fixed[s]),
      .a_we(a_we[s] & a_en[s]), .a_addr(a_addr[s]),
      .b_en(b_en[s]), .b_we(b_we[s]), .b_addr(b_addr[s]), .b_wdata(b_wdata[s]), .b_rdata(b_rdata[s])
    );
  end

  always #5 clk = ~clk;
  always @(posedge clk) if (!rst) nfixed += int'(fixed[0]) + int'(fixed[1]);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(input int s, input int c, input int addr, input logic [W-1:0] d);
    @(negedge clk);
    a_en = '0; a_we = '0;
    a_en[s][c] = 1; a_we[s][c] = 1; a_addr[s][c] = 4'(addr); a_wdata[s][c] = d;
    @(negedge clk);
    a_en = '0; a_we = '0;
  endtask

  task automatic rd(input int s, input int c, input int addr, output logic [W-1:0] d);
    @(negedge clk);
    a_en = '0; a_we = '0;
    a_en[s][c] = 1; a_addr[s][c] = 4'(addr);
    @(negedge clk);
    a_en = '0;
    d = a_rdata[s][c];
  endtask

  initial begin
    logic [W-1:0] gold [2][DEPTH];
    logic [W-1:0] v;
    a_en = '0; a_we = '0; a_addr = '0; a_wdata = '0; start = '0;
    repeat (3) @(negedge clk); rst = 0;
    // fill all copies with the same data
    for (int s = 0; s < 2; s++)
      for (int i = 0; i < DEPTH; i++) begin
        gold[s][i] = W'($urandom);
        @(negedge clk);
        a_en[s] = '1; a_we[s] = '1;
        for (int c = 0; c < 3; c++) begin a_addr[s][c] = 4'(i); a_wdata[s][c] = gold[s][i]; end
        @(negedge clk); a_en = '0; a_we = '0;
      end
    for (int round = 0; round < 30; round++) begin
      int nf0;
      // corrupt one copy of one word in each set
      int c0, c1, i0, i1;
      c0 = $urandom % 3; c1 = $urandom % 3; i0 = $urandom % DEPTH; i1 = $urandom % DEPTH;
      wr(0, c0, i0, gold[0][i0] ^ W'(1 + $urandom % 255));
      wr(1, c1, i1, gold[1][i1] ^ W'(1 + $urandom % 255));
      nf0 = nfixed;
      // continuous set repairs by itself; one-sweep set only after start
      repeat (4 * DEPTH + 10) @(negedge clk);
      start[1] = 1; @(negedge clk); start[1] = 0;
      begin
        int t;
        t = 0;
        while (!done[1] && t < 10 * DEPTH) begin @(negedge clk); t++; end
        checks++; if (!done[1]) begin failures++; $display("sweep did not finish"); end
      end
      for (int s = 0; s < 2; s++)
        for (int c = 0; c < 3; c++)
          for (int i = 0; i < DEPTH; i++) begin
            rd(s, c, i, v);
            checks++;
            if (v !== gold[s][i]) begin failures++; $display("set %0d copy %0d addr %0d = %h exp %h", s, c, i, v, gold[s][i]); end
          end
      checks++; if (nfixed - nf0 < 2) begin failures++; $display("repairs not reported"); end
    end
    // a real update written to all three copies of the continuous set in
    // consecutive cycles is kept, not voted away
    for (int c = 0; c < 3; c++) wr(0, c, 5, 8'hC3);
    gold[0][5] = 8'hC3;
    repeat (4 * DEPTH) @(negedge clk);
    for (int c = 0; c < 3; c++) begin
      rd(0, c, 5, v); checks++; if (v !== 8'hC3) begin failures++; $display("update lost"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
