// tb_jtag_engine: random TMS and SHIFT operations with random device masks.
// Checks the TMS/TDI bit seen at every rising TCK edge, that only masked
// devices are clocked, the per-device captured TDO words (bit order
// included), the majority-voted TDO word, and the operation length of
// nbits x TCK_DIV cycles.
module tb_jtag_engine;
  import c3_pkg::*;
  localparam int N = 6, DIV = 8;
  int checks = 0, failures = 0;
  logic clk = 0, rst = 1;
  logic op_valid, op_ready, done, tms, tdi;
  jtag_op_t op;
  logic [N-1:0][15:0] cap;
  logic [15:0] cap_voted;
  logic [N-1:0] tck, tdo;

  jtag_engine #(.N(N), .TCK_DIV(DIV)) dut (.*);

  always #5 clk = ~clk;

  // what the targets see
  logic [15:0] pat [N];
  int  kbit [N];
  int  nrise [N];
  logic [1:0] seen [N][$];   // {tms, tdi} per rising edge

  for (genvar d = 0; d < N; d++) begin : g_t
    always @(posedge tck[d]) begin seen[d].push_back({tms, tdi}); nrise[d]++; end
    always @(negedge tck[d]) begin kbit[d]++; tdo[d] <= pat[d][kbit[d] % 16]; end
  end

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    op_valid = 0; op = '0;
    for (int d = 0; d < N; d++) begin kbit[d] = 0; nrise[d] = 0; pat[d] = '0; end
    tdo = '0;
    repeat (3) @(negedge clk); rst = 0;
    for (int it = 0; it < 300; it++) begin
      int n, t;
      logic [15:0] expc [N];
      logic [15:0] ev;
      op.kind = jop_kind_e'($urandom % 2);
      n = 1 + $urandom % 16;
      op.nbits = 5'(n);
      op.data = 16'($urandom);
      op.msb_first = 1'($urandom);
      op.exit_last = 1'($urandom);
      op.mask = N'($urandom);
      if (op.mask == '0) op.mask = N'(1) << ($urandom % N);
      for (int d = 0; d < N; d++) begin
        pat[d] = 16'($urandom); kbit[d] = 0; nrise[d] = 0; seen[d].delete();
        tdo[d] = pat[d][0];
      end
      @(negedge clk); op_valid = 1;
      @(posedge clk); while (!op_ready) @(posedge clk);
      t = 0;
      @(negedge clk); op_valid = 0;
      while (!done) begin @(negedge clk); t++; end
      checks++;
      if (t < n * DIV || t > n * DIV + 2) begin failures++; $display("length %0d for %0d bits", t, n); end
      for (int d = 0; d < N; d++) begin
        checks++;
        if (nrise[d] != (op.mask[d] ? n : 0)) begin failures++; $display("dev %0d: %0d edges", d, nrise[d]); end
        if (op.mask[d]) for (int i = 0; i < n; i++) begin
          logic etms, etdi;
          int p;
          p = (op.kind == JOP_SHIFT && op.msb_first) ? n - 1 - i : i;
          etms = (op.kind == JOP_TMS) ? op.data[i] : (op.exit_last && i == n - 1);
          etdi = (op.kind == JOP_TMS) ? 1'b0 : op.data[p];
          checks++;
          if (i >= seen[d].size() || seen[d][i] !== {etms, etdi}) begin
            failures++; $display("dev %0d bit %0d: tms/tdi wrong", d, i);
          end
        end
        expc[d] = '0;
        for (int i = 0; i < n; i++) begin
          int p;
          p = (op.kind == JOP_SHIFT && op.msb_first) ? n - 1 - i : i;
          expc[d][p] = pat[d][i];
        end
        if (op.mask[d]) begin
          checks++;
          if (cap[d] !== expc[d]) begin failures++; $display("dev %0d cap %h exp %h", d, cap[d], expc[d]); end
        end
      end
      for (int b = 0; b < 16; b++) begin
        int ones, ne;
        ones = 0; ne = 0;
        for (int d = 0; d < N; d++) if (op.mask[d]) begin ne++; if (expc[d][b]) ones++; end
        ev[b] = 2 * ones > ne;
      end
      checks++;
      if (cap_voted !== ev) begin failures++; $display("voted %h exp %h", cap_voted, ev); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
