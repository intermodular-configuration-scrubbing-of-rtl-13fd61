// tb_frame_addr_gen: loads a small column table, walks all frame addresses
// with random pauses and compares them with a list computed in the
// testbench; also checks that an empty column is skipped and a restart
// begins again at the first frame.
module tb_frame_addr_gen;
  int checks = 0, failures = 0;
  logic clk = 0, rst = 1;
  logic start, next, valid, finished, tbl_en;
  logic [3:0] rows;
  logic [15:0] far_maj, far_min, tbl_rdata;
  logic [7:0] tbl_addr;
  logic we;
  logic [7:0] waddr;
  logic [15:0] wdata;
  logic [15:0] entries[4];

  frame_addr_gen #(.TBL_AW(8)) dut (.*);
  dp_ram #(.W(16), .DEPTH(256)) u_tbl (
    .clk, .a_en(tbl_en || we), .a_we(we), .a_addr(we ? waddr : tbl_addr), .a_wdata(wdata),
    .a_rdata(tbl_rdata), .b_en(1'b0), .b_we(1'b0), .b_addr('0), .b_wdata('0), .b_rdata()
  );

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] expq[$];
    entries = '{16'h1003, 16'h2000, 16'h3005, 16'hA002};   // last entry: block 2, last column
    start = 0; next = 0; rows = 4'd3; we = 0; waddr = 0; wdata = 0;
    repeat (3) @(negedge clk); rst = 0;
    for (int i = 0; i < 4; i++) begin
      @(negedge clk); we = 1; waddr = 8'(i); wdata = entries[i];
    end
    @(negedge clk); we = 0;
    for (int pass = 0; pass < 2; pass++) begin
      expq.delete();
      for (int r = 0; r < 3; r++)
        for (int c = 0; c < 4; c++)
          for (int m = 0; m < int'(entries[c][9:0]); m++)
            expq.push_back({1'b0, entries[c][14:12], 4'(r), 8'(c), 16'(m)});
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      while (!finished) begin
        @(negedge clk);
        if (valid && ($urandom % 2)) begin
          checks++;
          if (expq.size() == 0 || {far_maj, far_min} !== expq[0]) begin
            failures++; $display("got %h %h", far_maj, far_min);
          end
          if (expq.size() != 0) void'(expq.pop_front());
          next = 1; @(negedge clk); next = 0;
        end
      end
      checks++;
      if (expq.size() != 0) begin failures++; $display("%0d frames missed", expq.size()); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
