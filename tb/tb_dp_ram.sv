// tb_dp_ram: random traffic on both ports of the dual-port RAM compared with
// a reference array; checks one-cycle read latency and read-first behaviour.
module tb_dp_ram;
  localparam int W = 16, DEPTH = 32;
  int checks = 0, failures = 0;
  logic clk = 0;
  logic a_en, a_we, b_en, b_we;
  logic [4:0] a_addr, b_addr;
  logic [W-1:0] a_wdata, b_wdata, a_rdata, b_rdata;
  logic [W-1:0] ref_mem [DEPTH];
  logic [W-1:0] exp_a, exp_b;
  logic chk_a, chk_b;

  dp_ram #(.W(W), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < DEPTH; i++) ref_mem[i] = '0;
    a_en = 0; b_en = 0; a_we = 0; b_we = 0; chk_a = 0; chk_b = 0;
    a_addr = '0; b_addr = '0; a_wdata = '0; b_wdata = '0;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      if (chk_a) begin checks++; if (a_rdata !== exp_a) begin failures++; $display("A %h exp %h", a_rdata, exp_a); end end
      if (chk_b) begin checks++; if (b_rdata !== exp_b) begin failures++; $display("B %h exp %h", b_rdata, exp_b); end end
      a_en = 1'($urandom); a_we = 1'($urandom); a_addr = 5'($urandom); a_wdata = W'($urandom);
      b_en = 1'($urandom); b_we = 1'($urandom); b_addr = 5'($urandom); b_wdata = W'($urandom);
      if (a_en && b_en && a_we && b_we && a_addr == b_addr) b_we = 0;
      chk_a = a_en; chk_b = b_en;
      exp_a = ref_mem[a_addr]; exp_b = ref_mem[b_addr];
      if (a_en && a_we) ref_mem[a_addr] = a_wdata;
      if (b_en && b_we) ref_mem[b_addr] = b_wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
