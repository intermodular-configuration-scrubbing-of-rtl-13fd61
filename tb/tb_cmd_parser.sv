// tb_cmd_parser: feeds ASCII command strings byte by byte and checks the
// decoded commands field by field, including a dropped malformed command.
module tb_cmd_parser;
  import c3_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst = 1;
  logic rx_valid, valid;
  logic [7:0] rx_data;
  host_cmd_t cmd;
  host_cmd_t got[$];

  cmd_parser dut (.clk, .rst, .rx_valid, .rx_data, .valid, .cmd);

  always #5 clk = ~clk;
  always @(posedge clk) if (!rst && valid) got.push_back(cmd);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send(input string s);
    for (int i = 0; i < s.len(); i++) begin
      @(negedge clk); rx_valid = 1; rx_data = s[i];
      @(negedge clk); rx_valid = 0;
      repeat ($urandom % 3) @(negedge clk);
    end
  endtask

  task automatic expect_cmd(input cmd_e op, input logic [2:0] dev, input logic [15:0] mj,
                            input logic [15:0] mn, input logic [10:0] b, input logic [7:0] a,
                            input logic [15:0] d);
    repeat (3) @(negedge clk);
    checks++;
    if (got.size() != 1) begin
      failures++; $display("expected 1 command, got %0d: %p", got.size(), got);
    end else begin
      host_cmd_t c;
      c = got.pop_front();
      checks++;
      if (c.op != op || c.dev != dev || c.far_maj != mj || c.far_min != mn || c.bit_off != b ||
          c.addr != a || c.data != d) begin
        failures++; $display("bad command %p", c);
      end
    end
    got.delete();
  endtask

  initial begin
    rx_valid = 0; rx_data = 0;
    repeat (3) @(negedge clk); rst = 0;
    send("S");              expect_cmd(CMD_START, 0, 0, 0, 0, 0, 0);
    send("p");              expect_cmd(CMD_STOP, 0, 0, 0, 0, 0, 0);
    send("I30a5C00130F2");  expect_cmd(CMD_INJECT, 3, 16'h0A5C, 16'h0013, 11'h0F2, 0, 0);
    send("T7fBEEF");        expect_cmd(CMD_TBL_WR, 0, 0, 0, 0, 8'h7F, 16'hBEEF);
    send("W2003f");         expect_cmd(CMD_SP_WR, 0, 0, 0, 0, 8'h02, 16'h003F);
    // malformed: non-hex digit drops the command, the next one still works
    send("T1xS");           expect_cmd(CMD_START, 0, 0, 0, 0, 0, 0);
    send("I5123456787FF");  expect_cmd(CMD_INJECT, 5, 16'h1234, 16'h5678, 11'h7FF, 0, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
