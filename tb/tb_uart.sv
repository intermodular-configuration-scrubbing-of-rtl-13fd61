// tb_uart: loops uart_tx into uart_rx with random bytes and gaps; checks the
// received bytes, the line's bit timing (10 bit times per byte) and the
// start/stop bit levels on the wire.
module tb_uart;
  localparam int DIV = 16;
  int checks = 0, failures = 0;
  logic clk = 0, rst = 1;
  logic valid, ready, txd, rvalid;
  logic [7:0] data, rdata;
  byte unsigned sent[$];

  uart_tx #(.BAUD_DIV(DIV)) u_tx (.clk, .rst, .valid, .data, .ready, .txd);
  uart_rx #(.BAUD_DIV(DIV)) u_rx (.clk, .rst, .rxd(txd), .valid(rvalid), .data(rdata));

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (!rst && rvalid) begin
    checks++;
    if (sent.size() == 0 || rdata !== sent[0]) begin failures++; $display("rx %h at %0t, %0d queued", rdata, $time, sent.size()); end
    if (sent.size() != 0) void'(sent.pop_front());
  end

  initial begin
    valid = 0; data = 0;
    repeat (3) @(posedge clk);
    rst = 0;
    for (int i = 0; i < 200; i++) begin
      int t0, t1;
      @(negedge clk);
      data = 8'($urandom); valid = 1;
      sent.push_back(data);
      @(posedge clk);
      while (!ready) @(posedge clk);
      @(negedge clk); valid = 0;
      // start bit appears on the wire, check its level and the byte length
      t0 = 0;
      while (txd) begin @(posedge clk); t0++; end
      t1 = 0;
      // sample middle of each bit
      repeat (DIV / 2) @(posedge clk);
      checks++; if (txd !== 1'b0) failures++;
      for (int b = 0; b < 8; b++) begin
        repeat (DIV) @(posedge clk);
        checks++; if (txd !== sent[sent.size()-1][b]) failures++;
      end
      repeat (DIV) @(posedge clk);
      checks++; if (txd !== 1'b1) failures++;
      while (!ready) begin @(posedge clk); t1++; end
      // ready returns half a bit after the stop-bit middle
      checks++; if (t1 > DIV / 2 + 2) begin failures++; $display("byte too long %0d", t1); end
      repeat ($urandom % 40) @(posedge clk);
    end
    repeat (5 * DIV) @(posedge clk);
    checks++; if (sent.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
