// tb_seu_log_fmt: sends random upset records through the formatter with a
// randomly stalling transmitter and compares each line with one built by
// $sformatf.
module tb_seu_log_fmt;
  import c3_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst = 1;
  logic rec_valid, rec_ready, tx_valid, tx_ready;
  logic [7:0] tx_data;
  seu_rec_t rec;
  string line = "";

  seu_log_fmt dut (.clk, .rst, .rec_valid, .rec, .rec_ready, .tx_valid, .tx_data, .tx_ready);

  always #5 clk = ~clk;
  always @(negedge clk) tx_ready = ($urandom % 3) != 0;
  always @(posedge clk) if (!rst && tx_valid && tx_ready) line = {line, string'(tx_data)};

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rec_valid = 0; rec = '0; tx_ready = 0;
    repeat (3) @(negedge clk); rst = 0;
    for (int i = 0; i < 100; i++) begin
      string exp;
      @(negedge clk);
      rec.dev = 3'($urandom % 6); rec.far_maj = 16'($urandom); rec.far_min = 16'($urandom);
      rec.bit_off = 11'($urandom); rec.pol = 1'($urandom);
      exp = $sformatf("U %1X %4X %4X %3X %1d\r\n", rec.dev, rec.far_maj, rec.far_min, rec.bit_off, rec.pol);
      exp = exp.toupper();
      line = "";
      rec_valid = 1;
      @(posedge clk); while (!rec_ready) @(posedge clk);
      @(negedge clk); rec_valid = 0;
      @(posedge clk); while (!rec_ready) @(posedge clk);
      @(negedge clk);
      checks++;
      if (line != exp) begin failures++; $display("got '%s' exp '%s'", line, exp); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
