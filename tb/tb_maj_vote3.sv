// tb_maj_vote3: random and exhaustive checks of the 2-of-3 voter against a
// per-bit count of ones.
module tb_maj_vote3;
  int checks = 0, failures = 0;
  logic [7:0] a, b, c, y;
  logic mm;

  maj_vote3 #(.W(8)) dut (.a, .b, .c, .y, .mismatch(mm));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 2000; i++) begin
      logic [7:0] exp;
      a = 8'($urandom); b = (i % 3 == 0) ? a : 8'($urandom); c = (i % 5 == 0) ? a : 8'($urandom);
      #1;
      for (int k = 0; k < 8; k++) exp[k] = (int'(a[k]) + int'(b[k]) + int'(c[k])) >= 2;
      checks++;
      if (y !== exp) begin failures++; $display("vote %h %h %h -> %h exp %h", a, b, c, y, exp); end
      checks++;
      if (mm !== !(a == b && b == c)) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
