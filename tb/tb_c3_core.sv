// tb_c3_core: one scrubbing core on its own, driven through its UART by a
// host model, with six behavioural target FPGAs. The host writes settings
// and a frame table, injects an upset, starts scrubbing and checks the log
// lines, the repaired targets, the reset request after the programmed
// number of cycles (period 2) and the SEU counters in the scratchpad.
module tb_c3_core;
  import c3_pkg::*;
  localparam int N = 6, FW = 65, DIV = 8, BAUD = 16;
  int checks = 0, failures = 0;
  logic clk = 0, rst = 1;
  logic rxd, txd, tms, tdi, running, rst_req;
  logic [N-1:0] tck, tdo;
  logic [4:0] events;
  logic [15:0] sp_rdata;

  c3_core #(.N(N), .FRAME_WORDS(FW), .TBL_AW(8), .TCK_DIV(DIV), .BAUD_DIV(BAUD)) dut (
    .clk, .rst, .rxd, .txd, .tck, .tms, .tdi, .tdo, .rst_req, .running, .events,
    .fr_a_we(), .fr_a_addr(), .fr_b_en(1'b0), .fr_b_we(1'b0), .fr_b_addr('0), .fr_b_wdata('0), .fr_b_rdata(),
    .tb_a_we(), .tb_a_addr(), .tb_b_en(1'b0), .tb_b_we(1'b0), .tb_b_addr('0), .tb_b_wdata('0), .tb_b_rdata(),
    .sp_a_we(), .sp_a_addr(), .sp_b_en(1'b1), .sp_b_we(1'b0), .sp_b_addr(SP_SEU0 + 4'd3), .sp_b_wdata('0),
    .sp_b_rdata(sp_rdata)
  );
  for (genvar d = 0; d < N; d++) begin : g_dev
    s6_target_model #(.FRAME_WORDS(FW)) u_dev (.tck(tck[d]), .tms, .tdi, .tdo(tdo[d]));
  end

  always #5 clk = ~clk;

  // ---------------- event counters
  int n_cycle = 0, n_fix = 0, n_bcast = 0, n_tie = 0, n_inject = 0, n_reset = 0;
  always @(posedge clk) if (!rst) begin
    n_cycle  += int'(events[0]); n_fix += int'(events[1]); n_bcast += int'(events[2]);
    n_tie    += int'(events[3]); n_inject += int'(events[4]); n_reset += int'(rst_req);
  end

  // ---------------- host UART
  string lines[$];
  string cur = "";
  initial begin
    wait (!rst);
    repeat (10) @(posedge clk);
    forever begin
      logic [7:0] ch;
      @(negedge txd);
      repeat (BAUD / 2) @(posedge clk);
      for (int b = 0; b < 8; b++) begin repeat (BAUD) @(posedge clk); ch[b] = txd; end
      repeat (BAUD) @(posedge clk);
      if (ch == 8'h0A) begin lines.push_back(cur); cur = ""; end
      else if (ch != 8'h0D) cur = {cur, string'(ch)};
    end
  end

  task automatic send(input string s);
    for (int i = 0; i < s.len(); i++) begin
      logic [7:0] ch;
      ch = s[i];
      rxd = 0; repeat (BAUD) @(posedge clk);
      for (int b = 0; b < 8; b++) begin rxd = ch[b]; repeat (BAUD) @(posedge clk); end
      rxd = 1; repeat (2 * BAUD) @(posedge clk);
    end
    repeat (50) @(posedge clk);
  endtask

  // ---------------- target helpers
  function automatic void flip(input int d, input logic [15:0] mj, input logic [15:0] mn, input int b);
    unique case (d)
      0: g_dev[0].u_dev.flip(mj, mn, b);
      1: g_dev[1].u_dev.flip(mj, mn, b);
      2: g_dev[2].u_dev.flip(mj, mn, b);
      3: g_dev[3].u_dev.flip(mj, mn, b);
      4: g_dev[4].u_dev.flip(mj, mn, b);
      default: g_dev[5].u_dev.flip(mj, mn, b);
    endcase
  endfunction

  function automatic int bad_all(input int d);
    // all six frames of the test device
    logic [15:0] mj [6] = '{16'h0000, 16'h0000, 16'h1001, 16'h0100, 16'h0100, 16'h1101};
    logic [15:0] mn [6] = '{16'h0000, 16'h0001, 16'h0000, 16'h0000, 16'h0001, 16'h0000};
    int n;
    n = 0;
    for (int f = 0; f < 6; f++)
      unique case (d)
        0: n += g_dev[0].u_dev.count_bad(mj[f], mn[f]);
        1: n += g_dev[1].u_dev.count_bad(mj[f], mn[f]);
        2: n += g_dev[2].u_dev.count_bad(mj[f], mn[f]);
        3: n += g_dev[3].u_dev.count_bad(mj[f], mn[f]);
        4: n += g_dev[4].u_dev.count_bad(mj[f], mn[f]);
        default: n += g_dev[5].u_dev.count_bad(mj[f], mn[f]);
      endcase
    return n;
  endfunction

  function automatic string logline(input int d, input logic [15:0] mj, input logic [15:0] mn, input int b);
    logic [15:0] g;
    string s;
    g = g_dev[0].u_dev.gold(mj, mn, b / 16);
    s = $sformatf("U %1X %4X %4X %3X %1d", d, mj, mn, b, !g[15 - b % 16]);
    return s.toupper();
  endfunction

  task automatic expect_line(input string s);
    int hit;
    hit = -1;
    foreach (lines[i]) if (lines[i] == s) hit = i;
    checks++;
    if (hit < 0) begin failures++; $display("missing log line '%s'", s); end
    else lines.delete(hit);
  endtask

  task automatic wait_until(input int cycles_needed);
    while (n_cycle < cycles_needed) @(negedge clk);
    repeat (30 * 10 * BAUD) @(negedge clk);   // let the last log lines drain
  endtask

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rxd = 1;
    repeat (5) @(negedge clk); rst = 0;
    repeat (200) @(negedge clk);
    send("W0003F"); send("W10002"); send("W20002");
    send("T000002"); send("T019001");
    send("I511010000123");
    while (n_inject == 0) @(negedge clk);
    checks++; if (bad_all(5) != 1) begin failures++; $display("injection did not land"); end
    flip(1, 16'h0100, 16'h0001, 7);
    flip(2, 16'h0100, 16'h0001, 7);
    flip(3, 16'h1001, 16'h0000, 640);
    send("S");
    wait_until(1);
    expect_line(logline(5, 16'h1101, 16'h0000, 291));
    expect_line(logline(1, 16'h0100, 16'h0001, 7));
    expect_line(logline(2, 16'h0100, 16'h0001, 7));
    expect_line(logline(3, 16'h1001, 16'h0000, 640));
    checks++; if (lines.size() != 0) begin failures++; $display("unexpected log: %s", lines[0]); end
    for (int d = 0; d < N; d++) begin
      checks++; if (bad_all(d) != 0) begin failures++; $display("device %0d not repaired", d); end
    end
    checks++; if (n_fix != 3 || n_bcast != 1) begin failures++; $display("fix %0d bcast %0d", n_fix, n_bcast); end
    checks++; if (sp_rdata !== 16'd1) begin failures++; $display("dev3 counter %0d", sp_rdata); end
    while (!rst_req) @(negedge clk);
    repeat (2) @(negedge clk);
    checks++; if (n_cycle != 2) begin failures++; $display("reset request after %0d cycles", n_cycle); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
