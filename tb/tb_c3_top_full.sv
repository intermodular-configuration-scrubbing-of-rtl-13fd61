// tb_c3_top_full: the scrubber at its default parameters (127 MHz clock,
// TCK = clock/32, 115200-baud UART, 65-word frames, six targets) through
// one complete operation: the host writes the settings and a one-column
// frame table (two frames), injects an upset into device 3 through a
// command, starts scrubbing, and receives the log line of that upset after
// one scrubbing cycle that also repairs it. It also checks that one frame
// readback takes the JTAG time the sequence length predicts.
module tb_c3_top_full;
  import c3_pkg::*;
  localparam int N = N_DEV, FW = FRAME_WORDS, BAUD = BAUD_DIV;
  localparam int READ_BITS = 6 + 12 + 3 + 11 * 16 + 2 + 12 + 3 + FW * 16 + 2;
  int checks = 0, failures = 0;
  logic clk = 0, rst = 1;
  logic rxd, txd, tms, tdi, running, core_reset;
  logic [N-1:0] tck, tdo;
  logic [4:0] events;
  logic [2:0] mem_fixed;

  c3_top dut (
    .clk, .rst, .rxd, .txd, .tck, .tms, .tdi, .tdo, .running, .events, .core_reset, .mem_fixed
  );
  for (genvar d = 0; d < N; d++) begin : g_dev
    s6_target_model #(.FRAME_WORDS(FW)) u_dev (.tck(tck[d]), .tms, .tdi, .tdo(tdo[d]));
  end

  always #4 clk = ~clk;   // ~127 MHz (8 ns period)

  // ---------------- event counters
  int n_cycle = 0, n_fix = 0, n_bcast = 0, n_tie = 0, n_inject = 0, n_reset = 0;
  int n_fr_fix = 0, n_tb_fix = 0, n_sp_fix = 0;
  always @(posedge clk) if (!rst) begin
    n_cycle  += int'(events[0]); n_fix += int'(events[1]); n_bcast += int'(events[2]);
    n_tie    += int'(events[3]); n_inject += int'(events[4]); n_reset += int'(core_reset);
    n_fr_fix += int'(mem_fixed[0]); n_tb_fix += int'(mem_fixed[1]); n_sp_fix += int'(mem_fixed[2]);
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
    repeat (4000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t0, t1, r0;
    rxd = 1;
    repeat (5) @(negedge clk); rst = 0;
    repeat (200) @(negedge clk);
    send("W0003F"); send("W10000"); send("W20001"); send("T008002");
    send("I300000001100");
    while (n_inject == 0) @(negedge clk);
    checks++; if (bad_all(3) != 1) begin failures++; $display("injection did not land"); end
    send("S");
    // time one parallel frame readback
    r0 = g_dev[0].u_dev.n_frame_reads;
    while (g_dev[0].u_dev.n_frame_reads == r0) @(negedge clk);
    t0 = $time;
    while (g_dev[0].u_dev.n_frame_reads == r0 + 1) @(negedge clk);
    t1 = $time;
    $display("frame-to-frame readback time %0d cycles (%0d JTAG bits at TCK_DIV %0d)", (t1 - t0) / 8, READ_BITS, TCK_DIV);
    checks++;
    if ((t1 - t0) / 8 < READ_BITS * TCK_DIV) begin failures++; $display("readback faster than the bit count allows"); end
    wait_until(1);
    expect_line(logline(3, 16'h0000, 16'h0001, 256));
    checks++; if (lines.size() != 0) begin failures++; $display("unexpected log: %s", lines[0]); end
    for (int d = 0; d < N; d++) begin
      checks++; if (bad_all(d) != 0) begin failures++; $display("device %0d not repaired", d); end
    end
    checks++; if (n_fix != 1) begin failures++; $display("fix %0d", n_fix); end
    send("P");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
