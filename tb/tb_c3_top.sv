// tb_c3_top: end-to-end test of the triplicated scrubber with six
// behavioural target FPGAs and a host on the UART.
// The host writes the settings and a two-row, two-column frame table,
// injects an upset through a command, starts scrubbing and reads the log.
// Upsets are also placed directly into the targets (one device, two devices
// at the same bit, several bits in one frame, and a 3-3 tie). The memories
// of single cores are corrupted behind the design's back (a frame-address
// table entry, a frame buffer word, a scratchpad counter, the enable mask)
// and must be outvoted and repaired. Every mechanism is counted and must
// occur: parallel readback, single and broadcast correction, injection,
// tie, completed cycles, periodic core reset, and repairs of all three
// kinds of memory.
module tb_c3_top;
  import c3_pkg::*;
  localparam int N = 6, FW = 65, DIV = 8, BAUD = 16;
  int checks = 0, failures = 0;
  logic clk = 0, rst = 1;
  logic rxd, txd, tms, tdi, running, core_reset;
  logic [N-1:0] tck, tdo;
  logic [4:0] events;
  logic [2:0] mem_fixed;

  c3_top #(.N(N), .FRAME_WORDS(FW), .TBL_AW(8), .TCK_DIV(DIV), .BAUD_DIV(BAUD)) dut (
    .clk, .rst, .rxd, .txd, .tck, .tms, .tdi, .tdo, .running, .events, .core_reset, .mem_fixed
  );
  for (genvar d = 0; d < N; d++) begin : g_dev
    s6_target_model #(.FRAME_WORDS(FW)) u_dev (.tck(tck[d]), .tms, .tdi, .tdo(tdo[d]));
  end

  always #5 clk = ~clk;

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
    repeat (6000000) @(posedge clk);
    failures++;
    $display("watchdog: cycles %0d", n_cycle);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int reads0;
    rxd = 1;
    repeat (5) @(negedge clk); rst = 0;
    repeat (200) @(negedge clk);
    checks++; if (n_reset != 1) begin failures++; $display("no power-up core reset"); end

    // settings: six devices, reset every 3 cycles, 2 rows; table: 2 columns
    send("W0003F"); send("W10003"); send("W20002");
    send("T000002"); send("T019001");
    // corrupt table entry 0 of core 1: outvoted and repaired
    dut.g_core[1].u_core.u_table_ram.mem[0] = 16'h0007;
    repeat (2000) @(negedge clk);
    checks++; if (dut.g_core[1].u_core.u_table_ram.mem[0] !== 16'h0002) begin failures++; $display("table not repaired"); end

    // injection through the host: device 2, frame (0000,0001), bit 0x21
    send("I200000001021");
    while (n_inject == 0) @(negedge clk);
    checks++; if (bad_all(2) != 1) begin failures++; $display("injection did not land"); end

    flip(0, 16'h1101, 16'h0000, 500);      // same bit in two devices: broadcast fix
    flip(5, 16'h1101, 16'h0000, 500);
    flip(3, 16'h0100, 16'h0001, 0);        // two bits of one frame
    flip(3, 16'h0100, 16'h0001, 1039);

    reads0 = g_dev[4].u_dev.n_frame_reads;
    send("S");
    wait_until(1);
    checks++; if (g_dev[4].u_dev.n_frame_reads - reads0 < 6) begin failures++; $display("frames not read"); end
    expect_line(logline(2, 16'h0000, 16'h0001, 33));
    expect_line(logline(0, 16'h1101, 16'h0000, 500));
    expect_line(logline(5, 16'h1101, 16'h0000, 500));
    expect_line(logline(3, 16'h0100, 16'h0001, 0));
    expect_line(logline(3, 16'h0100, 16'h0001, 1039));
    checks++; if (lines.size() != 0) begin failures++; $display("unexpected log: %s", lines[0]); end
    for (int d = 0; d < N; d++) begin
      checks++; if (bad_all(d) != 0) begin failures++; $display("device %0d not repaired", d); end
    end

    // corrupt one core's frame buffer and one core's scratchpad counter
    dut.g_core[2].u_core.u_frame_ram.mem[10] = ~dut.g_core[2].u_core.u_frame_ram.mem[10];
    dut.g_core[0].u_core.u_scratchpad.mem[SP_SEU0 + 4] = 16'hDEAD;
    // a 3-3 tie: reported, not corrected
    flip(1, 16'h0000, 16'h0000, 64); flip(2, 16'h0000, 16'h0000, 64); flip(4, 16'h0000, 16'h0000, 64);
    wait_until(3);
    checks++; if (n_tie == 0) begin failures++; $display("no tie seen"); end
    checks++; if (bad_all(1) != 1) begin failures++; $display("tie frame was changed"); end
    flip(1, 16'h0000, 16'h0000, 64); flip(2, 16'h0000, 16'h0000, 64); flip(4, 16'h0000, 16'h0000, 64);

    // the third cycle ended with the periodic reset; scrubbing then resumes
    while (n_reset < 2) @(negedge clk);
    repeat (100) @(negedge clk);
    checks++; if (dut.g_core[0].u_core.u_scratchpad.mem[SP_SEU0 + 4] !== 16'd0) begin
      failures++; $display("scratchpad not repaired at reset");
    end
    checks++; if (dut.g_core[0].u_core.u_scratchpad.mem[SP_SEU0 + 3] !== 16'd2 ||
                  dut.g_core[1].u_core.u_scratchpad.mem[SP_SEU0 + 3] !== 16'd2) begin
      failures++; $display("SEU counter of device 3 wrong");
    end
    lines.delete();
    flip(4, 16'h0100, 16'h0000, 200);
    wait_until(5);
    expect_line(logline(4, 16'h0100, 16'h0000, 200));
    checks++; if (bad_all(4) != 0) begin failures++; $display("not repaired after reset"); end

    send("P");
    repeat (60000) @(negedge clk);
    checks++; if (running) begin failures++; $display("did not stop"); end

    // every mechanism must have happened
    begin
      int cnt[11];
      string nm[11];
      cnt = '{g_dev[0].u_dev.n_frame_reads, n_fix - n_bcast, n_bcast, n_inject, n_tie, n_cycle,
              n_reset - 1, n_fr_fix, n_tb_fix, n_sp_fix, g_dev[2].u_dev.n_frame_writes};
      nm  = '{"parallel readback", "single-mode correction", "broadcast correction", "injection",
              "tie", "scrub cycle", "periodic core reset", "frame BRAM repair", "table BRAM repair",
              "scratchpad repair", "frame write"};
      for (int i = 0; i < 11; i++) begin
        $display("  %-24s %0d", nm[i], cnt[i]);
        checks++; if (cnt[i] == 0) begin failures++; $display("mechanism never happened: %s", nm[i]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
