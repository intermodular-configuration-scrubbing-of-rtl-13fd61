// tb_c3_inject_campaign: fault-injection campaign on the triplicated
// scrubber, the bench test of the paper at reduced size.
//
// Six behavioural target FPGAs with an 18-frame address map (2 rows of
// three columns with 4, 3 and 2 minor frames). In each of ROUNDS rounds the
// host stops scrubbing, upsets are placed in every frame (1 to 4 per frame,
// devices and bits uniformly random, no bit upset in more than two devices
// so that a 4-of-6 majority always exists), one of them through the host's
// inject command and the rest directly in the targets, and scrubbing is
// started again. After one complete scrubbing cycle every upset must be in
// the log exactly once with the right device, frame, bit and polarity, no
// other line may appear, and all frames of all devices must again match the
// golden configuration. The scrub period is 4, so the periodic core reset
// happens between rounds and the log must survive it. The last FIVE_ROUNDS
// rounds run a group of five boards: device 5 is disabled in the enable
// mask, upsets go to devices 0 to 4 only, the majority is 3 of 5, and
// device 5 must not be read any more. At the end the per-device SEU
// counters in the scratchpads must equal the number of upsets placed in
// each device.
module tb_c3_inject_campaign;
  import c3_pkg::*;
  localparam int N = 6, FW = 65, DIV = 8, BAUD = 16, ROUNDS = 92, NF = 18, FIVE_ROUNDS = 10;
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

  int n_cycle = 0, n_fix = 0, n_bcast = 0, n_inject = 0, n_reset = 0, n_tie = 0;
  always @(posedge clk) if (!rst) begin
    n_cycle += int'(events[0]); n_fix += int'(events[1]); n_bcast += int'(events[2]);
    n_tie   += int'(events[3]); n_inject += int'(events[4]); n_reset += int'(core_reset);
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

  // ---------------- frame map: FAR_MAJ = {0, block, row, column}
  logic [15:0] fmaj[NF], fmin[NF];
  initial begin
    int f;
    int nmin[3] = '{4, 3, 2};
    int blk[3]  = '{0, 0, 1};
    f = 0;
    for (int r = 0; r < 2; r++)
      for (int c = 0; c < 3; c++)
        for (int m = 0; m < nmin[c]; m++) begin
          fmaj[f] = {1'b0, 3'(blk[c]), 4'(r), 8'(c)};
          fmin[f] = 16'(m);
          f++;
        end
  end

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

  function automatic int bad(input int d, input int f);
    unique case (d)
      0: return g_dev[0].u_dev.count_bad(fmaj[f], fmin[f]);
      1: return g_dev[1].u_dev.count_bad(fmaj[f], fmin[f]);
      2: return g_dev[2].u_dev.count_bad(fmaj[f], fmin[f]);
      3: return g_dev[3].u_dev.count_bad(fmaj[f], fmin[f]);
      4: return g_dev[4].u_dev.count_bad(fmaj[f], fmin[f]);
      default: return g_dev[5].u_dev.count_bad(fmaj[f], fmin[f]);
    endcase
  endfunction

  function automatic string logline(input int d, input logic [15:0] mj, input logic [15:0] mn, input int b);
    logic [15:0] g;
    string s;
    g = g_dev[0].u_dev.gold(mj, mn, b / 16);
    s = $sformatf("U %1X %4X %4X %3X %1d", d, mj, mn, b, !g[15 - b % 16]);
    return s.toupper();
  endfunction

  // a command sent while the cores are being reset is lost: repeat it
  task automatic stop_scrubbing();
    while (running) begin
      send("P");
      for (int t = 0; t < 200000 && running; t++) @(negedge clk);
    end
  endtask

  initial begin
    repeat (ROUNDS * 2500000) @(posedge clk);
    failures++;
    $display("watchdog: cycles %0d", n_cycle);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int per_dev[N];
    int total, logged, k, c0, inj0, dev, bitn, same, round_n, ndev, reads5;
    int udev[4], ubit[4];
    int expect_q[string];
    string s;
    foreach (per_dev[d]) per_dev[d] = 0;
    total = 0; logged = 0;
    rxd = 1;
    repeat (5) @(negedge clk); rst = 0;
    repeat (200) @(negedge clk);

    send("W0003F"); send("W10004"); send("W20002");
    send("T000004"); send("T010003"); send("T029002");

    ndev = N;
    reads5 = 0;
    for (int r = 0; r < ROUNDS; r++) begin
      stop_scrubbing();
      if (r == ROUNDS - FIVE_ROUNDS) begin
        send("W0001F");
        ndev = N - 1;
        reads5 = int'(g_dev[5].u_dev.n_frame_reads);
      end
      expect_q.delete();
      round_n = 0;
      for (int f = 0; f < NF; f++) begin
        k = 1 + int'($urandom % 4);
        for (int u = 0; u < k; u++) begin
          // draw until the (device, bit) pair is new and the bit stays in at most two devices
          do begin
            dev  = int'($urandom % ndev);
            bitn = int'($urandom % (FW * 16));
            same = 0;
            for (int v = 0; v < u; v++) begin
              if (ubit[v] == bitn) same++;
              if (ubit[v] == bitn && udev[v] == dev) same = 9;
            end
          end while (same >= 2);
          udev[u] = dev; ubit[u] = bitn;
          s = logline(dev, fmaj[f], fmin[f], bitn);
          if (expect_q.exists(s)) expect_q[s]++; else expect_q[s] = 1;
          per_dev[dev]++;
          round_n++;
          total++;
          if (f == r % NF && u == 0) begin
            // this one through the host's inject command
            inj0 = n_inject;
            send($sformatf("I%1X%4X%4X%3X", dev, fmaj[f], fmin[f], bitn));
            while (n_inject == inj0) @(negedge clk);
            checks++; if (bad(dev, f) != 1) begin failures++; $display("inject command did not land"); end
          end else begin
            flip(dev, fmaj[f], fmin[f], bitn);
          end
        end
      end
      lines.delete();
      c0 = n_cycle;
      send("S");
      while (n_cycle == c0) @(negedge clk);
      // the log may still be draining through the UART
      for (int t = 0; t < 100 * 10 * BAUD && lines.size() < round_n; t++) @(negedge clk);
      repeat (25 * 10 * BAUD) @(negedge clk);
      foreach (lines[i]) begin
        checks++;
        if (expect_q.exists(lines[i]) && expect_q[lines[i]] > 0) begin
          expect_q[lines[i]]--; logged++;
        end else begin
          failures++; $display("round %0d: unexpected log line '%s'", r, lines[i]);
        end
      end
      foreach (expect_q[key]) if (expect_q[key] != 0) begin
        checks++; failures++; $display("round %0d: upset not logged '%s'", r, key);
      end
      for (int d = 0; d < N; d++)
        for (int f = 0; f < NF; f++) begin
          checks++;
          if (bad(d, f) != 0) begin
            failures++; $display("round %0d: device %0d frame %4h/%4h not repaired", r, d, fmaj[f], fmin[f]);
          end
        end
    end

    stop_scrubbing();
    repeat (100) @(negedge clk);
    for (int d = 0; d < N; d++) begin
      checks++;
      if (dut.g_core[0].u_core.u_scratchpad.mem[SP_SEU0 + d] != 16'(per_dev[d])) begin
        failures++;
        $display("SEU counter of device %0d: %0d, expected %0d", d,
                 dut.g_core[0].u_core.u_scratchpad.mem[SP_SEU0 + d], per_dev[d]);
      end
    end
    checks++;
    if (int'(g_dev[5].u_dev.n_frame_reads) != reads5) begin
      failures++; $display("disabled device 5 was still read");
    end
    checks++; if (n_tie != 0) begin failures++; $display("unexpected tie"); end
    checks++; if (n_reset < 1 + ROUNDS / 4) begin failures++; $display("periodic resets missing: %0d", n_reset); end
    checks++; if (n_bcast == 0) begin failures++; $display("no broadcast correction happened"); end
    $display("upsets placed %0d, logged %0d, frame rewrites %0d (broadcast %0d), core resets %0d, cycles %0d",
             total, logged, n_fix, n_bcast, n_reset, n_cycle);
    checks++; if (logged != total) begin failures++; $display("logged %0d of %0d upsets", logged, total); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
