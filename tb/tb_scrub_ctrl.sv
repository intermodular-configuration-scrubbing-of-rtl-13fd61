// tb_scrub_ctrl: the scrubbing controller with its datapath (frame address
// generator, frame port, JTAG engine, memories) against six behavioural
// target FPGAs; commands are applied directly and log records are taken
// directly from the controller.
// Checks: settings and table writes; injection of an upset into one device;
// a scrubbing cycle that logs exactly the upsets present (device, frame
// address, bit offset, polarity), repairs them with single and broadcast
// writes, and counts them per device in the scratchpad; a 3-3 tie that is
// logged but not corrected; the reset request after the programmed number
// of cycles; resumption of scrubbing after a reset; stop.
module tb_scrub_ctrl;
  import c3_pkg::*;
  localparam int N = 6, FW = 65, DIV = 8, TAW = 4;
  int checks = 0, failures = 0;
  logic clk = 0, rst = 1;

  logic cmd_valid; host_cmd_t cmd;
  logic sp_en, sp_we; logic [3:0] sp_addr; logic [15:0] sp_wdata, sp_rdata;
  logic tbl_we; logic [TAW-1:0] tbl_addr; logic [15:0] tbl_wdata;
  logic fa_start, fa_next, fa_valid, fa_finished; logic [3:0] fa_rows;
  logic [15:0] far_maj, far_min;
  logic fp_valid, fp_write, fp_src_voted, fp_done, fp_busy;
  logic [15:0] fp_far_maj, fp_far_min;
  logic [N-1:0] fp_mask, fp_vote_en; logic [2:0] fp_src_dev;
  logic scr_en, scr_we; logic [6:0] scr_addr; logic [N-1:0][15:0] scr_wdata;
  logic fpr_en, fpr_we; logic [6:0] fpr_addr; logic [N-1:0][15:0] fpr_wdata, fr_rdata;
  logic rec_valid, rec_ready; seu_rec_t rec;
  logic rst_req, running, ev_cycle, ev_fix, ev_bcast, ev_tie, ev_inject;
  logic fa_tbl_en; logic [TAW-1:0] fa_tbl_addr; logic [15:0] tbl_rdata;
  logic op_valid, op_ready, op_done; jtag_op_t op; logic [N-1:0][15:0] op_cap; logic [15:0] op_cv;
  logic [N-1:0] tck, tdo; logic tms, tdi;
  logic spb_en; logic [3:0] spb_addr; logic [15:0] spb_rdata;

  scrub_ctrl #(.N(N), .FRAME_WORDS(FW), .TBL_AW(TAW)) dut (
    .clk, .rst, .cmd_valid, .cmd, .sp_en, .sp_we, .sp_addr, .sp_wdata, .sp_rdata,
    .tbl_we, .tbl_addr, .tbl_wdata, .fa_start, .fa_next, .fa_rows, .fa_valid, .fa_finished,
    .far_maj, .far_min, .fp_valid, .fp_write, .fp_far_maj, .fp_far_min, .fp_mask, .fp_src_voted, .fp_src_dev, .fp_vote_en,
    .fp_done, .fr_en(scr_en), .fr_we(scr_we), .fr_addr(scr_addr), .fr_wdata(scr_wdata), .fr_rdata,
    .rec_valid, .rec, .rec_ready, .log_idle(1'b1), .rst_req, .running, .ev_cycle, .ev_fix, .ev_bcast, .ev_tie, .ev_inject
  );
  frame_addr_gen #(.TBL_AW(TAW)) u_fa (
    .clk, .rst, .start(fa_start), .next(fa_next), .rows(fa_rows), .valid(fa_valid),
    .finished(fa_finished), .far_maj, .far_min, .tbl_en(fa_tbl_en), .tbl_addr(fa_tbl_addr), .tbl_rdata
  );
  frame_port #(.N(N), .FRAME_WORDS(FW)) u_fp (
    .clk, .rst, .cmd_valid(fp_valid), .cmd_write(fp_write), .far_maj(fp_far_maj), .far_min(fp_far_min), .mask(fp_mask),
    .src_voted(fp_src_voted), .src_dev(fp_src_dev), .vote_en(fp_vote_en), .busy(fp_busy), .done(fp_done),
    .ram_en(fpr_en), .ram_we(fpr_we), .ram_addr(fpr_addr), .ram_wdata(fpr_wdata), .ram_rdata(fr_rdata),
    .op_valid, .op, .op_ready, .op_done, .op_cap
  );
  jtag_engine #(.N(N), .TCK_DIV(DIV)) u_jtag (
    .clk, .rst, .op_valid, .op, .op_ready, .done(op_done), .cap(op_cap), .cap_voted(op_cv),
    .tck, .tms, .tdi, .tdo
  );
  dp_ram #(.W(N * 16), .DEPTH(FW)) u_fram (
    .clk, .a_en(fp_busy ? fpr_en : scr_en), .a_we(fp_busy ? fpr_we : scr_we),
    .a_addr(fp_busy ? fpr_addr : scr_addr), .a_wdata(fp_busy ? fpr_wdata : scr_wdata), .a_rdata(fr_rdata),
    .b_en(1'b0), .b_we(1'b0), .b_addr('0), .b_wdata('0), .b_rdata()
  );
  dp_ram #(.W(16), .DEPTH(16)) u_tram (
    .clk, .a_en(tbl_we || fa_tbl_en), .a_we(tbl_we), .a_addr(tbl_we ? tbl_addr : fa_tbl_addr),
    .a_wdata(tbl_wdata), .a_rdata(tbl_rdata), .b_en(1'b0), .b_we(1'b0), .b_addr('0), .b_wdata('0), .b_rdata()
  );
  dp_ram #(.W(16), .DEPTH(16)) u_sp (
    .clk, .a_en(sp_en), .a_we(sp_we), .a_addr(sp_addr), .a_wdata(sp_wdata), .a_rdata(sp_rdata),
    .b_en(spb_en), .b_we(1'b0), .b_addr(spb_addr), .b_wdata('0), .b_rdata(spb_rdata)
  );
  for (genvar d = 0; d < N; d++) begin : g_dev
    s6_target_model #(.FRAME_WORDS(FW)) u_dev (.tck(tck[d]), .tms, .tdi, .tdo(tdo[d]));
  end

  always #5 clk = ~clk;

  // log capture
  seu_rec_t logq[$];
  int n_cycle = 0, n_fix = 0, n_bcast = 0, n_tie = 0, n_inject = 0;
  always @(negedge clk) rec_ready = ($urandom % 4) == 0;
  always @(posedge clk) if (!rst) begin
    if (rec_valid && rec_ready) logq.push_back(rec);
    n_cycle += int'(ev_cycle); n_fix += int'(ev_fix); n_bcast += int'(ev_bcast);
    n_tie += int'(ev_tie); n_inject += int'(ev_inject);
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send(input cmd_e o, input logic [7:0] a = 0, input logic [15:0] d = 0,
                      input int dev = 0, input logic [15:0] mj = 0, input logic [15:0] mn = 0,
                      input int b = 0);
    @(negedge clk);
    cmd = '0; cmd.op = o; cmd.addr = a; cmd.data = d; cmd.dev = 3'(dev);
    cmd.far_maj = mj; cmd.far_min = mn; cmd.bit_off = 11'(b);
    cmd_valid = 1;
    @(negedge clk); cmd_valid = 0;
    repeat (20) @(negedge clk);
  endtask

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

  function automatic int bad(input int d, input logic [15:0] mj, input logic [15:0] mn);
    unique case (d)
      0: return g_dev[0].u_dev.count_bad(mj, mn);
      1: return g_dev[1].u_dev.count_bad(mj, mn);
      2: return g_dev[2].u_dev.count_bad(mj, mn);
      3: return g_dev[3].u_dev.count_bad(mj, mn);
      4: return g_dev[4].u_dev.count_bad(mj, mn);
      default: return g_dev[5].u_dev.count_bad(mj, mn);
    endcase
  endfunction

  function automatic logic gbit(input logic [15:0] mj, input logic [15:0] mn, input int b);
    logic [15:0] g;
    g = g_dev[0].u_dev.gold(mj, mn, b / 16);
    return g[15 - b % 16];
  endfunction

  task automatic sp_read(input int a, output logic [15:0] v);
    @(negedge clk); spb_en = 1; spb_addr = 4'(a);
    @(negedge clk); spb_en = 0; v = spb_rdata;
  endtask

  // the three frames of the test device: rows=1, column 0 has 2 minors,
  // column 1 (block 1) has 1 minor and is the last
  localparam logic [15:0] F0M = 16'h0000, F1M = 16'h0001, F2M = 16'h1001;

  task automatic expect_log(input seu_rec_t e);
    int hit;
    hit = -1;
    for (int i = 0; i < logq.size(); i++) if (logq[i] == e) hit = i;
    checks++;
    if (hit < 0) begin failures++; $display("missing log: dev %0d far %h %h bit %0d pol %0d", e.dev, e.far_maj, e.far_min, e.bit_off, e.pol); end
    else logq.delete(hit);
  endtask

  function automatic seu_rec_t mk(input int d, input logic [15:0] mj, input logic [15:0] mn, input int b);
    seu_rec_t r;
    r.dev = 3'(d); r.far_maj = mj; r.far_min = mn; r.bit_off = 11'(b); r.pol = !gbit(mj, mn, b);
    return r;
  endfunction

  initial begin
    logic [15:0] v;
    cmd_valid = 0; cmd = '0; spb_en = 0; spb_addr = '0;
    repeat (3) @(negedge clk); rst = 0;
    repeat (5) @(negedge clk);
    checks++; if (running) begin failures++; $display("running after reset"); end

    // settings and table
    send(CMD_SP_WR, SP_ENABLE, 16'h003F);
    send(CMD_SP_WR, SP_PERIOD, 16'd2);
    send(CMD_SP_WR, SP_ROWS, 16'd1);
    send(CMD_TBL_WR, 8'd0, 16'h0002);
    send(CMD_TBL_WR, 8'd1, 16'h9001);
    sp_read(SP_PERIOD, v); checks++; if (v !== 16'd2) failures++;

    // injection into device 2, frame 1, bit 33
    send(CMD_INJECT, 0, 0, 2, 16'h0000, F1M, 33);
    while (n_inject == 0) @(negedge clk);
    checks++; if (bad(2, 16'h0000, F1M) != 1) begin failures++; $display("inject failed"); end
    checks++; if (logq.size() != 0) failures++;

    // more upsets: two devices in frame 2 (broadcast fix), two bits of one device in frame 0
    flip(0, 16'h1001, 16'h0000, 500);
    flip(5, 16'h1001, 16'h0000, 500);
    flip(3, 16'h0000, 16'h0000, 0);
    flip(3, 16'h0000, 16'h0000, 1039);

    send(CMD_START);
    while (n_cycle == 0) @(negedge clk);
    checks++; if (!running) failures++;
    expect_log(mk(2, 16'h0000, F1M, 33));
    expect_log(mk(0, 16'h1001, 16'h0000, 500));
    expect_log(mk(5, 16'h1001, 16'h0000, 500));
    expect_log(mk(3, 16'h0000, 16'h0000, 0));
    expect_log(mk(3, 16'h0000, 16'h0000, 1039));
    checks++; if (logq.size() != 0) begin failures++; $display("%0d extra log records", logq.size()); end
    for (int d = 0; d < N; d++) begin
      checks++;
      if (bad(d, 0, 0) + bad(d, 0, F1M) + bad(d, 16'h1001, 0) != 0) begin failures++; $display("dev %0d not repaired", d); end
    end
    checks++; if (n_fix != 3 || n_bcast != 1) begin failures++; $display("fix %0d bcast %0d", n_fix, n_bcast); end
    sp_read(SP_SEU0 + 3, v); checks++; if (v !== 16'd2) begin failures++; $display("dev3 count %0d", v); end
    sp_read(SP_SEU0 + 0, v); checks++; if (v !== 16'd1) failures++;

    // a 3-3 tie is logged (six records) but not written back; period 2
    // then raises the reset request at the end of the second cycle
    flip(0, 16'h0000, F1M, 7); flip(1, 16'h0000, F1M, 7); flip(2, 16'h0000, F1M, 7);
    while (!rst_req) @(negedge clk);
    repeat (2) @(negedge clk);
    checks++; if (n_tie != 1) begin failures++; $display("tie %0d", n_tie); end
    checks++; if (n_cycle != 2) begin failures++; $display("cycles %0d", n_cycle); end
    checks++; if (bad(0, 0, F1M) != 1 || bad(4, 0, F1M) != 0) begin failures++; $display("tie frame was written"); end
    checks++; if (logq.size() != 0) begin failures++; $display("tie bits were logged as upsets"); end
    sp_read(SP_CYCLES, v); checks++; if (v !== 16'd0) failures++;
    flip(0, 16'h0000, F1M, 7); flip(1, 16'h0000, F1M, 7); flip(2, 16'h0000, F1M, 7);

    // reset: scrubbing resumes because the run flag is kept in the scratchpad
    @(negedge clk); rst = 1; repeat (2) @(negedge clk); rst = 0;
    flip(4, 16'h1001, 16'h0000, 3);
    while (n_cycle < 3) @(negedge clk);
    expect_log(mk(4, 16'h1001, 16'h0000, 3));
    checks++; if (bad(4, 16'h1001, 0) != 0) failures++;

    send(CMD_STOP);
    repeat (40000) @(negedge clk);
    checks++; if (running) begin failures++; $display("did not stop"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
