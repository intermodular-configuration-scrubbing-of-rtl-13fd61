// tb_frame_port: frame port + JTAG engine + frame BRAM against six
// behavioural target FPGAs. Reads a frame in parallel from all six and
// compares every lane with the golden frame; finds an injected upset in the
// right lane and bit; writes the voted frame to one device (single mode) and
// to two devices (broadcast) and checks that only they were written and are
// repaired; writes one device's lane to another; checks the JTAG bit counts
// of a read and a write against the sequence lengths.
module tb_frame_port;
  import c3_pkg::*;
  localparam int N = 6, FW = 65, DIV = 8;
  localparam int READ_BITS  = 6 + (4 + 6 + 2) + 3 + 11 * 16 + 2 + (4 + 6 + 2) + 3 + FW * 16 + 2;
  localparam int WRITE_BITS = 6 + (4 + 6 + 2) + 3 + (10 + FW + 1) * 16 + 2;
  int checks = 0, failures = 0;
  logic clk = 0, rst = 1;

  logic cmd_valid, cmd_write, src_voted, busy, done;
  logic [15:0] far_maj, far_min;
  logic [N-1:0] mask, vote_en;
  logic [2:0] src_dev;
  logic ram_en, ram_we;
  logic [6:0] ram_addr;
  logic [N-1:0][15:0] ram_wdata, ram_rdata;
  logic op_valid, op_ready, op_done;
  jtag_op_t op;
  logic [N-1:0][15:0] op_cap;
  logic [15:0] op_cap_voted;
  logic [N-1:0] tck, tdo;
  logic tms, tdi;
  logic tb_en;
  logic [6:0] tb_addr;

  frame_port #(.N(N), .FRAME_WORDS(FW)) dut (
    .clk, .rst, .cmd_valid, .cmd_write, .far_maj, .far_min, .mask, .src_voted, .src_dev,
    .vote_en, .busy, .done, .ram_en, .ram_we, .ram_addr, .ram_wdata, .ram_rdata,
    .op_valid, .op, .op_ready, .op_done, .op_cap
  );
  jtag_engine #(.N(N), .TCK_DIV(DIV)) u_jtag (
    .clk, .rst, .op_valid, .op, .op_ready, .done(op_done), .cap(op_cap), .cap_voted(op_cap_voted),
    .tck, .tms, .tdi, .tdo
  );
  dp_ram #(.W(N * 16), .DEPTH(FW)) u_ram (
    .clk, .a_en(busy ? ram_en : tb_en), .a_we(busy && ram_we), .a_addr(busy ? ram_addr : tb_addr),
    .a_wdata(ram_wdata), .a_rdata(ram_rdata),
    .b_en(1'b0), .b_we(1'b0), .b_addr('0), .b_wdata('0), .b_rdata()
  );
  for (genvar d = 0; d < N; d++) begin : g_dev
    s6_target_model #(.FRAME_WORDS(FW)) u_dev (.tck(tck[d]), .tms, .tdi, .tdo(tdo[d]));
  end

  always #5 clk = ~clk;

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input logic w, input logic [N-1:0] m, input logic sv, input int sd, output int cycles);
    @(negedge clk);
    cmd_valid = 1; cmd_write = w; mask = m; src_voted = sv; src_dev = 3'(sd); vote_en = '1;
    @(negedge clk); cmd_valid = 0;
    cycles = 1;
    while (!done) begin @(negedge clk); cycles++; end
  endtask

  // compare all masked lanes of the frame BRAM with the devices' contents
  task automatic check_lanes(input logic [N-1:0] m);
    for (int w = 0; w < FW; w++) begin
      @(negedge clk); tb_en = 1; tb_addr = 7'(w);
      @(negedge clk); tb_en = 0;
      for (int d = 0; d < N; d++) if (m[d]) begin
        logic [15:0] e;
        unique case (d)
          0: e = g_dev[0].u_dev.rd_word(far_maj, far_min, w);
          1: e = g_dev[1].u_dev.rd_word(far_maj, far_min, w);
          2: e = g_dev[2].u_dev.rd_word(far_maj, far_min, w);
          3: e = g_dev[3].u_dev.rd_word(far_maj, far_min, w);
          4: e = g_dev[4].u_dev.rd_word(far_maj, far_min, w);
          default: e = g_dev[5].u_dev.rd_word(far_maj, far_min, w);
        endcase
        checks++;
        if (ram_rdata[d] !== e) begin failures++; $display("lane %0d word %0d: %h exp %h", d, w, ram_rdata[d], e); end
      end
    end
  endtask

  function automatic int bad(input int d);
    unique case (d)
      0: return g_dev[0].u_dev.count_bad(far_maj, far_min);
      1: return g_dev[1].u_dev.count_bad(far_maj, far_min);
      2: return g_dev[2].u_dev.count_bad(far_maj, far_min);
      3: return g_dev[3].u_dev.count_bad(far_maj, far_min);
      4: return g_dev[4].u_dev.count_bad(far_maj, far_min);
      default: return g_dev[5].u_dev.count_bad(far_maj, far_min);
    endcase
  endfunction

  function automatic int writes(input int d);
    unique case (d)
      0: return g_dev[0].u_dev.n_frame_writes;
      1: return g_dev[1].u_dev.n_frame_writes;
      2: return g_dev[2].u_dev.n_frame_writes;
      3: return g_dev[3].u_dev.n_frame_writes;
      4: return g_dev[4].u_dev.n_frame_writes;
      default: return g_dev[5].u_dev.n_frame_writes;
    endcase
  endfunction

  initial begin
    int cyc;
    int w0 [N];
    cmd_valid = 0; cmd_write = 0; mask = '0; src_voted = 0; src_dev = 0; vote_en = '1;
    tb_en = 0; tb_addr = '0;
    far_maj = 16'h1203; far_min = 16'h0005;
    repeat (3) @(negedge clk); rst = 0;

    // 1. parallel read of a clean frame
    run(1'b0, '1, 1'b0, 0, cyc);
    check_lanes('1);
    checks++;
    if (cyc < READ_BITS * DIV || cyc > READ_BITS * DIV + 100 * 4) begin
      failures++; $display("read took %0d cycles, %0d bits", cyc, READ_BITS);
    end
    checks++;
    if (g_dev[0].u_dev.n_frame_reads != 1 || g_dev[5].u_dev.n_frame_reads != 1) begin
      failures++; $display("frame read not completed by the targets");
    end

    // 2. an upset in device 2 shows up in lane 2 only
    g_dev[2].u_dev.flip(far_maj, far_min, 100);
    run(1'b0, '1, 1'b0, 0, cyc);
    check_lanes('1);
    @(negedge clk); tb_en = 1; tb_addr = 7'd6;
    @(negedge clk); tb_en = 0;
    checks++;
    if ((ram_rdata[2] ^ ram_rdata[0]) !== 16'h0800) begin failures++; $display("upset not at bit 100"); end

    // 3. single-mode write of the voted frame repairs device 2 only
    for (int d = 0; d < N; d++) w0[d] = writes(d);
    run(1'b1, 6'b000100, 1'b1, 0, cyc);
    checks++;
    if (cyc < WRITE_BITS * DIV || cyc > WRITE_BITS * DIV + 100 * 6) begin
      failures++; $display("write took %0d cycles, %0d bits", cyc, WRITE_BITS);
    end
    for (int d = 0; d < N; d++) begin
      checks += 2;
      if (bad(d) != 0) begin failures++; $display("dev %0d still bad", d); end
      if (writes(d) - w0[d] != (d == 2)) begin failures++; $display("dev %0d write count", d); end
    end

    // 4. broadcast write repairs two devices at once (upsets of both polarities)
    far_maj = 16'h2010; far_min = 16'h0021;
    g_dev[1].u_dev.flip(far_maj, far_min, 0);
    g_dev[1].u_dev.flip(far_maj, far_min, 1039);
    g_dev[4].u_dev.flip(far_maj, far_min, 517);
    g_dev[4].u_dev.flip(far_maj, far_min, 518);
    run(1'b0, '1, 1'b0, 0, cyc);
    check_lanes('1);
    run(1'b1, 6'b010010, 1'b1, 0, cyc);
    for (int d = 0; d < N; d++) begin
      checks++;
      if (bad(d) != 0) begin failures++; $display("dev %0d still bad after broadcast", d); end
    end

    // 5. copy lane 0 into device 3
    g_dev[3].u_dev.flip(far_maj, far_min, 77);
    run(1'b0, 6'b001001, 1'b0, 0, cyc);
    run(1'b1, 6'b001000, 1'b0, 0, cyc);
    checks++;
    if (bad(3) != 0) begin failures++; $display("lane copy failed"); end

    for (int d = 0; d < N; d++) begin
      checks++;
      if (d == 0 && g_dev[0].u_dev.n_errors != 0) failures++;
    end
    checks++;
    if (g_dev[1].u_dev.n_errors + g_dev[3].u_dev.n_errors + g_dev[4].u_dev.n_errors != 0) begin
      failures++; $display("target saw malformed packets");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
