// c3_core: one complete scrubbing core (one of three redundant copies).
//
// Host bytes arrive on `rxd` (uart_rx) and are decoded by cmd_parser into
// commands for scrub_ctrl. scrub_ctrl steps frame_addr_gen through the
// device's frame addresses, has frame_port read each frame from all enabled
// targets in parallel through jtag_engine into the frame BRAM, votes the
// frame, logs every upset through seu_log_fmt and uart_tx, and writes the
// voted frame back to the devices that differ.
//
// The core owns three memories, each a dp_ram whose port A the core uses:
//   frame BRAM   FRAME_WORDS words of N x 16 bits (one lane per device)
//   table BRAM   2**TBL_AW frame-address table entries of 16 bits
//   scratchpad   16 words of 16 bits (settings and SEU counters)
// Port B of each, and the port A write strobes and addresses, are brought
// out so that c3_top can vote and repair the three cores' copies. The frame
// BRAM's port A is shared: frame_port drives it while it is busy, scrub_ctrl
// otherwise. The table's port A is shared by table writes and the address
// generator, which never run at the same time.
module c3_core
  import c3_pkg::*;
#(
  parameter int unsigned N           = N_DEV,
  parameter int unsigned FRAME_WORDS = c3_pkg::FRAME_WORDS,
  parameter int unsigned TBL_AW      = 8,
  parameter int unsigned TCK_DIV     = c3_pkg::TCK_DIV,
  parameter int unsigned BAUD_DIV    = c3_pkg::BAUD_DIV,
  localparam int unsigned RAW        = $clog2(FRAME_WORDS)
) (
  input  logic                clk,
  input  logic                rst,
  // host UART
  input  logic                rxd,
  output logic                txd,
  // target JTAG
  output logic [N-1:0]        tck,
  output logic                tms,
  output logic                tdi,
  input  logic [N-1:0]        tdo,
  // status
  output logic                rst_req,
  output logic                running,
  output logic [4:0]          events,     // {inject, tie, bcast, fix, cycle}
  // frame BRAM: port A write activity, port B
  output logic                fr_a_we,
  output logic [RAW-1:0]      fr_a_addr,
  input  logic                fr_b_en,
  input  logic                fr_b_we,
  input  logic [RAW-1:0]      fr_b_addr,
  input  logic [N*16-1:0]     fr_b_wdata,
  output logic [N*16-1:0]     fr_b_rdata,
  // table BRAM
  output logic                tb_a_we,
  output logic [TBL_AW-1:0]   tb_a_addr,
  input  logic                tb_b_en,
  input  logic                tb_b_we,
  input  logic [TBL_AW-1:0]   tb_b_addr,
  input  logic [15:0]         tb_b_wdata,
  output logic [15:0]         tb_b_rdata,
  // scratchpad
  output logic                sp_a_we,
  output logic [3:0]          sp_a_addr,
  input  logic                sp_b_en,
  input  logic                sp_b_we,
  input  logic [3:0]          sp_b_addr,
  input  logic [15:0]         sp_b_wdata,
  output logic [15:0]         sp_b_rdata
);
  // UART and commands
  logic       rx_valid;
  logic [7:0] rx_data;
  logic       cmd_valid;
  host_cmd_t  cmd;
  logic       tx_valid, tx_ready;
  logic [7:0] tx_data;
  logic       rec_valid, rec_ready;
  seu_rec_t   rec;

  // scratchpad / table
  logic        sp_en, sp_we;
  logic [3:0]  sp_addr;
  logic [15:0] sp_wdata, sp_rdata;
  logic              tblw_we;
  logic [TBL_AW-1:0] tblw_addr;
  logic [15:0]       tblw_data;
  logic              fa_tbl_en;
  logic [TBL_AW-1:0] fa_tbl_addr;
  logic [15:0]       tbl_rdata;

  // frame address generator
  logic        fa_start, fa_next, fa_valid, fa_finished;
  logic [3:0]  fa_rows;
  logic [15:0] far_maj, far_min;

  // frame port
  logic           fp_valid, fp_write, fp_src_voted, fp_done, fp_busy;
  logic [15:0]    fp_far_maj, fp_far_min;
  logic [N-1:0]   fp_mask, fp_vote_en;
  logic [2:0]     fp_src_dev;
  logic           fpr_en, fpr_we;
  logic [RAW-1:0] fpr_addr;
  logic [N-1:0][15:0] fpr_wdata;
  logic           scr_en, scr_we;
  logic [RAW-1:0] scr_addr;
  logic [N-1:0][15:0] scr_wdata;
  logic [N-1:0][15:0] fr_rdata;
  logic           fr_en, fr_we;
  logic [RAW-1:0] fr_addr;
  logic [N-1:0][15:0] fr_wdata;

  // JTAG engine
  logic          op_valid, op_ready, op_done;
  jtag_op_t      op;
  logic [N-1:0][15:0] op_cap;
  logic [15:0]   op_cap_voted;

  uart_rx #(.BAUD_DIV(BAUD_DIV)) u_rx (
    .clk, .rst, .rxd, .valid(rx_valid), .data(rx_data)
  );

  cmd_parser u_cmd (
    .clk, .rst, .rx_valid, .rx_data, .valid(cmd_valid), .cmd
  );

  scrub_ctrl #(.N(N), .FRAME_WORDS(FRAME_WORDS), .TBL_AW(TBL_AW)) u_ctrl (
    .clk, .rst, .cmd_valid, .cmd,
    .sp_en, .sp_we, .sp_addr, .sp_wdata, .sp_rdata,
    .tbl_we(tblw_we), .tbl_addr(tblw_addr), .tbl_wdata(tblw_data),
    .fa_start, .fa_next, .fa_rows, .fa_valid, .fa_finished, .far_maj, .far_min,
    .fp_valid, .fp_write, .fp_far_maj, .fp_far_min, .fp_mask, .fp_src_voted, .fp_src_dev, .fp_vote_en, .fp_done,
    .fr_en(scr_en), .fr_we(scr_we), .fr_addr(scr_addr), .fr_wdata(scr_wdata), .fr_rdata,
    .rec_valid, .rec, .rec_ready, .log_idle(rec_ready && tx_ready),
    .rst_req, .running,
    .ev_cycle(events[0]), .ev_fix(events[1]), .ev_bcast(events[2]),
    .ev_tie(events[3]), .ev_inject(events[4])
  );

  frame_addr_gen #(.TBL_AW(TBL_AW)) u_fa (
    .clk, .rst, .start(fa_start), .next(fa_next), .rows(fa_rows),
    .valid(fa_valid), .finished(fa_finished), .far_maj, .far_min,
    .tbl_en(fa_tbl_en), .tbl_addr(fa_tbl_addr), .tbl_rdata
  );

  frame_port #(.N(N), .FRAME_WORDS(FRAME_WORDS)) u_fp (
    .clk, .rst,
    .cmd_valid(fp_valid), .cmd_write(fp_write), .far_maj(fp_far_maj), .far_min(fp_far_min),
    .mask(fp_mask), .src_voted(fp_src_voted), .src_dev(fp_src_dev), .vote_en(fp_vote_en),
    .busy(fp_busy), .done(fp_done),
    .ram_en(fpr_en), .ram_we(fpr_we), .ram_addr(fpr_addr), .ram_wdata(fpr_wdata),
    .ram_rdata(fr_rdata),
    .op_valid, .op, .op_ready, .op_done, .op_cap
  );

  jtag_engine #(.N(N), .TCK_DIV(TCK_DIV)) u_jtag (
    .clk, .rst, .op_valid, .op, .op_ready, .done(op_done),
    .cap(op_cap), .cap_voted(op_cap_voted), .tck, .tms, .tdi, .tdo
  );

  seu_log_fmt u_log (
    .clk, .rst, .rec_valid, .rec, .rec_ready, .tx_valid, .tx_data, .tx_ready
  );

  uart_tx #(.BAUD_DIV(BAUD_DIV)) u_tx (
    .clk, .rst, .valid(tx_valid), .data(tx_data), .ready(tx_ready), .txd
  );

  // frame BRAM port A: frame port while busy, controller otherwise. Port-A
  // writes are blocked during reset, so that whatever state the registers
  // power up in cannot write the memories before the reset has taken hold.
  always_comb begin
    if (fp_busy) begin
      fr_en = fpr_en; fr_we = fpr_we; fr_addr = fpr_addr; fr_wdata = fpr_wdata;
    end else begin
      fr_en = scr_en; fr_we = scr_we; fr_addr = scr_addr; fr_wdata = scr_wdata;
    end
  end

  dp_ram #(.W(N * 16), .DEPTH(FRAME_WORDS)) u_frame_ram (
    .clk,
    .a_en(fr_en), .a_we(fr_we && !rst), .a_addr(fr_addr), .a_wdata(fr_wdata), .a_rdata(fr_rdata),
    .b_en(fr_b_en), .b_we(fr_b_we), .b_addr(fr_b_addr), .b_wdata(fr_b_wdata), .b_rdata(fr_b_rdata)
  );

  dp_ram #(.W(16), .DEPTH(2 ** TBL_AW)) u_table_ram (
    .clk,
    .a_en(tblw_we || fa_tbl_en), .a_we(tblw_we && !rst),
    .a_addr(tblw_we ? tblw_addr : fa_tbl_addr), .a_wdata(tblw_data), .a_rdata(tbl_rdata),
    .b_en(tb_b_en), .b_we(tb_b_we), .b_addr(tb_b_addr), .b_wdata(tb_b_wdata), .b_rdata(tb_b_rdata)
  );

  dp_ram #(.W(16), .DEPTH(16)) u_scratchpad (
    .clk,
    .a_en(sp_en), .a_we(sp_we && !rst), .a_addr(sp_addr), .a_wdata(sp_wdata), .a_rdata(sp_rdata),
    .b_en(sp_b_en), .b_we(sp_b_we), .b_addr(sp_b_addr), .b_wdata(sp_b_wdata), .b_rdata(sp_b_rdata)
  );

  assign fr_a_we   = fr_we;
  assign fr_a_addr = fr_addr;
  assign tb_a_we   = tblw_we;
  assign tb_a_addr = tblw_addr;
  assign sp_a_we   = sp_we;
  assign sp_a_addr = sp_addr;
endmodule
