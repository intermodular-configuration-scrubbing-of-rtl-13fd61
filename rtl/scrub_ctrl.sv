// scrub_ctrl: the scrubbing sequence of one core.
//
// In the paper this sequence is firmware on a small soft processor; here it
// is a state machine doing the same job:
//   1. At the start of every scrubbing cycle read the settings from the
//      scratchpad: device enable mask, number of cycles between resets,
//      number of device rows.
//   2. For every frame address from frame_addr_gen, read the frame from all
//      enabled devices in parallel (frame_port), then go through the frame
//      word by word: vote across the devices, and for every bit where a
//      device differs from the majority send a log record (device, frame
//      address, bit offset, polarity) and count the upset in the device's
//      scratchpad counter.
//   3. If any device differed and no bit was a tie, write the voted frame to
//      exactly the devices that differed (single mode for one device,
//      broadcast for several). Any number of upsets per frame is corrected.
//   4. At the end of a cycle count it in the scratchpad; after the
//      programmed number of cycles wait until the last log line has left
//      the UART (`log_idle`), then raise `rst_req` so that the cores are
//      reset and their scratchpads voted and scrubbed.
// Host commands are taken between frames (or when idle): start/stop
// (kept in the scratchpad, so scrubbing resumes after a reset), upset
// injection (read the frame of one device, flip one bit, write it back, all
// in single mode), table and scratchpad writes. A command arriving while
// another is still pending is dropped.
// The order of steps follows the paper's description; the state machine,
// the scratchpad map (see c3_pkg) and the command handling are this
// design's. All memories have one cycle of read latency.
module scrub_ctrl
  import c3_pkg::*;
#(
  parameter int unsigned N           = N_DEV,
  parameter int unsigned FRAME_WORDS = c3_pkg::FRAME_WORDS,
  parameter int unsigned TBL_AW      = 8,
  localparam int unsigned RAW        = $clog2(FRAME_WORDS)
) (
  input  logic                clk,
  input  logic                rst,
  // host commands
  input  logic                cmd_valid,
  input  host_cmd_t           cmd,
  // scratchpad port A
  output logic                sp_en,
  output logic                sp_we,
  output logic [3:0]          sp_addr,
  output logic [15:0]         sp_wdata,
  input  logic [15:0]         sp_rdata,
  // table writes
  output logic                tbl_we,
  output logic [TBL_AW-1:0]   tbl_addr,
  output logic [15:0]         tbl_wdata,
  // frame address generator
  output logic                fa_start,
  output logic                fa_next,
  output logic [3:0]          fa_rows,
  input  logic                fa_valid,
  input  logic                fa_finished,
  input  logic [15:0]         far_maj,
  input  logic [15:0]         far_min,
  // frame port
  output logic                fp_valid,
  output logic                fp_write,
  output logic [15:0]         fp_far_maj,
  output logic [15:0]         fp_far_min,
  output logic [N-1:0]        fp_mask,
  output logic                fp_src_voted,
  output logic [2:0]          fp_src_dev,
  output logic [N-1:0]        fp_vote_en,
  input  logic                fp_done,
  // frame BRAM port A (used while the frame port is idle)
  output logic                fr_en,
  output logic                fr_we,
  output logic [RAW-1:0]      fr_addr,
  output logic [N-1:0][15:0]  fr_wdata,
  input  logic [N-1:0][15:0]  fr_rdata,
  // log
  output logic                rec_valid,
  output seu_rec_t            rec,
  input  logic                rec_ready,
  input  logic                log_idle,     // formatter and UART have nothing left to send
  // reset request and status
  output logic                rst_req,
  output logic                running,
  output logic                ev_cycle,     // pulse: scrubbing cycle complete
  output logic                ev_fix,       // pulse: a frame was rewritten
  output logic                ev_bcast,     // pulse: ... to several devices
  output logic                ev_tie,       // pulse: a frame had no majority
  output logic                ev_inject     // pulse: an upset was injected
);
  typedef enum logic [4:0] {
    S_BOOT, S_BOOT_W, S_IDLE, S_SET_RD, S_SET_W, S_FA_START, S_NEXTF,
    S_F_READ, S_A_RD, S_A_W, S_A_LATCH, S_A_SCAN, S_A_LOG, S_A_CNT_W, S_A_CNT_WR,
    S_F_FIX, S_F_NEXT, S_CYC_RD, S_CYC_W, S_RESET_DRAIN, S_RESET_WAIT,
    S_CMD, S_J_READ, S_J_RD, S_J_W, S_J_WR, S_J_WRITE
  } state_e;

  state_e               state;
  logic                 run;
  logic                 pend;
  host_cmd_t            pc;
  logic [1:0]           k;
  logic [N-1:0]         en_mask;
  logic [15:0]          period;
  logic [3:0]           rows;
  logic [RAW-1:0]       w;
  logic [N-1:0][15:0]   wbuf;
  logic [N*16-1:0]      dbuf;
  logic [N-1:0]         fix_mask;
  logic                 tie_seen;
  logic                 in_cycle;
  logic                 issued;
  logic [N-1:0][15:0]   v_diff;
  logic [15:0]          v_word, v_tie;
  logic [$clog2(N*16)-1:0] lo;
  logic                 lo_any;
  logic [2:0]           lo_dev;
  logic [3:0]           lo_bit;

  maj_vote_n #(.N(N), .W(16)) u_vote (
    .words(fr_rdata), .en(en_mask), .voted(v_word), .diff(v_diff), .tie(v_tie)
  );

  // lowest pending differing bit of the current word
  always_comb begin
    lo     = '0;
    lo_any = 1'b0;
    for (int j = N * 16 - 1; j >= 0; j--) begin
      if (dbuf[j]) begin
        lo     = ($clog2(N*16))'(j);
        lo_any = 1'b1;
      end
    end
    lo_dev = 3'(lo / 16);
    lo_bit = 4'(lo % 16);
  end

  assign fa_rows  = rows;
  assign running  = run;

  // memory and datapath control
  always_comb begin
    sp_en = 1'b0; sp_we = 1'b0; sp_addr = '0; sp_wdata = '0;
    tbl_we = 1'b0; tbl_addr = pc.addr[TBL_AW-1:0]; tbl_wdata = pc.data;
    fr_en = 1'b0; fr_we = 1'b0; fr_addr = w; fr_wdata = wbuf;
    fa_start = 1'b0; fa_next = 1'b0;
    fp_valid = 1'b0; fp_write = 1'b0; fp_mask = en_mask; fp_src_voted = 1'b0;
    fp_src_dev = pc.dev; fp_vote_en = en_mask;
    fp_far_maj = far_maj; fp_far_min = far_min;
    if (state inside {S_J_READ, S_J_RD, S_J_W, S_J_WR, S_J_WRITE}) begin
      fp_far_maj = pc.far_maj; fp_far_min = pc.far_min;   // injection target frame
    end
    rec_valid = 1'b0;
    rec.dev = lo_dev; rec.far_maj = far_maj; rec.far_min = far_min;
    rec.bit_off = {7'(w), 4'd15 - lo_bit}; rec.pol = wbuf[lo_dev][lo_bit];
    unique case (state)
      S_BOOT:   begin sp_en = 1'b1; sp_addr = SP_RUN; end
      S_SET_RD: begin sp_en = 1'b1; sp_addr = 4'(k); end
      S_FA_START: fa_start = 1'b1;
      S_F_READ: fp_valid = 1'b1;
      S_A_RD:   fr_en = 1'b1;
      S_A_LOG:  begin rec_valid = 1'b1; sp_en = rec_ready; sp_addr = SP_SEU0 + 4'(lo_dev); end
      S_A_CNT_WR: begin
        sp_en = 1'b1; sp_we = 1'b1; sp_addr = SP_SEU0 + 4'(lo_dev); sp_wdata = sp_rdata + 16'd1;
      end
      S_F_FIX: begin
        fp_valid = (fix_mask != '0) && !tie_seen; fp_write = 1'b1; fp_mask = fix_mask;
        fp_src_voted = 1'b1;
      end
      S_F_NEXT: fa_next = 1'b1;
      S_CYC_RD: begin sp_en = 1'b1; sp_addr = SP_CYCLES; end
      S_CYC_W: begin
        sp_en = 1'b1; sp_we = 1'b1; sp_addr = SP_CYCLES;
        sp_wdata = (period != '0 && sp_rdata + 16'd1 >= period) ? 16'd0 : sp_rdata + 16'd1;
      end
      S_CMD: unique case (pc.op)
        CMD_START, CMD_STOP: begin
          sp_en = 1'b1; sp_we = 1'b1; sp_addr = SP_RUN; sp_wdata = {15'd0, pc.op == CMD_START};
        end
        CMD_SP_WR: begin sp_en = 1'b1; sp_we = 1'b1; sp_addr = pc.addr[3:0]; sp_wdata = pc.data; end
        CMD_TBL_WR: tbl_we = 1'b1;
        default: ;
      endcase
      S_J_READ: begin
        fp_valid = 1'b1; fp_mask = N'(1) << pc.dev; fp_vote_en = fp_mask;
      end
      S_J_RD: begin fr_en = 1'b1; fr_addr = RAW'(pc.bit_off[10:4]); end
      S_J_WR: begin
        fr_en = 1'b1; fr_we = 1'b1; fr_addr = RAW'(pc.bit_off[10:4]); fr_wdata = wbuf;
      end
      S_J_WRITE: begin
        fp_valid = 1'b1; fp_write = 1'b1; fp_mask = N'(1) << pc.dev; fp_vote_en = fp_mask;
        fp_src_dev = pc.dev;
      end
      default: ;
    endcase
    fp_valid = fp_valid && !issued;         // one request per operation
  end

  always_ff @(posedge clk) begin
    if (rst || fp_done) issued <= 1'b0;
    else if (fp_valid)  issued <= 1'b1;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state    <= S_BOOT;
      run      <= 1'b0;
      pend     <= 1'b0;
      pc       <= '0;
      k        <= '0;
      en_mask  <= '0;
      period   <= '0;
      rows     <= '0;
      w        <= '0;
      wbuf     <= '0;
      dbuf     <= '0;
      fix_mask <= '0;
      tie_seen <= 1'b0;
      in_cycle <= 1'b0;
      rst_req  <= 1'b0;
      ev_cycle <= 1'b0; ev_fix <= 1'b0; ev_bcast <= 1'b0; ev_tie <= 1'b0; ev_inject <= 1'b0;
    end else begin
      ev_cycle <= 1'b0; ev_fix <= 1'b0; ev_bcast <= 1'b0; ev_tie <= 1'b0; ev_inject <= 1'b0;
      if (cmd_valid && cmd.op != CMD_NONE && !pend) begin
        pend <= 1'b1;
        pc   <= cmd;
      end
      unique case (state)
        S_BOOT:   state <= S_BOOT_W;
        S_BOOT_W: begin run <= sp_rdata[0]; state <= S_IDLE; end
        S_IDLE: begin
          in_cycle <= 1'b0;
          if (pend) begin
            state <= S_CMD;
          end else if (run) begin
            k     <= '0;
            state <= S_SET_RD;
          end
        end
        S_SET_RD: state <= S_SET_W;
        S_SET_W: begin
          unique case (k)
            2'd0: en_mask <= sp_rdata[N-1:0];
            2'd1: period  <= sp_rdata;
            default: rows <= sp_rdata[3:0];
          endcase
          if (k == 2'd2) state <= S_FA_START;
          else begin
            k     <= k + 2'd1;
            state <= S_SET_RD;
          end
        end
        S_FA_START: begin in_cycle <= 1'b1; state <= S_NEXTF; end
        S_NEXTF: begin
          if (fa_finished) state <= S_CYC_RD;
          else if (fa_valid) begin
            if (pend)                 state <= S_CMD;
            else if (!run)            state <= S_IDLE;
            else if (en_mask == '0)   state <= S_F_NEXT;
            else                      state <= S_F_READ;
          end
        end
        S_F_READ: begin
          fix_mask <= '0;
          tie_seen <= 1'b0;
          w        <= '0;
          if (fp_done) state <= S_A_RD;
        end
        S_A_RD: state <= S_A_W;
        S_A_W:  state <= S_A_LATCH;
        S_A_LATCH: begin
          wbuf <= fr_rdata;
          dbuf <= v_diff;
          if (v_tie != '0) tie_seen <= 1'b1;
          for (int d = 0; d < N; d++) if (v_diff[d] != '0) fix_mask[d] <= 1'b1;
          state <= S_A_SCAN;
        end
        S_A_SCAN: begin
          if (lo_any) state <= S_A_LOG;
          else if (w == RAW'(FRAME_WORDS - 1)) state <= S_F_FIX;
          else begin
            w     <= w + 1'b1;
            state <= S_A_RD;
          end
        end
        S_A_LOG:    if (rec_ready) state <= S_A_CNT_W;
        S_A_CNT_W:  state <= S_A_CNT_WR;
        S_A_CNT_WR: begin
          dbuf[lo] <= 1'b0;
          state    <= S_A_SCAN;
        end
        S_F_FIX: begin
          if (tie_seen) begin
            ev_tie <= 1'b1;
            state  <= S_F_NEXT;
          end else if (fix_mask == '0) begin
            state <= S_F_NEXT;
          end else if (fp_done) begin
            ev_fix   <= 1'b1;
            ev_bcast <= (fix_mask & (fix_mask - 1'b1)) != '0;
            state    <= S_F_NEXT;
          end
        end
        S_F_NEXT: state <= S_NEXTF;
        S_CYC_RD: state <= S_CYC_W;
        S_CYC_W: begin
          ev_cycle <= 1'b1;
          in_cycle <= 1'b0;
          if (period != '0 && sp_rdata + 16'd1 >= period) begin
            state <= S_RESET_DRAIN;
          end else begin
            state <= S_IDLE;
          end
        end
        S_RESET_DRAIN: if (log_idle) begin
          rst_req <= 1'b1;
          state   <= S_RESET_WAIT;
        end
        S_RESET_WAIT: ;                       // held until the cores are reset
        S_CMD: begin
          pend <= 1'b0;
          unique case (pc.op)
            CMD_START:  run <= 1'b1;
            CMD_STOP:   run <= 1'b0;
            default: ;
          endcase
          if (pc.op == CMD_INJECT) state <= S_J_READ;
          else state <= in_cycle ? S_NEXTF : S_IDLE;
        end
        S_J_READ: if (fp_done) state <= S_J_RD;
        S_J_RD:   state <= S_J_W;
        S_J_W: begin
          wbuf <= fr_rdata;
          wbuf[pc.dev][4'd15 - pc.bit_off[3:0]] <= ~fr_rdata[pc.dev][4'd15 - pc.bit_off[3:0]];
          state <= S_J_WR;
        end
        S_J_WR: state <= S_J_WRITE;
        S_J_WRITE: if (fp_done) begin
          ev_inject <= 1'b1;
          state     <= in_cycle ? S_NEXTF : S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (rst) rec_valid && !rec_ready |=> rec_valid && $stable(rec));
endmodule
