// frame_port: reads or writes one configuration frame of the target FPGAs.
//
// A read loads the frame at (far_maj, far_min) from every device in `mask`
// in parallel ("parallel readback"): each device's TDO is captured into its
// own 16-bit lane of the frame BRAM, word i of the frame at address i. A
// write sends one frame to every device in `mask` (one device: single mode;
// several: broadcast); the data are either lane `src_dev` of the frame BRAM
// or the bitwise majority of the lanes enabled in `vote_en`.
//
// The JTAG sequences, built from jtag_engine operations, are:
//   read : IR=CFG_IN; DR = SYNC AA99 5566, write FAR_MAJ/FAR_MIN, CMD=RCFG,
//          type-2 read of FDRO with count FRAME_WORDS, NOOP;
//          IR=CFG_OUT; DR = FRAME_WORDS words shifted out and captured.
//   write: IR=CFG_IN; DR = SYNC, FAR, CMD=WCFG, type-2 write of FDRI with
//          count FRAME_WORDS, FRAME_WORDS data words, NOOP.
// Each access begins with five TMS=1 clocks and one TMS=0 clock, which
// brings every target's TAP to Run-Test/Idle from any state; every DR/IR
// scan then starts and ends in Run-Test/Idle. These packet words are
// a simplified form of the Spartan-6 configuration interface (no pad frame,
// CRC or desync); the paper does not give the protocol. Words go MSB first.
//
// Timing: about (header + data words) x 16 x TCK_DIV cycles plus a few
// cycles per operation; `done` pulses when the last TAP walk has finished.
// The RAM write data of a read are the engine's captured TDO words, passed
// through without a register: the engine holds them stable until its next
// operation.
module frame_port
  import c3_pkg::*;
#(
  parameter int unsigned N           = N_DEV,
  parameter int unsigned FRAME_WORDS = c3_pkg::FRAME_WORDS,
  localparam int unsigned RAW        = $clog2(FRAME_WORDS)
) (
  input  logic                 clk,
  input  logic                 rst,
  // command
  input  logic                 cmd_valid,
  input  logic                 cmd_write,
  input  logic [15:0]          far_maj,
  input  logic [15:0]          far_min,
  input  logic [N-1:0]         mask,
  input  logic                 src_voted,
  input  logic [2:0]           src_dev,
  input  logic [N-1:0]         vote_en,
  output logic                 busy,
  output logic                 done,
  // frame BRAM port A (word-wide over all lanes)
  output logic                 ram_en,
  output logic                 ram_we,
  output logic [RAW-1:0]       ram_addr,
  output logic [N-1:0][15:0]   ram_wdata,
  input  logic [N-1:0][15:0]   ram_rdata,
  // JTAG engine
  output logic                 op_valid,
  output jtag_op_t             op,
  input  logic                 op_ready,
  input  logic                 op_done,
  input  logic [N-1:0][15:0]   op_cap
);
  localparam int unsigned NHDR = 10;   // header words before the data/NOOP

  typedef enum logic [3:0] {
    P_IDLE, P_TAP_RESET, P_IR_ENTER, P_IR_SHIFT, P_IR_EXIT, P_DR_ENTER,
    P_HDR, P_DATA, P_NOOP, P_DR_EXIT, P_DONE
  } phase_e;
  typedef enum logic [1:0] {S_FETCH, S_WAIT_RAM, S_ISSUE, S_RUN} sub_e;

  phase_e       ph;
  sub_e         sub;
  logic [7:0]   idx;
  logic         wr, second_ir;
  logic [15:0]  fmaj, fmin;
  logic [N-1:0] msk, ven;
  logic         sv;
  logic [2:0]   sdev;
  logic [15:0]  data_word;
  logic [15:0]  voted_word;
  logic [N-1:0][15:0] vdiff;
  logic [15:0]  vtie;

  function automatic logic [15:0] hdr_word(input logic w, input logic [7:0] i,
                                           input logic [15:0] mj, input logic [15:0] mn);
    unique case (i)
      8'd0: return PKT_SYNC0;
      8'd1: return PKT_SYNC1;
      8'd2: return PKT_WR_FAR2;
      8'd3: return mj;
      8'd4: return mn;
      8'd5: return PKT_WR_CMD1;
      8'd6: return w ? CMD_WCFG : CMD_RCFG;
      8'd7: return w ? PKT_WR_FDRI : PKT_RD_FDRO;
      8'd8: return 16'h0000;
      default: return 16'(FRAME_WORDS);
    endcase
  endfunction

  maj_vote_n #(.N(N), .W(16)) u_vote (
    .words(ram_rdata), .en(ven), .voted(voted_word), .diff(vdiff), .tie(vtie)
  );

  always_ff @(posedge clk) begin
    if (sub == S_WAIT_RAM) data_word <= sv ? voted_word : ram_rdata[sdev];
  end

  // Operation for the current phase and index.
  always_comb begin
    op           = '0;
    op.mask      = msk;
    op.msb_first = 1'b1;
    op.nbits     = 5'd16;
    op.kind      = JOP_SHIFT;
    unique case (ph)
      P_TAP_RESET: begin op.kind = JOP_TMS; op.nbits = 5'd6; op.data = 16'b011111; end
      P_IR_ENTER: begin op.kind = JOP_TMS; op.nbits = 5'd4; op.data = 16'b0011; end
      P_IR_SHIFT: begin
        op.nbits     = 5'(IR_LEN);
        op.msb_first = 1'b0;
        op.exit_last = 1'b1;
        op.data      = 16'(second_ir ? IR_CFG_OUT : IR_CFG_IN);
      end
      P_IR_EXIT, P_DR_EXIT: begin op.kind = JOP_TMS; op.nbits = 5'd2; op.data = 16'b01; end
      P_DR_ENTER: begin op.kind = JOP_TMS; op.nbits = 5'd3; op.data = 16'b001; end
      P_HDR:  op.data = hdr_word(wr, idx, fmaj, fmin);
      P_DATA: begin
        op.data      = (wr && !second_ir) ? data_word : 16'h0000;
        op.exit_last = second_ir && (idx == 8'(FRAME_WORDS - 1));
      end
      P_NOOP: begin op.data = PKT_NOOP; op.exit_last = 1'b1; end
      default: ;
    endcase
  end

  assign busy     = (ph != P_IDLE);
  assign op_valid = (sub == S_ISSUE) && (ph != P_IDLE) && (ph != P_DONE);
  assign ram_addr = RAW'(idx);
  assign ram_wdata = op_cap;

  always_comb begin
    ram_en = 1'b0;
    ram_we = 1'b0;
    if (ph == P_DATA && sub == S_FETCH && wr && !second_ir) ram_en = 1'b1;
    if (ph == P_DATA && sub == S_RUN && op_done && second_ir) begin
      ram_en = 1'b1;
      ram_we = 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      ph        <= P_IDLE;
      sub       <= S_ISSUE;
      idx       <= '0;
      wr        <= 1'b0;
      second_ir <= 1'b0;
      fmaj      <= '0;
      fmin      <= '0;
      msk       <= '0;
      ven       <= '0;
      sv        <= 1'b0;
      sdev      <= '0;
      done      <= 1'b0;
    end else begin
      done <= 1'b0;
      if (ph != P_IDLE && ph != P_DONE) unique case (sub)
        S_FETCH:    sub <= S_WAIT_RAM;
        S_WAIT_RAM: sub <= S_ISSUE;
        S_ISSUE:    if (op_ready) sub <= S_RUN;
        S_RUN: if (op_done) begin
          // advance to the next operation
          sub <= S_ISSUE;
          idx <= idx + 1'b1;
          unique case (ph)
            P_TAP_RESET: ph <= P_IR_ENTER;
            P_IR_ENTER: ph <= P_IR_SHIFT;
            P_IR_SHIFT: ph <= P_IR_EXIT;
            P_IR_EXIT:  ph <= P_DR_ENTER;
            P_DR_ENTER: begin
              ph  <= second_ir ? P_DATA : P_HDR;
              idx <= '0;
            end
            P_HDR: if (idx == 8'(NHDR - 1)) begin
              idx <= '0;
              if (wr) begin
                ph  <= P_DATA;
                sub <= S_FETCH;
              end else begin
                ph <= P_NOOP;
              end
            end
            P_DATA: if (idx == 8'(FRAME_WORDS - 1)) begin
              ph <= second_ir ? P_DR_EXIT : P_NOOP;
            end else if (wr && !second_ir) begin
              sub <= S_FETCH;
            end
            P_NOOP: ph <= P_DR_EXIT;
            P_DR_EXIT: begin
              if (!wr && !second_ir) begin
                second_ir <= 1'b1;             // now read the data out
                ph        <= P_IR_ENTER;
              end else begin
                ph <= P_DONE;
              end
            end
            default: ph <= P_IDLE;
          endcase
        end
        default: sub <= S_ISSUE;
      endcase
      if (ph == P_IDLE) begin
        sub <= S_ISSUE;
        if (cmd_valid) begin
          ph        <= P_TAP_RESET;
          idx       <= '0;
          wr        <= cmd_write;
          second_ir <= 1'b0;
          fmaj      <= far_maj;
          fmin      <= far_min;
          msk       <= mask;
          ven       <= vote_en;
          sv        <= src_voted;
          sdev      <= src_dev;
        end
      end
      if (ph == P_DONE) begin
        ph   <= P_IDLE;
        done <= 1'b1;
      end
    end
  end

  assert property (@(posedge clk) disable iff (rst) (ph != P_IDLE) |-> msk != '0);
endmodule
