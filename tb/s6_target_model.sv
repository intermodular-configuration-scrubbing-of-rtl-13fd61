// s6_target_model: behavioural model of one front-end target FPGA's JTAG
// configuration port (not synthesizable; used only by testbenches).
//
// It has a standard 16-state TAP controller with a 6-bit instruction
// register. Under CFG_IN, Shift-DR words (16 bits, MSB first) go to a
// configuration packet parser that understands the subset the scrubber
// sends: sync word AA99 5566, type-1 write of FAR_MAJ/FAR_MIN (2 words),
// type-1 write of CMD, type-2 write of FDRI (frame data follow) and type-2
// read of FDRO (sets up a read). Under CFG_OUT, Shift-DR shifts out the
// frame set up by the last FDRO read, MSB first, TDO changing on the falling
// edge of TCK. Configuration memory is sparse: a word that was never written
// holds the golden value gold(), identical in all devices, so tests can
// compare against it. `flip` injects an upset directly.
module s6_target_model #(
  parameter int unsigned FRAME_WORDS = 65
) (
  input  logic tck,
  input  logic tms,
  input  logic tdi,
  output logic tdo
);
  typedef enum logic [3:0] {
    TLR, RTI, SEL_DR, CAP_DR, SH_DR, EX1_DR, PA_DR, EX2_DR, UPD_DR,
    SEL_IR, CAP_IR, SH_IR, EX1_IR, PA_IR, EX2_IR, UPD_IR
  } tap_e;

  tap_e        st = TLR;
  logic [5:0]  ir = 6'h09, ir_sh = '0;
  logic [15:0] win = '0;
  int          nin = 0;
  // packet parser
  typedef enum {P_SYNC0, P_SYNC1, P_HDR, P_FAR0, P_FAR1, P_CMD, P_CNT0, P_CNT1, P_FDRI} pst_e;
  pst_e        pst = P_SYNC0;
  logic [15:0] far_maj = '0, far_min = '0, last_cmd = '0;
  logic        t2_write = 1'b0;
  int unsigned t2_cnt = 0, widx = 0;
  logic        rd_armed = 1'b0;
  logic [15:0] rd_maj = '0, rd_min = '0;
  int unsigned rd_cnt = 0;
  int unsigned out_idx = 0;
  logic [15:0] mem [logic [47:0]];

  // statistics for the testbenches
  int unsigned n_frame_reads = 0, n_frame_writes = 0, n_errors = 0, n_tck = 0;

  initial tdo = 1'b0;

  function automatic logic [15:0] gold(input logic [15:0] mj, input logic [15:0] mn, input int unsigned w);
    logic [31:0] h;
    h = {mj, mn} * 32'h9E3779B1 + w * 32'h85EBCA6B;
    h = h ^ (h >> 15);
    return h[15:0];
  endfunction

  function automatic logic [15:0] rd_word(input logic [15:0] mj, input logic [15:0] mn, input int unsigned w);
    logic [47:0] key;
    key = {mj, mn, 16'(w)};
    if (mem.exists(key)) return mem[key];
    return gold(mj, mn, w);
  endfunction

  function automatic void flip(input logic [15:0] mj, input logic [15:0] mn, input int unsigned bit_off);
    logic [15:0] v;
    int unsigned w;
    w = bit_off / 16;
    v = rd_word(mj, mn, w);
    v[15 - (bit_off % 16)] = ~v[15 - (bit_off % 16)];
    mem[{mj, mn, 16'(w)}] = v;
  endfunction

  function automatic int unsigned count_bad(input logic [15:0] mj, input logic [15:0] mn);
    int unsigned n = 0;
    for (int unsigned w = 0; w < FRAME_WORDS; w++) if (rd_word(mj, mn, w) != gold(mj, mn, w)) n++;
    return n;
  endfunction

  function automatic void packet_word(input logic [15:0] x);
    unique case (pst)
      P_SYNC0: if (x == 16'hAA99) pst = P_SYNC1;
      P_SYNC1: pst = (x == 16'h5566) ? P_HDR : P_SYNC0;
      P_HDR: begin
        if (x[15:13] == 3'b001 && x[12:11] == 2'b10 && x[10:5] == 6'h01 && x[4:0] == 5'd2) pst = P_FAR0;
        else if (x[15:13] == 3'b001 && x[12:11] == 2'b10 && x[10:5] == 6'h05 && x[4:0] == 5'd1) pst = P_CMD;
        else if (x[15:13] == 3'b010 && x[12:11] == 2'b10 && x[10:5] == 6'h03) begin t2_write = 1'b1; pst = P_CNT0; end
        else if (x[15:13] == 3'b010 && x[12:11] == 2'b01 && x[10:5] == 6'h04) begin t2_write = 1'b0; pst = P_CNT0; end
        else if (x == 16'h2000) pst = P_HDR;
        else n_errors++;
      end
      P_FAR0: begin far_maj = x; pst = P_FAR1; end
      P_FAR1: begin far_min = x; pst = P_HDR; end
      P_CMD:  begin last_cmd = x; pst = P_HDR; end
      P_CNT0: begin t2_cnt = 32'(x) << 16; pst = P_CNT1; end
      P_CNT1: begin
        t2_cnt = t2_cnt | 32'(x);
        if (t2_cnt != FRAME_WORDS) n_errors++;
        if (t2_write) begin
          if (last_cmd != 16'h0001) n_errors++;
          widx = 0;
          pst  = P_FDRI;
        end else begin
          if (last_cmd != 16'h0004) n_errors++;
          rd_armed = 1'b1;
          rd_maj   = far_maj;
          rd_min   = far_min;
          rd_cnt   = t2_cnt;
          pst      = P_HDR;
        end
      end
      P_FDRI: begin
        mem[{far_maj, far_min, 16'(widx)}] = x;
        widx++;
        if (widx == t2_cnt) begin
          n_frame_writes++;
          pst = P_HDR;
        end
      end
      default: pst = P_SYNC0;
    endcase
  endfunction

  function automatic tap_e next_state(input tap_e s, input logic m);
    unique case (s)
      TLR:    return m ? TLR    : RTI;
      RTI:    return m ? SEL_DR : RTI;
      SEL_DR: return m ? SEL_IR : CAP_DR;
      CAP_DR: return m ? EX1_DR : SH_DR;
      SH_DR:  return m ? EX1_DR : SH_DR;
      EX1_DR: return m ? UPD_DR : PA_DR;
      PA_DR:  return m ? EX2_DR : PA_DR;
      EX2_DR: return m ? UPD_DR : SH_DR;
      UPD_DR: return m ? SEL_DR : RTI;
      SEL_IR: return m ? TLR    : CAP_IR;
      CAP_IR: return m ? EX1_IR : SH_IR;
      SH_IR:  return m ? EX1_IR : SH_IR;
      EX1_IR: return m ? UPD_IR : PA_IR;
      PA_IR:  return m ? EX2_IR : PA_IR;
      EX2_IR: return m ? UPD_IR : SH_IR;
      default: return m ? SEL_DR : RTI;  // UPD_IR
    endcase
  endfunction

  always @(posedge tck) begin
    n_tck++;
    unique case (st)
      CAP_IR: ir_sh = 6'b000001;
      SH_IR:  ir_sh = {tdi, ir_sh[5:1]};
      CAP_DR: begin
        nin = 0;
        if (ir == 6'h05) pst = P_SYNC0;
        out_idx = 0;
      end
      SH_DR: begin
        if (ir == 6'h05) begin
          win = {win[14:0], tdi};
          nin++;
          if (nin == 16) begin
            packet_word(win);
            nin = 0;
          end
        end else if (ir == 6'h04) begin
          out_idx++;
          if (out_idx == rd_cnt * 16 && rd_armed) begin
            n_frame_reads++;
            rd_armed = 1'b0;
          end
        end
      end
      default: ;
    endcase
    if (st == UPD_IR) ir = ir_sh;
    if (st == TLR) ir = 6'h09;
    st = next_state(st, tms);
  end

  always @(negedge tck) begin
    if (st == SH_DR && ir == 6'h04 && out_idx < rd_cnt * 16)
      tdo <= rd_word(rd_maj, rd_min, out_idx / 16)[15 - (out_idx % 16)];
    else
      tdo <= 1'b0;
  end
endmodule
