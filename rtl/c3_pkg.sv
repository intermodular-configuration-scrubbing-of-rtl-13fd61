// c3_pkg: types and constants shared by the configuration scrubber (C3).
//
// The scrubber reads configuration frames of up to six identical target
// FPGAs over JTAG, votes them bit by bit and writes the voted frame back to
// any device that differs. This package holds the numbers the modules agree
// on: the number of targets and the 127 MHz system clock follow the paper;
// the Spartan-6 frame length, JTAG instruction codes and configuration
// packet words are taken from the vendor's configuration interface and are
// this design's assumptions, as are the TCK divider and the UART rate.
package c3_pkg;

  // Targets per merger board ("up to 6 FEB FPGAs").
  localparam int unsigned N_DEV       = 6;
  // Configuration word and frame size of a Spartan-6 (65 x 16-bit words).
  localparam int unsigned WORD_W      = 16;
  localparam int unsigned FRAME_WORDS = 65;
  // System clock 127 MHz; TCK = CLK / TCK_DIV.
  localparam int unsigned CLK_HZ      = 127_000_000;
  localparam int unsigned TCK_DIV     = 32;
  // UART 115200 baud at 127 MHz.
  localparam int unsigned BAUD_DIV    = 1102;

  // Spartan-6 JTAG: 6-bit instruction register.
  localparam int unsigned IR_LEN      = 6;
  localparam logic [5:0]  IR_CFG_OUT  = 6'h04;
  localparam logic [5:0]  IR_CFG_IN   = 6'h05;

  // Configuration packet words.
  localparam logic [15:0] PKT_SYNC0    = 16'hAA99;
  localparam logic [15:0] PKT_SYNC1    = 16'h5566;
  localparam logic [15:0] PKT_NOOP     = 16'h2000;
  localparam logic [15:0] PKT_WR_FAR2  = 16'h3022;  // type 1, write FAR_MAJ, 2 words
  localparam logic [15:0] PKT_WR_CMD1  = 16'h30A1;  // type 1, write CMD, 1 word
  localparam logic [15:0] PKT_RD_FDRO  = 16'h4880;  // type 2, read FDRO, count follows
  localparam logic [15:0] PKT_WR_FDRI  = 16'h5060;  // type 2, write FDRI, count follows
  localparam logic [15:0] CMD_WCFG     = 16'h0001;
  localparam logic [15:0] CMD_RCFG     = 16'h0004;

  // One JTAG engine operation.
  typedef enum logic {JOP_TMS = 1'b0, JOP_SHIFT = 1'b1} jop_kind_e;

  typedef struct packed {
    jop_kind_e        kind;      // TMS walk (TDI=0) or data shift
    logic [4:0]       nbits;     // 1..16 bits
    logic [15:0]      data;      // TMS pattern (LSB first) or TDI data
    logic             msb_first; // data shift order
    logic             exit_last; // TMS=1 on the last shifted bit
    logic [N_DEV-1:0] mask;      // devices whose TCK runs
  } jtag_op_t;

  // One detected upset, as logged.
  typedef struct packed {
    logic [2:0]  dev;
    logic [15:0] far_maj;
    logic [15:0] far_min;
    logic [10:0] bit_off;   // bit offset in the frame, 0 = MSB of word 0
    logic        pol;       // value the upset bit was read as
  } seu_rec_t;

  // Decoded host command.
  typedef enum logic [2:0] {
    CMD_NONE, CMD_START, CMD_STOP, CMD_INJECT, CMD_TBL_WR, CMD_SP_WR
  } cmd_e;

  typedef struct packed {
    cmd_e        op;
    logic [2:0]  dev;
    logic [15:0] far_maj;
    logic [15:0] far_min;
    logic [10:0] bit_off;
    logic [7:0]  addr;
    logic [15:0] data;
  } host_cmd_t;

  // Scratchpad map.
  localparam logic [3:0] SP_ENABLE = 4'd0;  // device enable mask
  localparam logic [3:0] SP_PERIOD = 4'd1;  // scrub cycles between resets
  localparam logic [3:0] SP_ROWS   = 4'd2;  // clock-region rows of the device
  localparam logic [3:0] SP_CYCLES = 4'd3;  // cycles since last reset
  localparam logic [3:0] SP_RUN    = 4'd4;  // bit 0: scrubbing on
  localparam logic [3:0] SP_SEU0   = 4'd8;  // SEU count of device d at 8+d

endpackage
