// c3_top: the Configuration Consistency Corrector (C3).
//
// The C3 sits in the merger FPGA that collects data from up to six identical
// front-end FPGAs. Because they all carry the same bitstream, it can find
// and correct configuration upsets in any of them by reading the same frame
// from all of them and taking the bitwise majority; no golden copy and no
// error-correcting code is needed, and any number of upsets per frame is
// corrected as long as a majority of devices holds the right value.
//
// To survive upsets in the merger itself, the scrubber is triplicated, as in
// the paper:
//   * three identical c3_core instances receive the same inputs;
//   * every output (per-target TCK, TMS, TDI, UART TX, reset request and the
//     status events) is the bitwise 2-of-3 vote of the three cores;
//   * the frame and table BRAMs of the three cores are voted and repaired
//     continuously through their second ports (ram_scrubber, CONTINUOUS=1);
//   * the scratchpads are voted and repaired once each time the cores are
//     reset; this happens at power-up and whenever the voted reset request
//     shows that the programmed number of scrubbing cycles has completed.
// Reset sequence: the cores are held in reset while the scratchpad sweep
// runs (DEPTH 16, about 50 cycles), then released.
//
// Interface: `rst` is a synchronous, active-high system reset; `rxd`/`txd`
// the host UART; `tck[d]`, `tms`, `tdi`, `tdo[d]` the JTAG lines of target d
// (TMS and TDI shared). Status outputs are for monitoring only.
module c3_top
  import c3_pkg::*;
#(
  parameter int unsigned N           = N_DEV,
  parameter int unsigned FRAME_WORDS = c3_pkg::FRAME_WORDS,
  parameter int unsigned TBL_AW      = 8,
  parameter int unsigned TCK_DIV     = c3_pkg::TCK_DIV,
  parameter int unsigned BAUD_DIV    = c3_pkg::BAUD_DIV,
  localparam int unsigned RAW        = $clog2(FRAME_WORDS)
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          rxd,
  output logic          txd,
  output logic [N-1:0]  tck,
  output logic          tms,
  output logic          tdi,
  input  logic [N-1:0]  tdo,
  output logic          running,
  output logic [4:0]    events,       // {inject, tie, bcast, fix, cycle}
  output logic          core_reset,   // pulse: cores were reset
  output logic [2:0]    mem_fixed     // pulses: {scratchpad, table, frame} word repaired
);
  localparam int unsigned OW = N + 2 + 1 + 1 + 1 + 5;  // tck, tms, tdi, txd, rst_req, running, events

  logic [2:0][OW-1:0] outs;
  logic [OW-1:0]      vout;
  logic               out_mm;

  logic [2:0]              fr_a_we, tb_a_we, sp_a_we;
  logic [2:0][RAW-1:0]     fr_a_addr;
  logic [2:0][TBL_AW-1:0]  tb_a_addr;
  logic [2:0][3:0]         sp_a_addr;
  logic [2:0][N*16-1:0]    fr_b_rdata;
  logic [2:0][15:0]        tb_b_rdata, sp_b_rdata;

  logic                fr_b_en, fr_b_we;
  logic [RAW-1:0]      fr_b_addr;
  logic [N*16-1:0]     fr_b_wdata;
  logic                tb_b_en, tb_b_we;
  logic [TBL_AW-1:0]   tb_b_addr;
  logic [15:0]         tb_b_wdata;
  logic                sp_b_en, sp_b_we;
  logic [3:0]          sp_b_addr;
  logic [15:0]         sp_b_wdata;

  logic core_rst, sp_start, sp_done, sp_busy, rst_req_v;
  typedef enum logic [1:0] {R_START, R_SWEEP, R_RUN} rst_state_e;
  rst_state_e rstate;

  for (genvar c = 0; c < 3; c++) begin : g_core
    logic [N-1:0] c_tck;
    logic         c_tms, c_tdi, c_txd, c_rst_req, c_running;
    logic [4:0]   c_events;

    c3_core #(
      .N(N), .FRAME_WORDS(FRAME_WORDS), .TBL_AW(TBL_AW), .TCK_DIV(TCK_DIV), .BAUD_DIV(BAUD_DIV)
    ) u_core (
      .clk, .rst(core_rst), .rxd,
      .txd(c_txd), .tck(c_tck), .tms(c_tms), .tdi(c_tdi), .tdo,
      .rst_req(c_rst_req), .running(c_running), .events(c_events),
      .fr_a_we(fr_a_we[c]), .fr_a_addr(fr_a_addr[c]),
      .fr_b_en, .fr_b_we, .fr_b_addr, .fr_b_wdata, .fr_b_rdata(fr_b_rdata[c]),
      .tb_a_we(tb_a_we[c]), .tb_a_addr(tb_a_addr[c]),
      .tb_b_en, .tb_b_we, .tb_b_addr, .tb_b_wdata, .tb_b_rdata(tb_b_rdata[c]),
      .sp_a_we(sp_a_we[c]), .sp_a_addr(sp_a_addr[c]),
      .sp_b_en, .sp_b_we, .sp_b_addr, .sp_b_wdata, .sp_b_rdata(sp_b_rdata[c])
    );
    assign outs[c] = {c_tck, c_tms, c_tdi, c_txd, c_rst_req, c_running, c_events};
  end

  maj_vote3 #(.W(OW)) u_out_vote (
    .a(outs[0]), .b(outs[1]), .c(outs[2]), .y(vout), .mismatch(out_mm)
  );
  assign {tck, tms, tdi, txd, rst_req_v, running, events} = vout;

  ram_scrubber #(.W(N * 16), .DEPTH(FRAME_WORDS), .CONTINUOUS(1'b1)) u_fr_scrub (
    .clk, .rst, .start(1'b0), .done(), .busy(), .fixed(mem_fixed[0]),
    .a_we(fr_a_we), .a_addr(fr_a_addr),
    .b_en(fr_b_en), .b_we(fr_b_we), .b_addr(fr_b_addr), .b_wdata(fr_b_wdata), .b_rdata(fr_b_rdata)
  );

  ram_scrubber #(.W(16), .DEPTH(2 ** TBL_AW), .CONTINUOUS(1'b1)) u_tb_scrub (
    .clk, .rst, .start(1'b0), .done(), .busy(), .fixed(mem_fixed[1]),
    .a_we(tb_a_we), .a_addr(tb_a_addr),
    .b_en(tb_b_en), .b_we(tb_b_we), .b_addr(tb_b_addr), .b_wdata(tb_b_wdata), .b_rdata(tb_b_rdata)
  );

  ram_scrubber #(.W(16), .DEPTH(16), .CONTINUOUS(1'b0)) u_sp_scrub (
    .clk, .rst, .start(sp_start), .done(sp_done), .busy(sp_busy), .fixed(mem_fixed[2]),
    .a_we(sp_a_we), .a_addr(sp_a_addr),
    .b_en(sp_b_en), .b_we(sp_b_we), .b_addr(sp_b_addr), .b_wdata(sp_b_wdata), .b_rdata(sp_b_rdata)
  );

  // core reset: at power-up and on the voted reset request, hold the cores
  // in reset while the scratchpads are voted and repaired
  always_ff @(posedge clk) begin
    if (rst) begin
      rstate     <= R_START;
      core_rst   <= 1'b1;
      sp_start   <= 1'b0;
      core_reset <= 1'b0;
    end else begin
      sp_start   <= 1'b0;
      core_reset <= 1'b0;
      unique case (rstate)
        R_START: begin
          core_rst <= 1'b1;
          sp_start <= 1'b1;
          rstate   <= R_SWEEP;
        end
        R_SWEEP: if (sp_done) begin
          core_rst   <= 1'b0;
          core_reset <= 1'b1;
          rstate     <= R_RUN;
        end
        R_RUN: if (rst_req_v && !core_rst) rstate <= R_START;
        default: rstate <= R_START;
      endcase
    end
  end
endmodule
