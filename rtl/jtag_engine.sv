// jtag_engine: JTAG master driving up to N target FPGAs at once.
//
// One operation shifts 1 to 16 bits. A TMS operation walks the TAP state
// machines (TMS taken from `data`, LSB first, TDI held at 0); a SHIFT
// operation sends `data` on TDI (MSB or LSB first) with TMS low, except on
// the last bit when `exit_last` is set, which leaves Shift-DR/IR. TMS and TDI
// are shared by all targets; each target has its own TCK, which only toggles
// when its bit of `mask` is set. A mask with one bit set is the paper's
// single mode; several bits give broadcast mode. During every bit the TDO of
// all N targets is captured in parallel into `cap`, and `cap_voted` holds the
// majority-voted TDO bits of the masked devices (broadcast read "in a
// majority-voted fashion"). Captured bits are stored at the same positions
// as the data bits they were shifted with.
//
// Timing: one bit takes TCK_DIV clock cycles. TCK is low for the first half
// (TMS/TDI change at its start) and high for the second half. TDO passes a
// two-flop synchronizer and is sampled at the last cycle of the high half,
// which is at least TCK_DIV/2-2 cycles after the target changed it on the
// previous falling edge. `done` pulses one cycle after the last bit; the next
// operation can be accepted in that cycle. The TCK rate is not in the paper.
module jtag_engine
  import c3_pkg::*;
#(
  parameter int unsigned N       = N_DEV,
  parameter int unsigned TCK_DIV = c3_pkg::TCK_DIV
) (
  input  logic                clk,
  input  logic                rst,
  input  logic                op_valid,
  input  jtag_op_t            op,
  output logic                op_ready,
  output logic                done,
  output logic [N-1:0][15:0]  cap,
  output logic [15:0]         cap_voted,
  output logic [N-1:0]        tck,
  output logic                tms,
  output logic                tdi,
  input  logic [N-1:0]        tdo
);
  localparam int unsigned CW = $clog2(TCK_DIV);

  initial assert (TCK_DIV >= 8 && TCK_DIV % 2 == 0)
    else $error("TCK_DIV must be even and at least 8");

  jtag_op_t      cur;
  logic          active;
  logic [CW-1:0] phase;
  logic [4:0]    bitn;
  logic [N-1:0]  tdo_s1, tdo_s2;
  logic [3:0]    pos;
  logic [N-1:0][15:0] vote_in;
  logic [N-1:0][15:0] vote_diff;
  logic [15:0]   vote_tie;

  assign op_ready = !active;
  assign pos      = (cur.kind == JOP_SHIFT && cur.msb_first) ? 4'(cur.nbits - 5'd1 - bitn) : bitn[3:0];

  always_ff @(posedge clk) begin
    tdo_s1 <= tdo;
    tdo_s2 <= tdo_s1;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      active <= 1'b0;
      phase  <= '0;
      bitn   <= '0;
      cur    <= '0;
      cap    <= '0;
      done   <= 1'b0;
      tck    <= '0;
      tms    <= 1'b0;
      tdi    <= 1'b0;
    end else begin
      done <= 1'b0;
      if (!active) begin
        tck <= '0;
        if (op_valid) begin
          cur    <= op;
          active <= 1'b1;
          phase  <= '0;
          bitn   <= '0;
          cap    <= '0;
        end
      end else begin
        phase <= (phase == CW'(TCK_DIV - 1)) ? '0 : phase + 1'b1;
        if (phase == '0) begin
          // TCK low: present TMS and TDI for this bit.
          tck <= '0;
          if (cur.kind == JOP_TMS) begin
            tms <= cur.data[bitn[3:0]];
            tdi <= 1'b0;
          end else begin
            tms <= cur.exit_last && (bitn == cur.nbits - 5'd1);
            tdi <= cur.data[pos];
          end
        end else if (phase == CW'(TCK_DIV / 2)) begin
          tck <= cur.mask;                 // rising edge on masked targets
        end else if (phase == CW'(TCK_DIV - 1)) begin
          for (int d = 0; d < N; d++) cap[d][pos] <= tdo_s2[d];
          tck <= '0;                       // falling edge
          if (bitn == cur.nbits - 5'd1) begin
            active <= 1'b0;
            done   <= 1'b1;
          end
          bitn <= bitn + 1'b1;
        end
      end
    end
  end

  always_comb vote_in = cap;

  maj_vote_n #(.N(N), .W(16)) u_vote (
    .words(vote_in), .en(cur.mask), .voted(cap_voted), .diff(vote_diff), .tie(vote_tie)
  );

  // The operation must not change while it runs; it is copied at acceptance.
  property p_op_stable_handshake;
    @(posedge clk) disable iff (rst) (op_valid && op_ready) |-> (op.nbits != 0 && op.nbits <= 16);
  endproperty
  assert property (p_op_stable_handshake);
endmodule
