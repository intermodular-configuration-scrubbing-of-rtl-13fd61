// ram_scrubber: votes and repairs the three copies of a memory.
//
// The three scrubbing cores each own a copy of every block RAM. This module
// uses the second port (port B) of the three copies: it reads the same
// address from all three, forms the bitwise two-out-of-three vote and, if
// the copies disagree, writes the vote back to all three. With CONTINUOUS=1
// it sweeps the address range forever (used for the frame and table BRAMs);
// with CONTINUOUS=0 it does one sweep per `start` pulse and pulses `done`
// (used for the scratchpads when the cores are reset). Both behaviours follow
// the paper; the sequencing below is this design's.
//
// Timing: RD issues the read, CMP sees the data one cycle later, WR writes
// on the third cycle. A port A write by any core to the same address during
// RD or CMP (or WR itself) cancels the write-back and the address is read
// again, so the scrubber never overwrites fresh data with a stale vote.
module ram_scrubber #(
  parameter int unsigned W          = 16,
  parameter int unsigned DEPTH      = 128,
  parameter bit          CONTINUOUS = 1'b1,
  localparam int unsigned AW        = $clog2(DEPTH)
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 start,
  output logic                 done,
  output logic                 busy,
  output logic                 fixed,       // pulse: a word was repaired
  // port A write activity of the three copies
  input  logic [2:0]           a_we,
  input  logic [2:0][AW-1:0]   a_addr,
  // port B, shared address/data to all three copies
  output logic                 b_en,
  output logic                 b_we,
  output logic [AW-1:0]        b_addr,
  output logic [W-1:0]         b_wdata,
  input  logic [2:0][W-1:0]    b_rdata
);
  typedef enum logic [1:0] {S_IDLE, S_RD, S_CMP, S_WR} state_e;
  state_e       state;
  logic         conflict;
  logic [W-1:0] vote;
  logic         differ;
  logic         hit;

  maj_vote3 #(.W(W)) u_vote (
    .a(b_rdata[0]), .b(b_rdata[1]), .c(b_rdata[2]), .y(vote), .mismatch(differ)
  );

  always_comb begin
    hit = 1'b0;
    for (int i = 0; i < 3; i++) hit |= a_we[i] && (a_addr[i] == b_addr);
  end

  always_comb begin
    b_en    = !rst && ((state == S_RD) || (state == S_WR && !hit));
    b_we    = !rst && (state == S_WR) && !hit;
    busy    = (state != S_IDLE);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state    <= CONTINUOUS ? S_RD : S_IDLE;
      b_addr   <= '0;
      b_wdata  <= '0;
      conflict <= 1'b0;
      done     <= 1'b0;
      fixed    <= 1'b0;
    end else begin
      done  <= 1'b0;
      fixed <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          state  <= S_RD;
          b_addr <= '0;
        end
        S_RD: begin
          conflict <= hit;
          state    <= S_CMP;
        end
        S_CMP: begin
          if (conflict || hit) begin
            state <= S_RD;                 // re-read the same address
          end else if (differ) begin
            b_wdata <= vote;
            state   <= S_WR;
          end else begin
            state <= S_RD;
            if (b_addr == AW'(DEPTH - 1)) begin
              b_addr <= '0;
              if (!CONTINUOUS) begin
                state <= S_IDLE;
                done  <= 1'b1;
              end
            end else begin
              b_addr <= b_addr + 1'b1;
            end
          end
          conflict <= 1'b0;
        end
        S_WR: begin
          state <= S_RD;                   // re-read: confirms the repair
          fixed <= !hit;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
