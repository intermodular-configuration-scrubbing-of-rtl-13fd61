// dp_ram: true dual-port block RAM, one clock, synchronous read.
//
// Each scrubbing core keeps its frame buffer, its frame-address table and
// its scratchpad in one of these. Port A belongs to the core; port B is
// reserved for the cross-core scrubber, which reads the three copies of a
// memory, votes them and writes the vote back. Both ports read the old
// contents on a write to the same address (read-first), with one cycle of
// read latency. Contents start at zero as in an FPGA block RAM without
// initial values. Simultaneous writes to one address from both ports leave
// the port B value; the scrubber avoids that case.
module dp_ram #(
  parameter int unsigned W     = 16,
  parameter int unsigned DEPTH = 128,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          a_en,
  input  logic          a_we,
  input  logic [AW-1:0] a_addr,
  input  logic [W-1:0]  a_wdata,
  output logic [W-1:0]  a_rdata,
  input  logic          b_en,
  input  logic          b_we,
  input  logic [AW-1:0] b_addr,
  input  logic [W-1:0]  b_wdata,
  output logic [W-1:0]  b_rdata
);
  logic [W-1:0] mem [DEPTH];

  initial for (int i = 0; i < DEPTH; i++) mem[i] = '0;

  always_ff @(posedge clk) begin
    if (a_en) begin
      a_rdata <= mem[a_addr];
      if (a_we) mem[a_addr] <= a_wdata;
    end
    if (b_en) begin
      b_rdata <= mem[b_addr];
      if (b_we) mem[b_addr] <= b_wdata;
    end
  end
endmodule
