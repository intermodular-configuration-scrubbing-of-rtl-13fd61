// seu_log_fmt: turns one detected upset into an ASCII log line.
//
// The paper logs, for every upset, the device, the frame address, the bit
// offset and the upset polarity. This module prints them as
//   "U d MMMM mmmm bbb p" CR LF
// (device, FAR_MAJ, FAR_MIN, bit offset in the frame, and the value the bit
// was read as; all hex), 21 characters handed one by one to the UART
// transmitter. The record is copied on `rec_valid && rec_ready`; `rec_ready`
// returns once the last character has been accepted. The line format is
// this design's choice.
module seu_log_fmt
  import c3_pkg::*;
(
  input  logic       clk,
  input  logic       rst,
  input  logic       rec_valid,
  input  seu_rec_t   rec,
  output logic       rec_ready,
  output logic       tx_valid,
  output logic [7:0] tx_data,
  input  logic       tx_ready
);
  localparam int unsigned NCHAR = 21;

  seu_rec_t   r;
  logic       busy;
  logic [4:0] i;

  function automatic logic [7:0] hexc(input logic [3:0] v);
    return (v < 4'd10) ? 8'("0") + 8'(v) : 8'("A") + 8'(v) - 8'd10;
  endfunction

  always_comb begin
    unique case (i)
      5'd0:  tx_data = "U";
      5'd2:  tx_data = hexc({1'b0, r.dev});
      5'd4:  tx_data = hexc(r.far_maj[15:12]);
      5'd5:  tx_data = hexc(r.far_maj[11:8]);
      5'd6:  tx_data = hexc(r.far_maj[7:4]);
      5'd7:  tx_data = hexc(r.far_maj[3:0]);
      5'd9:  tx_data = hexc(r.far_min[15:12]);
      5'd10: tx_data = hexc(r.far_min[11:8]);
      5'd11: tx_data = hexc(r.far_min[7:4]);
      5'd12: tx_data = hexc(r.far_min[3:0]);
      5'd14: tx_data = hexc({1'b0, r.bit_off[10:8]});
      5'd15: tx_data = hexc(r.bit_off[7:4]);
      5'd16: tx_data = hexc(r.bit_off[3:0]);
      5'd18: tx_data = r.pol ? "1" : "0";
      5'd19: tx_data = 8'h0D;
      5'd20: tx_data = 8'h0A;
      default: tx_data = " ";
    endcase
  end

  assign rec_ready = !busy;
  assign tx_valid  = busy;

  always_ff @(posedge clk) begin
    if (rst) begin
      busy <= 1'b0;
      i    <= '0;
      r    <= '0;
    end else if (!busy) begin
      if (rec_valid) begin
        r    <= rec;
        busy <= 1'b1;
        i    <= '0;
      end
    end else if (tx_ready) begin
      if (i == 5'(NCHAR - 1)) busy <= 1'b0;
      i <= i + 5'd1;
    end
  end
endmodule
