// uart_rx: 8N1 UART receiver for the scrubber's host commands.
//
// The line passes a two-flop synchronizer. A falling edge starts a byte; the
// start bit is checked at its middle, then the eight data bits (LSB first)
// and the stop bit are sampled at their middles, BAUD_DIV cycles apart.
// `valid` pulses for one cycle with the byte when the stop bit is high; a
// byte with a low stop bit is dropped. Rate and format are this design's
// choice (the paper only names a UART).
module uart_rx #(
  parameter int unsigned BAUD_DIV = c3_pkg::BAUD_DIV
) (
  input  logic       clk,
  input  logic       rst,
  input  logic       rxd,
  output logic       valid,
  output logic [7:0] data
);
  localparam int unsigned CW = $clog2(BAUD_DIV);
  logic          s1, s2;
  logic          busy;
  logic [CW-1:0] cnt;
  logic [3:0]    nbit;
  logic [7:0]    sh;

  always_ff @(posedge clk) begin
    if (rst) begin
      s1 <= 1'b1;
      s2 <= 1'b1;
    end else begin
      s1 <= rxd;
      s2 <= s1;
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      busy  <= 1'b0;
      cnt   <= '0;
      nbit  <= '0;
      sh    <= '0;
      valid <= 1'b0;
      data  <= '0;
    end else begin
      valid <= 1'b0;
      if (!busy) begin
        if (!s2) begin
          busy <= 1'b1;
          cnt  <= CW'(BAUD_DIV / 2);
          nbit <= '0;
        end
      end else if (cnt == CW'(BAUD_DIV - 1)) begin
        cnt <= '0;
        if (nbit == 4'd0) begin
          if (s2) busy <= 1'b0;             // false start
        end else if (nbit <= 4'd8) begin
          sh <= {s2, sh[7:1]};
        end else begin
          busy <= 1'b0;
          if (s2) begin
            valid <= 1'b1;
            data  <= sh;
          end
        end
        nbit <= nbit + 4'd1;
      end else begin
        cnt <= cnt + 1'b1;
      end
    end
  end
endmodule
