// uart_tx: 8N1 UART transmitter for the scrubber's log.
//
// Sends one byte per `valid`/`ready` handshake: a start bit, eight data bits
// LSB first and one stop bit, each BAUD_DIV clock cycles long (115200 baud at
// 127 MHz by default). `ready` is high when idle. The paper names the UART;
// the frame format and rate are this design's choice.
module uart_tx #(
  parameter int unsigned BAUD_DIV = c3_pkg::BAUD_DIV
) (
  input  logic       clk,
  input  logic       rst,
  input  logic       valid,
  input  logic [7:0] data,
  output logic       ready,
  output logic       txd
);
  localparam int unsigned CW = $clog2(BAUD_DIV);
  logic [CW-1:0] cnt;
  logic [3:0]    nbit;
  logic [9:0]    sh;
  logic          busy;

  assign ready = !busy;

  always_ff @(posedge clk) begin
    if (rst) begin
      busy <= 1'b0;
      txd  <= 1'b1;
      cnt  <= '0;
      nbit <= '0;
      sh   <= '1;
    end else if (!busy) begin
      txd <= 1'b1;
      if (valid) begin
        busy <= 1'b1;
        sh   <= {1'b1, data, 1'b0};
        cnt  <= '0;
        nbit <= '0;
      end
    end else begin
      txd <= sh[0];
      if (cnt == CW'(BAUD_DIV - 1)) begin
        cnt <= '0;
        sh  <= {1'b1, sh[9:1]};
        if (nbit == 4'd9) busy <= 1'b0;
        nbit <= nbit + 4'd1;
      end else begin
        cnt <= cnt + 1'b1;
      end
    end
  end
endmodule
