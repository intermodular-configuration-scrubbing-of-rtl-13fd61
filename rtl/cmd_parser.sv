// cmd_parser: decodes the host's ASCII commands arriving on the UART.
//
// Commands (hex digits upper or lower case, no separators):
//   S                     start continuous scrubbing
//   P                     stop scrubbing after the current frame
//   I d MMMM mmmm bbb     inject an upset: flip bit bbb of frame
//                         (FAR_MAJ=MMMM, FAR_MIN=mmmm) of device d
//   T aa vvvv             write frame-address table entry aa
//   W a vvvv              write scratchpad word a (settings)
// The paper says the host sends commands over the UART to inject upsets
// and to start scrubbing; the command set and syntax are this design's.
// A byte that does not fit the expected syntax drops the command. `valid`
// pulses for one cycle with the decoded command after its last digit.
module cmd_parser
  import c3_pkg::*;
(
  input  logic       clk,
  input  logic       rst,
  input  logic       rx_valid,
  input  logic [7:0] rx_data,
  output logic       valid,
  output host_cmd_t  cmd
);
  logic [3:0]  need;      // hex digits still expected
  cmd_e        pend;
  logic [47:0] acc;
  logic [3:0]  nib;
  logic        is_hex;

  always_comb begin
    is_hex = 1'b1;
    nib    = '0;
    if (rx_data >= "0" && rx_data <= "9")      nib = 4'(rx_data - "0");
    else if (rx_data >= "A" && rx_data <= "F") nib = 4'(rx_data - "A" + 8'd10);
    else if (rx_data >= "a" && rx_data <= "f") nib = 4'(rx_data - "a" + 8'd10);
    else is_hex = 1'b0;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      need  <= '0;
      pend  <= CMD_NONE;
      acc   <= '0;
      valid <= 1'b0;
      cmd   <= '0;
    end else begin
      valid <= 1'b0;
      if (rx_valid) begin
        if (need == 4'd0) begin
          acc <= '0;
          unique case (rx_data)
            "S", "s": begin valid <= 1'b1; cmd <= '0; cmd.op <= CMD_START; end
            "P", "p": begin valid <= 1'b1; cmd <= '0; cmd.op <= CMD_STOP; end
            "I", "i": begin pend <= CMD_INJECT; need <= 4'd12; end
            "T", "t": begin pend <= CMD_TBL_WR; need <= 4'd6;  end
            "W", "w": begin pend <= CMD_SP_WR;  need <= 4'd5;  end
            default: ;
          endcase
        end else if (!is_hex) begin
          need <= '0;                        // syntax error: drop
        end else begin
          acc  <= {acc[43:0], nib};
          need <= need - 4'd1;
          if (need == 4'd1) begin
            valid <= 1'b1;
            cmd   <= '0;
            cmd.op <= pend;
            unique case (pend)
              CMD_INJECT: begin
                cmd.dev     <= acc[42:40];
                cmd.far_maj <= acc[39:24];
                cmd.far_min <= acc[23:8];
                cmd.bit_off <= {acc[6:0], nib};
              end
              CMD_TBL_WR: begin
                cmd.addr <= acc[19:12];
                cmd.data <= {acc[11:0], nib};
              end
              default: begin
                cmd.addr <= {4'd0, acc[15:12]};
                cmd.data <= {acc[11:0], nib};
              end
            endcase
          end
        end
      end
    end
  end
endmodule
