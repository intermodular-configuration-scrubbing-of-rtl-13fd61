// frame_addr_gen: walks through every configuration frame address of the
// target device.
//
// Frame addresses are not contiguous: a device is split into rows, each row
// into columns of different block types, and each column holds a
// column-specific number of frames (minors). As in the paper, these
// device-specific facts live in a BRAM table, so the same logic serves any
// device. Table entry c describes column (major) c of every row:
//   [15] last column of the row, [14:12] block type, [9:0] number of minors.
// The number of rows comes from the controller. The address produced follows
// the Spartan-6 layout FAR_MAJ = {block, row, major}, FAR_MIN = minor; this
// layout and the table format are this design's assumptions. FAR_MAJ[15]
// and FAR_MIN[15:10] are therefore always zero.
//
// Interface: `start` goes to the first frame; `valid` then holds with the
// address; `next` (while valid) advances. After the last frame `finished`
// rises and stays until the next `start`. A column change costs three cycles
// (table read); a minor step costs one.
module frame_addr_gen #(
  parameter int unsigned TBL_AW = 8
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              start,
  input  logic              next,
  input  logic [3:0]        rows,
  output logic              valid,
  output logic              finished,
  output logic [15:0]       far_maj,
  output logic [15:0]       far_min,
  // table BRAM read port
  output logic              tbl_en,
  output logic [TBL_AW-1:0] tbl_addr,
  input  logic [15:0]       tbl_rdata
);
  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_WAIT, S_CHECK, S_VALID, S_END} state_e;
  state_e            state;
  logic [3:0]        row;
  logic [TBL_AW-1:0] col;
  logic [9:0]        minor;
  logic [15:0]       entry;

  assign tbl_en   = (state == S_LOAD);
  assign tbl_addr = col;
  assign valid    = (state == S_VALID);
  assign finished = (state == S_END);
  assign far_maj  = {1'b0, entry[14:12], row, 8'(col)};
  assign far_min  = {6'd0, minor};

  always_ff @(posedge clk) begin
    if (rst) begin
      state <= S_IDLE;
      row   <= '0;
      col   <= '0;
      minor <= '0;
      entry <= '0;
    end else if (start) begin
      state <= (rows == 4'd0) ? S_END : S_LOAD;
      row   <= '0;
      col   <= '0;
      minor <= '0;
    end else begin
      unique case (state)
        S_IDLE, S_END: ;
        S_LOAD: state <= S_WAIT;
        S_WAIT: begin
          entry <= tbl_rdata;
          state <= S_CHECK;
        end
        S_CHECK, S_VALID: begin
          if ((state == S_CHECK && entry[9:0] != 10'd0) ) begin
            state <= S_VALID;
          end else if (state == S_VALID && !next) begin
            state <= S_VALID;
          end else if (state == S_VALID && minor + 10'd1 < entry[9:0]) begin
            minor <= minor + 10'd1;
          end else begin
            // leave this column
            minor <= '0;
            if (entry[15] || col == '1) begin
              col <= '0;
              if (row + 4'd1 < rows) begin
                row   <= row + 4'd1;
                state <= S_LOAD;
              end else begin
                state <= S_END;
              end
            end else begin
              col   <= col + 1'b1;
              state <= S_LOAD;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
