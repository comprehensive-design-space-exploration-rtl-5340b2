// output_buffer: on-chip 32-bit result tile buffer (C_buf).
//
// Holds a ROWS x COLS tile of partial sums. The array side writes a vector of
// LANES results per cycle along a row (wr_col_mode = 0: [wr_row][wr_col + l])
// or down a column (wr_col_mode = 1: [wr_row + l][wr_col]); lane l is written
// only if wr_mask[l] is set. With wr_acc the value is added to what is stored
// (read-modify-write in the same cycle), which accumulates partial sums over
// K tiles in the WS and IS dataflows. The DMA side reads one element per cycle
// combinationally. A write is visible from the next cycle; no reset.
// The paper gives the name and shape (C_buf TM x TN); accumulate-on-write and
// the port structure are this design's own.
module output_buffer
  import tnn_pkg::*;
#(
  parameter int ROWS  = 64,
  parameter int COLS  = 64,
  parameter int LANES = 32
) (
  input  logic clk,
  input  logic wr_en,
  input  logic wr_col_mode,
  input  logic wr_acc,
  input  dim_t wr_row,
  input  dim_t wr_col,
  input  logic wr_mask [LANES],
  input  acc_t wr_data [LANES],
  input  dim_t rd_row,
  input  dim_t rd_col,
  output acc_t rd_data
);

  localparam int RW = (ROWS > 1) ? $clog2(ROWS) : 1;
  localparam int CW = (COLS > 1) ? $clog2(COLS) : 1;

  acc_t mem [ROWS][COLS];

  always_ff @(posedge clk) begin
    if (wr_en) begin
      for (int l = 0; l < LANES; l++) begin
        int r, c;
        r = int'(wr_row) + (wr_col_mode ? l : 0);
        c = int'(wr_col) + (wr_col_mode ? 0 : l);
        if (wr_mask[l] && r < ROWS && c < COLS)
          mem[r][c] <= wr_acc ? mem[r][c] + wr_data[l] : wr_data[l];
      end
    end
  end

  assign rd_data = (int'(rd_row) < ROWS && int'(rd_col) < COLS) ? mem[rd_row[RW-1:0]][rd_col[CW-1:0]]
                                                              : '0;

endmodule
