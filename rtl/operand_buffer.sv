// operand_buffer: on-chip INT8 operand tile buffer (A_buf or B_buf).
//
// Holds a ROWS x COLS tile. The DMA side writes one element per cycle. The
// compute side reads a vector of LANES elements per cycle, either along a row
// (rd_col_mode = 0: mem[rd_row][rd_col + l]) or down a column
// (rd_col_mode = 1: mem[rd_row + l][rd_col]); lanes beyond the tile read 0.
// Reading both ways lets the same buffer feed the array as the streaming
// operand in one dataflow and as the stationary operand in another, which is
// how the buffers change their logical role between WS, OS and IS.
// Reads are combinational (the storage is fully partitioned into registers);
// a write is visible from the next cycle. Contents are not reset.
// The paper gives the buffers' names and tile shapes (A_buf TM x TK, B_buf
// TK x TN); the port structure is this design's own.
module operand_buffer
  import tnn_pkg::*;
#(
  parameter int ROWS  = 64,
  parameter int COLS  = 64,
  parameter int LANES = 32
) (
  input  logic  clk,
  input  logic  wr_en,
  input  dim_t  wr_row,
  input  dim_t  wr_col,
  input  data_t wr_data,
  input  logic  rd_col_mode,
  input  dim_t  rd_row,
  input  dim_t  rd_col,
  output data_t rd_data [LANES]
);

  localparam int RW = (ROWS > 1) ? $clog2(ROWS) : 1;
  localparam int CW = (COLS > 1) ? $clog2(COLS) : 1;

  data_t mem [ROWS][COLS];

  always_ff @(posedge clk) begin
    if (wr_en && int'(wr_row) < ROWS && int'(wr_col) < COLS)
      mem[wr_row[RW-1:0]][wr_col[CW-1:0]] <= wr_data;
  end

  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      int r, c;
      r = int'(rd_row) + (rd_col_mode ? l : 0);
      c = int'(rd_col) + (rd_col_mode ? 0 : l);
      if (r < ROWS && c < COLS) rd_data[l] = mem[r][c];
      else                      rd_data[l] = '0;
    end
  end

endmodule
