// tb_operand_buffer: fills an operand buffer with random INT8 values through
// its write port and checks row-vector reads, column-vector reads and the zero
// returned for lanes past the tile edge against a copy kept in the testbench.
module tb_operand_buffer;
  import tnn_pkg::*;

  localparam int R = 10, C = 7, L = 4;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic  wr_en = 1'b0, rd_col_mode = 1'b0;
  dim_t  wr_row, wr_col, rd_row, rd_col;
  data_t wr_data, rd_data [L];
  int    ref_mem [R][C];

  operand_buffer #(.ROWS(R), .COLS(C), .LANES(L)) dut (.*);

  initial begin
    for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) begin
      ref_mem[r][c] = int'($urandom_range(255)) - 128;
      @(negedge clk);
      wr_en = 1'b1; wr_row = dim_t'(r); wr_col = dim_t'(c); wr_data = data_t'(ref_mem[r][c]);
    end
    @(negedge clk); wr_en = 1'b0;
    // an out-of-range write must not disturb anything
    wr_en = 1'b1; wr_row = dim_t'(R); wr_col = '0; wr_data = 8'sd55;
    @(negedge clk); wr_en = 1'b0;
    for (int mode = 0; mode < 2; mode++)
      for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) begin
        rd_col_mode = mode[0]; rd_row = dim_t'(r); rd_col = dim_t'(c); #1;
        for (int l = 0; l < L; l++) begin
          automatic int rr = r + (mode ? l : 0), cc = c + (mode ? 0 : l);
          automatic int e = (rr < R && cc < C) ? ref_mem[rr][cc] : 0;
          checks++;
          if (rd_data[l] != data_t'(e)) begin
            failures++;
            $display("FAIL mode %0d (%0d,%0d) lane %0d: %0d expected %0d", mode, r, c, l, rd_data[l], e);
          end
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
