// tb_output_buffer: checks C_buf vector writes along rows and down columns,
// lane masking, accumulate-on-write and the single-element read port against
// a copy kept in the testbench, over many random operations.
module tb_output_buffer;
  import tnn_pkg::*;

  localparam int R = 9, C = 6, L = 4;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic wr_en = 1'b0, wr_col_mode = 1'b0, wr_acc = 1'b0;
  dim_t wr_row, wr_col, rd_row, rd_col;
  logic wr_mask [L];
  acc_t wr_data [L];
  acc_t rd_data;
  int   ref_mem [R][C];
  int   n_acc = 0;

  output_buffer #(.ROWS(R), .COLS(C), .LANES(L)) dut (.*);

  initial begin
    // overwrite everything first
    for (int r = 0; r < R; r++) for (int c = 0; c < C; c += L) begin
      @(negedge clk);
      wr_en = 1'b1; wr_col_mode = 1'b0; wr_acc = 1'b0; wr_row = dim_t'(r); wr_col = dim_t'(c);
      for (int l = 0; l < L; l++) begin
        wr_mask[l] = 1'b1;
        wr_data[l] = acc_t'($urandom);
        if (c + l < C) ref_mem[r][c+l] = int'(wr_data[l]);
      end
    end
    for (int n = 0; n < 400; n++) begin
      automatic int r = int'($urandom_range(R - 1)), c = int'($urandom_range(C - 1));
      @(negedge clk);
      wr_en = 1'b1; wr_col_mode = $urandom_range(1); wr_acc = $urandom_range(1);
      wr_row = dim_t'(r); wr_col = dim_t'(c);
      if (wr_acc) n_acc++;
      for (int l = 0; l < L; l++) begin
        automatic int rr = r + (wr_col_mode ? l : 0), cc = c + (wr_col_mode ? 0 : l);
        wr_mask[l] = $urandom_range(3) != 0;
        wr_data[l] = acc_t'(int'($urandom_range(200000)) - 100000);
        if (wr_mask[l] && rr < R && cc < C)
          ref_mem[rr][cc] = wr_acc ? ref_mem[rr][cc] + int'(wr_data[l]) : int'(wr_data[l]);
      end
    end
    @(negedge clk); wr_en = 1'b0;
    for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) begin
      rd_row = dim_t'(r); rd_col = dim_t'(c); #1;
      checks++;
      if (rd_data != acc_t'(ref_mem[r][c])) begin
        failures++;
        $display("FAIL C[%0d][%0d] = %0d expected %0d", r, c, rd_data, ref_mem[r][c]);
      end
    end
    rd_row = dim_t'(R); #1;
    checks++;
    if (rd_data != 0) failures++;
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
