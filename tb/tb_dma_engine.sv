// tb_dma_engine: checks block loads and stores through the off-chip port.
//
// A behavioural memory with random back-pressure and a fixed read latency
// stands in for DDR. Loads of strided blocks must deliver every element, in
// the right row and column, to the buffer write port; stores must place a
// C tile at the right addresses, either as 32-bit sums or requantised to
// INT8 with shift and saturation (both saturation limits are exercised).
// Transposed loads must read the block column-major. On-chip moves must copy
// a requantised C tile into the operand buffer, plain or transposed, one
// element per cycle and without a single off-chip request.
module tb_dma_engine;
  import tnn_pkg::*;

  localparam int TR = 8, TC = 8;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic  start = 1'b0, dir = 1'b0, move = 1'b0, quant = 1'b0, trans = 1'b0;
  dim_t  rows, cols, stride;
  addr_t addr;
  logic [4:0] shift = '0;
  logic  busy, done;
  logic  mem_req, mem_we, mem_gnt, mem_rvalid;
  addr_t mem_addr;
  word_t mem_wdata, mem_rdata;
  logic  buf_wr_en;
  dim_t  buf_wr_row, buf_wr_col, c_rd_row, c_rd_col;
  data_t buf_wr_data;
  acc_t  c_rd_data;

  int buf_got [TR][TC];
  int ctile [TR][TC];
  int sat_hi = 0, sat_lo = 0;

  dma_engine dut (.*);
  ddr_model #(.WORDS(4096), .LAT(3), .STALL_PCT(30)) u_ddr (
    .clk, .mem_req, .mem_we, .mem_addr, .mem_wdata, .mem_gnt, .mem_rvalid, .mem_rdata);

  int cyc = 0, move_reqs = 0, last_len = 0;
  always @(posedge clk) begin
    cyc++;
    if (buf_wr_en) buf_got[buf_wr_row][buf_wr_col] = int'(buf_wr_data);
    if (move && busy && mem_req) move_reqs++;
  end
  assign c_rd_data = (int'(c_rd_row) < TR && int'(c_rd_col) < TC) ? acc_t'(ctile[c_rd_row][c_rd_col]) : '0;

  task automatic go(bit d, int r, int c, int a, int s, bit q, int sh, bit tr = 1'b0, bit mv = 1'b0);
    int c0;
    @(negedge clk);
    dir = d; rows = dim_t'(r); cols = dim_t'(c); addr = addr_t'(a); stride = dim_t'(s);
    quant = q; shift = 5'(sh); trans = tr; move = mv; start = 1'b1;
    @(negedge clk); start = 1'b0;
    c0 = cyc;
    while (!done) @(negedge clk);
    last_len = cyc - c0;
    @(negedge clk); move = 1'b0;
  endtask

  function automatic int sat(int v);
    return v > 127 ? 127 : (v < -128 ? -128 : v);
  endfunction

  initial begin
    // hold reset longer than the memory model's read latency, so that nothing
    // requested from the random pre-reset state can return after it
    repeat (10) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 6; n++) begin
      automatic int r = 1 + int'($urandom_range(TR - 1)), c = 1 + int'($urandom_range(TC - 1));
      automatic int s = c + int'($urandom_range(5)), a = int'($urandom_range(1000));
      // load
      for (int i = 0; i < TR; i++) for (int j = 0; j < TC; j++) buf_got[i][j] = 9999;
      for (int i = 0; i < 64 * 20; i++) u_ddr.mem[1000 + i] = $urandom;
      go(1'b0, r, c, 1000 + a, s, 1'b0, 0);
      for (int i = 0; i < TR; i++) for (int j = 0; j < TC; j++) begin
        automatic int e = (i < r && j < c) ? int'(data_t'(u_ddr.mem[1000 + a + i * s + j][7:0])) : 9999;
        checks++;
        if (buf_got[i][j] != e) begin
          failures++;
          $display("FAIL load %0d (%0d,%0d): %0d expected %0d", n, i, j, buf_got[i][j], e);
        end
      end
      // transposed load: buffer (i, j) <- mem[base + j*st + i]
      for (int i = 0; i < TR; i++) for (int j = 0; j < TC; j++) buf_got[i][j] = 9999;
      go(1'b0, r, c, 1000 + a, r + 2, 1'b0, 0, 1'b1);
      for (int i = 0; i < TR; i++) for (int j = 0; j < TC; j++) begin
        automatic int e = (i < r && j < c) ? int'(data_t'(u_ddr.mem[1000 + a + j * (r + 2) + i][7:0])) : 9999;
        checks++;
        if (buf_got[i][j] != e) begin
          failures++;
          $display("FAIL transposed load %0d (%0d,%0d): %0d expected %0d", n, i, j, buf_got[i][j], e);
        end
      end
      // store, plain then quantised
      for (int q = 0; q < 2; q++) begin
        automatic int sh = q ? int'($urandom_range(6)) : 0;
        for (int i = 0; i < TR; i++) for (int j = 0; j < TC; j++)
          ctile[i][j] = int'($urandom_range(40000)) - 20000;
        for (int i = 0; i < 200; i++) u_ddr.mem[3000 + i] = 32'hdead_beef;
        go(1'b1, r, c, 3000 + (a % 50), s, q[0], sh);
        repeat (2) @(negedge clk);
        for (int i = 0; i < r; i++) for (int j = 0; j < c; j++) begin
          automatic int e = q ? sat(ctile[i][j] >>> sh) : ctile[i][j];
          if (q && e == 127) sat_hi++;
          if (q && e == -128) sat_lo++;
          checks++;
          if (int'(u_ddr.mem[3000 + (a % 50) + i * s + j]) != e) begin
            failures++;
            $display("FAIL store q=%0d (%0d,%0d): %0d expected %0d", q, i, j,
                     int'(u_ddr.mem[3000 + (a % 50) + i * s + j]), e);
          end
        end
        // the word after each row end (inside the stride gap) stays untouched
        if (s > c) begin
          checks++;
          if (u_ddr.mem[3000 + (a % 50) + c] != 32'hdead_beef) failures++;
        end
      end
      // on-chip move C -> operand buffer, requantised, plain and transposed
      for (int t = 0; t < 2; t++) begin
        automatic int sh = int'($urandom_range(8));
        for (int i = 0; i < TR; i++) for (int j = 0; j < TC; j++) begin
          ctile[i][j] = int'($urandom_range(60000)) - 30000;
          buf_got[i][j] = 9999;
        end
        go(1'b0, r, c, 0, 0, 1'b0, sh, t[0], 1'b1);
        for (int i = 0; i < TR; i++) for (int j = 0; j < TC; j++) begin
          automatic int si = t ? j : i, sj = t ? i : j;   // source element in C
          automatic int e = (si < r && sj < c) ? sat(ctile[si][sj] >>> sh) : 9999;
          checks++;
          if (buf_got[i][j] != e) begin
            failures++;
            $display("FAIL move t=%0d (%0d,%0d): %0d expected %0d", t, i, j, buf_got[i][j], e);
          end
        end
        checks++;
        if (last_len != r * c) begin
          failures++; $display("FAIL move of %0dx%0d took %0d cycles", r, c, last_len);
        end
      end
    end
    checks++;
    if (move_reqs != 0) begin failures++; $display("FAIL %0d memory requests during moves", move_reqs); end
    checks++;
    if (u_ddr.stall_cycles == 0 || sat_hi == 0 || sat_lo == 0) begin
      failures++;
      $display("FAIL coverage: stalls %0d sat_hi %0d sat_lo %0d", u_ddr.stall_cycles, sat_hi, sat_lo);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
