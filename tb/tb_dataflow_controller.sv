// tb_dataflow_controller: checks one core (controller, A/B/C buffers and the
// PE array in the 1x1 partition) on random GEMMs in WS, OS and IS.
//
// Buffers are filled through their write ports with random INT8 values, the
// controller is started, and every element of C is compared with a product
// computed in the testbench. Shapes are chosen to need several passes and to
// leave partial tiles; accumulate mode is checked by running a second GEMM on
// top of the first. The start-to-done cycle count is checked against
// 1 + passes * (phase cycles + 1), counted from the cycle that presents
// start to the cycle in which done is high.
module tb_dataflow_controller;
  import tnn_pkg::*;

  localparam int MP = 4, NP = 4, L = 4;
  localparam int TM = 12, TK = 12, TN = 12;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  // command
  logic start = 1'b0, acc = 1'b0;
  dataflow_e df = DF_WS;
  dim_t m, k, n;
  logic busy, done;

  logic  a_cm, b_cm;
  dim_t  a_r, a_c, b_r, b_c;
  data_t a_d [L], b_d [L];
  pe_op_e op; dataflow_e pdf;
  data_t west [MP], north [NP];
  acc_t  south [NP];
  logic  c_en, c_cm, c_acc; dim_t c_r, c_c; logic c_mask [NP]; acc_t c_data [NP];

  logic  aw_en = 0, bw_en = 0; dim_t w_r, w_c; data_t w_d;
  dim_t  cr_r, cr_c; acc_t cr_d;

  data_t west1 [MP], north1 [NP];
  acc_t  south1 [NP];
  initial begin
    for (int i = 0; i < MP; i++) west1[i] = '0;
    for (int j = 0; j < NP; j++) north1[j] = '0;
  end

  dataflow_controller #(.M_PE(MP), .N_PE(NP)) dut (
    .clk, .rst_n, .start, .df_in(df), .m_in(m), .k_in(k), .n_in(n), .acc_in(acc),
    .rows_g(dim_t'(MP)), .cols_g(dim_t'(NP)), .busy, .done,
    .a_rd_col_mode(a_cm), .a_rd_row(a_r), .a_rd_col(a_c), .a_rd_data(a_d),
    .b_rd_col_mode(b_cm), .b_rd_row(b_r), .b_rd_col(b_c), .b_rd_data(b_d),
    .pe_op(op), .pe_df(pdf), .west, .north, .south,
    .c_wr_en(c_en), .c_wr_col_mode(c_cm), .c_wr_acc(c_acc), .c_wr_row(c_r), .c_wr_col(c_c),
    .c_wr_mask(c_mask), .c_wr_data(c_data)
  );
  operand_buffer #(.ROWS(TM), .COLS(TK), .LANES(L)) u_a (
    .clk, .wr_en(aw_en), .wr_row(w_r), .wr_col(w_c), .wr_data(w_d),
    .rd_col_mode(a_cm), .rd_row(a_r), .rd_col(a_c), .rd_data(a_d));
  operand_buffer #(.ROWS(TK), .COLS(TN), .LANES(L)) u_b (
    .clk, .wr_en(bw_en), .wr_row(w_r), .wr_col(w_c), .wr_data(w_d),
    .rd_col_mode(b_cm), .rd_row(b_r), .rd_col(b_c), .rd_data(b_d));
  output_buffer #(.ROWS(TM), .COLS(TN), .LANES(NP)) u_c (
    .clk, .wr_en(c_en), .wr_col_mode(c_cm), .wr_acc(c_acc), .wr_row(c_r), .wr_col(c_c),
    .wr_mask(c_mask), .wr_data(c_data), .rd_row(cr_r), .rd_col(cr_c), .rd_data(cr_d));
  pe_array #(.M_PE(MP), .N_PE(NP)) u_arr (
    .clk, .rst_n, .part(PART_1X1), .op_c0(op), .df_c0(pdf), .op_c1(PE_IDLE), .df_c1(DF_WS),
    .west_c0(west), .north_c0(north), .west_c1(west1), .north_c1(north1),
    .south_c0(south), .south_c1(south1));

  int A [TM][TK], B [TK][TN], C [TM][TN];

  function automatic int ceil_div(int a, int b);
    return (a + b - 1) / b;
  endfunction

  function automatic int expected_cycles(dataflow_e d, int mm, int kk, int nn);
    int passes, phase;
    case (d)
      DF_OS:   begin passes = ceil_div(mm, MP) * ceil_div(nn, NP); phase = 1 + (kk + MP + NP - 2) + MP; end
      DF_WS:   begin passes = ceil_div(kk, MP) * ceil_div(nn, NP); phase = MP + mm + MP + NP - 1; end
      default: begin passes = ceil_div(kk, MP) * ceil_div(mm, NP); phase = MP + nn + MP + NP - 1; end
    endcase
    return 1 + passes * (phase + 1);
  endfunction

  task automatic fill(int mm, int kk, int nn);
    for (int r = 0; r < TM; r++) for (int c = 0; c < TK; c++) begin
      A[r][c] = int'($urandom_range(255)) - 128;
      @(negedge clk); aw_en = 1; w_r = dim_t'(r); w_c = dim_t'(c); w_d = data_t'(A[r][c]);
    end
    @(negedge clk); aw_en = 0;
    for (int r = 0; r < TK; r++) for (int c = 0; c < TN; c++) begin
      B[r][c] = int'($urandom_range(255)) - 128;
      @(negedge clk); bw_en = 1; w_r = dim_t'(r); w_c = dim_t'(c); w_d = data_t'(B[r][c]);
    end
    @(negedge clk); bw_en = 0;
  endtask

  task automatic run(dataflow_e d, int mm, int kk, int nn, bit accumulate);
    int cyc;
    @(negedge clk);
    df = d; m = dim_t'(mm); k = dim_t'(kk); n = dim_t'(nn); acc = accumulate; start = 1;
    @(negedge clk); start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != expected_cycles(d, mm, kk, nn)) begin
      failures++;
      $display("FAIL cycles %s M=%0d K=%0d N=%0d: %0d, expected %0d", d.name(), mm, kk, nn, cyc,
               expected_cycles(d, mm, kk, nn));
    end
    for (int r = 0; r < mm; r++) for (int c = 0; c < nn; c++) begin
      int s = accumulate ? C[r][c] : 0;
      for (int x = 0; x < kk; x++) s += A[r][x] * B[x][c];
      C[r][c] = s;
    end
    for (int r = 0; r < mm; r++) for (int c = 0; c < nn; c++) begin
      cr_r = dim_t'(r); cr_c = dim_t'(c); #1;
      checks++;
      if (cr_d !== C[r][c]) begin
        failures++;
        if (failures < 10) $display("FAIL %s M=%0d K=%0d N=%0d C[%0d][%0d]=%0d expected %0d",
                                    d.name(), mm, kk, nn, r, c, cr_d, C[r][c]);
      end
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    fill(TM, TK, TN);
    for (int d = 0; d < 3; d++) begin
      dataflow_e dd;
      dd = dataflow_e'(d);
      run(dd, 4, 4, 4, 0);
      run(dd, 7, 9, 6, 0);
      run(dd, 7, 9, 6, 1);     // accumulate on top of the previous result
      run(dd, 12, 12, 12, 0);
      run(dd, 1, 5, 11, 0);
      run(dd, 10, 1, 3, 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
