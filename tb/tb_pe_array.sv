// tb_pe_array: checks the systolic array in all three partitions.
//
// The testbench plays the part of the controllers: it skews operands into the
// west and north edges of each core by hand and reads the core's bottom row.
// In every partition it runs an output-stationary product (clear, stream,
// drain) on each core at the same time, with different data per core, and a
// weight-stationary product (load, stream, partial sums out of the bottom).
// Results are compared with products computed in the testbench, so a wrong
// boundary multiplexer, lane order or output selection shows as a mismatch.
module tb_pe_array;
  import tnn_pkg::*;

  localparam int MP = 4, NP = 4, KD = 6, MD = 5;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  part_e     part = PART_1X1;
  pe_op_e    op [2];
  dataflow_e df [2];
  data_t     west [2][MP];
  data_t     north [2][NP];
  acc_t      south [2][NP];

  pe_array #(.M_PE(MP), .N_PE(NP)) dut (
    .clk, .rst_n, .part, .op_c0(op[0]), .df_c0(df[0]), .op_c1(op[1]), .df_c1(df[1]),
    .west_c0(west[0]), .north_c0(north[0]), .west_c1(west[1]), .north_c1(north[1]),
    .south_c0(south[0]), .south_c1(south[1]));

  int A [2][MP][KD];   // per core, OS: rows x K ; WS: M x K rows
  int B [2][KD][NP];
  int W [2][MP][NP];   // WS stationary block
  int X [2][MD][MP];   // WS streamed rows

  task automatic clear_inputs();
    for (int c = 0; c < 2; c++) begin
      op[c] = PE_IDLE;
      df[c] = DF_OS;
      for (int i = 0; i < MP; i++) west[c][i] = '0;
      for (int j = 0; j < NP; j++) north[c][j] = '0;
    end
  endtask

  task automatic geometry(part_e p, output int rg, output int cg, output int ncores);
    case (p)
      PART_1X2: begin rg = MP;     cg = NP / 2; ncores = 2; end
      PART_2X1: begin rg = MP / 2; cg = NP;     ncores = 2; end
      default:  begin rg = MP;     cg = NP;     ncores = 1; end
    endcase
  endtask

  task automatic run_os(part_e p);
    int rg, cg, nc;
    geometry(p, rg, cg, nc);
    for (int c = 0; c < 2; c++) begin
      for (int i = 0; i < MP; i++) for (int k = 0; k < KD; k++) A[c][i][k] = int'($urandom_range(255)) - 128;
      for (int k = 0; k < KD; k++) for (int j = 0; j < NP; j++) B[c][k][j] = int'($urandom_range(255)) - 128;
    end
    @(negedge clk);
    part = p;
    clear_inputs();
    for (int c = 0; c < nc; c++) begin op[c] = PE_CLEAR; df[c] = DF_OS; end
    for (int t = 0; t < KD + rg + cg - 2; t++) begin
      @(negedge clk);
      for (int c = 0; c < nc; c++) begin
        op[c] = PE_COMPUTE;
        for (int i = 0; i < MP; i++)
          west[c][i] = (i < rg && t - i >= 0 && t - i < KD) ? data_t'(A[c][i][t-i]) : data_t'(0);
        for (int j = 0; j < NP; j++)
          north[c][j] = (j < cg && t - j >= 0 && t - j < KD) ? data_t'(B[c][t-j][j]) : data_t'(0);
      end
    end
    for (int d = 0; d < rg; d++) begin
      @(negedge clk);
      for (int c = 0; c < nc; c++) begin
        op[c] = PE_DRAIN;
        for (int i = 0; i < MP; i++) west[c][i] = '0;
        for (int j = 0; j < NP; j++) north[c][j] = '0;
      end
      #1;
      for (int c = 0; c < nc; c++)
        for (int j = 0; j < cg; j++) begin
          int e = 0;
          for (int k = 0; k < KD; k++) e += A[c][rg-1-d][k] * B[c][k][j];
          checks++;
          if (south[c][j] != e) begin
            failures++;
            $display("FAIL OS %s core %0d row %0d col %0d: %0d expected %0d", p.name(), c, rg-1-d, j,
                     south[c][j], e);
          end
        end
    end
    @(negedge clk);
    clear_inputs();
  endtask

  task automatic run_ws(part_e p);
    int rg, cg, nc;
    geometry(p, rg, cg, nc);
    for (int c = 0; c < 2; c++) begin
      for (int i = 0; i < MP; i++) for (int j = 0; j < NP; j++) W[c][i][j] = int'($urandom_range(255)) - 128;
      for (int m = 0; m < MD; m++) for (int i = 0; i < MP; i++) X[c][m][i] = int'($urandom_range(255)) - 128;
    end
    @(negedge clk);
    part = p;
    clear_inputs();
    for (int t = 0; t < rg; t++) begin
      if (t > 0) @(negedge clk);
      for (int c = 0; c < nc; c++) begin
        op[c] = PE_LOAD; df[c] = DF_WS;
        for (int j = 0; j < NP; j++) north[c][j] = (j < cg) ? data_t'(W[c][rg-1-t][j]) : data_t'(0);
      end
    end
    for (int t = 0; t < MD + rg + cg; t++) begin
      @(negedge clk);
      for (int c = 0; c < nc; c++) begin
        op[c] = PE_COMPUTE;
        for (int j = 0; j < NP; j++) north[c][j] = '0;
        for (int i = 0; i < MP; i++)
          west[c][i] = (i < rg && t - i >= 0 && t - i < MD) ? data_t'(X[c][t-i][i]) : data_t'(0);
      end
      #1;
      // bottom of column j carries row m = t - rg - j
      for (int c = 0; c < nc; c++)
        for (int j = 0; j < cg; j++) begin
          int m = t - rg - j;
          if (m >= 0 && m < MD) begin
            int e = 0;
            for (int i = 0; i < rg; i++) e += X[c][m][i] * W[c][i][j];
            checks++;
            if (south[c][j] != e) begin
              failures++;
              $display("FAIL WS %s core %0d m %0d col %0d: %0d expected %0d", p.name(), c, m, j,
                       south[c][j], e);
            end
          end
        end
    end
    @(negedge clk);
    clear_inputs();
  endtask

  initial begin
    clear_inputs();
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 3; n++) begin
      run_os(PART_1X1);
      run_os(PART_1X2);
      run_os(PART_2X1);
      run_ws(PART_1X1);
      run_ws(PART_1X2);
      run_ws(PART_2X1);
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
