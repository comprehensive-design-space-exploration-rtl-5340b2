// tb_tnn_accel_full: the end-to-end contraction program of tb_tnn_accel_top
// run on the accelerator at its default size (32 x 32 PE array, 64-element
// tiles, 64-instruction program memory), with matrix shapes large enough to
// need several passes of every core and most of each buffer:
//   split 1x2 : core 0 P = X  x G1 (OS, 64x50 x 50x60)  core 1 Q = G3 x G4 (WS, 40x33 x 33x64)
//   joint 1x1 : P moved on chip from core 0's C_buf to its A_buf, first half
//               of Q moved from core 1's C_buf to core 0's B_buf;
//               R = P x G2 (IS, 64x60 x 60x40); Y = R x Q (WS, K = 40 split 20 + 20)
//               GW = X^T x P (OS), X loaded transposed (training step)
//   split 2x1 : core 0 Z0 = X x G1 (IS)                 core 1 Z1 = G3 x G4 (OS)
// Results in the behavioural DDR are checked against a reference and each
// mechanism (dataflows, partitions, overlap, stalls, back-pressure,
// saturation, accumulation, multi-pass tiling, on-chip moves within and
// across cores) must occur at least once.
module tb_tnn_accel_full;
  import tnn_pkg::*;

  // ---------------------------------------------------------- sizes
  localparam int MP = 32, NP = 32, TT = 64, PD = 64;
  localparam int M1 = 64, K1 = 50, N1 = 60;    // X: M1 x K1, G1: K1 x N1
  localparam int M2 = 40, K2 = 33, N2 = 64;   // G3: M2 x K2, G4: K2 x N2
  localparam int N3 = M2;                    // G2: N1 x N3
  localparam int SH = 9;                     // requantisation shift
  localparam int WATCHDOG = 2000000;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic prog_we = 1'b0, start = 1'b0;
  logic [$clog2(PD)-1:0] prog_addr = '0;
  instr_t prog_data = '0;
  logic busy, done;
  logic mem_req, mem_we, mem_gnt, mem_rvalid;
  addr_t mem_addr;
  word_t mem_wdata, mem_rdata;
  part_e part;
  logic [31:0] perf_cycles, perf_stalls, perf_dual, perf_gemms;

  tnn_accel_top dut (.*);

  ddr_model #(.WORDS(65536), .LAT(5), .STALL_PCT(15)) u_ddr (
    .clk, .mem_req, .mem_we, .mem_addr, .mem_wdata, .mem_gnt, .mem_rvalid, .mem_rdata);

  // ---------------------------------------------------------- DDR map
  localparam int AX = 0, AG1 = 4096, AG3 = 8192, AG4 = 12288, AG2 = 16384;
  localparam int AP = 20480, AQ = 24576, AR = 28672, AY = 32768, AZ0 = 36864, AZ1 = 40960;
  localparam int AGW = 45056;

  int X [M1][K1], G1 [K1][N1], G3 [M2][K2], G4 [K2][N2], G2 [N1][N3];
  int P [M1][N1], Q [M2][N2], R [M1][N3], Y [M1][N2], Z0 [M1][N1], Z1 [M2][N2];
  int GW [K1][N1];   // weight gradient X^T x P

  function automatic int rq(int v);
    int s = v >>> SH;
    return s > 127 ? 127 : (s < -128 ? -128 : s);
  endfunction

  instr_t prog [$];
  function automatic instr_t mk(opcode_e op, bit core, bit bb, part_e p, dataflow_e d, bit acc,
                                bit q, int d0, int d1, int d2, int a, int stride);
    instr_t i;
    i = '0;
    i.op = op; i.core = core; i.buf_b = bb; i.part = p; i.df = d; i.acc = acc; i.quant = q;
    i.shift = 5'(SH); i.dim0 = dim_t'(d0); i.dim1 = dim_t'(d1); i.dim2 = dim_t'(d2);
    i.addr = addr_t'(a); i.stride = dim_t'(stride);
    return i;
  endfunction
  task automatic load(bit core, bit bb, int rows, int cols, int a, int stride, bit tr = 1'b0);
    instr_t i;
    i = mk(OP_LOAD, core, bb, PART_1X1, DF_WS, 0, 0, rows, cols, 0, a, stride);
    i.trans = tr;
    prog.push_back(i);
  endtask
  task automatic gemm(bit core, dataflow_e d, bit acc, int m, int k, int n);
    prog.push_back(mk(OP_GEMM, core, 0, PART_1X1, d, acc, 0, m, k, n, 0, 0));
  endtask
  task automatic store(bit core, bit q, int rows, int cols, int a);
    prog.push_back(mk(OP_STORE, core, 0, PART_1X1, DF_WS, 0, q, rows, cols, 0, a, cols));
  endtask
  // on-chip copy of core src's C_buf (requantised) into A_buf/B_buf of core dst
  task automatic move(bit dst, bit bb, bit src, int rows, int cols);
    instr_t i;
    i = mk(OP_MOVE, dst, bb, PART_1X1, DF_WS, 0, 0, rows, cols, 0, 0, 0);
    i.src = src;
    prog.push_back(i);
  endtask
  task automatic set_part(part_e p);
    prog.push_back(mk(OP_CONFIG, 0, 0, p, DF_WS, 0, 0, 0, 0, 0, 0, 0));
  endtask

  // ---------------------------------------------------------- mechanism counters
  int n_df [3] = '{0, 0, 0};
  int n_part [3] = '{0, 0, 0};
  int n_acc = 0, n_multipass = 0, n_trans = 0, n_move = 0, n_move_x = 0;
  always @(posedge clk) begin
    if (dut.dma_start && dut.dma_trans) n_trans++;
    if (dut.dma_start && dut.dma_move) begin
      if (dut.dma_src == dut.dma_core) n_move++;
      else n_move_x++;
    end
    for (int c = 0; c < 2; c++)
      if (dut.core_start[c]) begin
        n_df[int'(dut.core_df)]++;
        n_part[int'(part)]++;
        if (dut.core_acc) n_acc++;
        if (int'(dut.core_m) > MP || int'(dut.core_n) > NP || int'(dut.core_k) > MP) n_multipass++;
      end
  end


  int n_sat = 0;
  task automatic check_word(string name, int a, int e);
    checks++;
    if (int'(u_ddr.mem[a]) != e) begin
      failures++;
      if (failures < 12) $display("FAIL %s @%0d: %0d expected %0d", name, a, int'(u_ddr.mem[a]), e);
    end
  endtask

  initial begin
    // ---------------- data and reference
    for (int i = 0; i < M1; i++) for (int j = 0; j < K1; j++) X[i][j]  = int'($urandom_range(255)) - 128;
    for (int i = 0; i < K1; i++) for (int j = 0; j < N1; j++) G1[i][j] = int'($urandom_range(255)) - 128;
    for (int i = 0; i < M2; i++) for (int j = 0; j < K2; j++) G3[i][j] = int'($urandom_range(255)) - 128;
    for (int i = 0; i < K2; i++) for (int j = 0; j < N2; j++) G4[i][j] = int'($urandom_range(255)) - 128;
    for (int i = 0; i < N1; i++) for (int j = 0; j < N3; j++) G2[i][j] = int'($urandom_range(255)) - 128;
    for (int i = 0; i < M1; i++) for (int j = 0; j < K1; j++) u_ddr.mem[AX + i * K1 + j]  = word_t'(X[i][j]);
    for (int i = 0; i < K1; i++) for (int j = 0; j < N1; j++) u_ddr.mem[AG1 + i * N1 + j] = word_t'(G1[i][j]);
    for (int i = 0; i < M2; i++) for (int j = 0; j < K2; j++) u_ddr.mem[AG3 + i * K2 + j] = word_t'(G3[i][j]);
    for (int i = 0; i < K2; i++) for (int j = 0; j < N2; j++) u_ddr.mem[AG4 + i * N2 + j] = word_t'(G4[i][j]);
    for (int i = 0; i < N1; i++) for (int j = 0; j < N3; j++) u_ddr.mem[AG2 + i * N3 + j] = word_t'(G2[i][j]);

    for (int i = 0; i < M1; i++) for (int j = 0; j < N1; j++) begin
      automatic int s = 0;
      for (int k = 0; k < K1; k++) s += X[i][k] * G1[k][j];
      Z0[i][j] = s; P[i][j] = rq(s);
      if (P[i][j] == 127 || P[i][j] == -128) n_sat++;
    end
    for (int i = 0; i < M2; i++) for (int j = 0; j < N2; j++) begin
      automatic int s = 0;
      for (int k = 0; k < K2; k++) s += G3[i][k] * G4[k][j];
      Z1[i][j] = s; Q[i][j] = rq(s);
      if (Q[i][j] == 127 || Q[i][j] == -128) n_sat++;
    end
    for (int i = 0; i < K1; i++) for (int j = 0; j < N1; j++) begin
      automatic int s = 0;
      for (int k = 0; k < M1; k++) s += X[k][i] * P[k][j];
      GW[i][j] = s;
    end
    for (int i = 0; i < M1; i++) for (int j = 0; j < N3; j++) begin
      automatic int s = 0;
      for (int k = 0; k < N1; k++) s += P[i][k] * G2[k][j];
      R[i][j] = rq(s);
    end
    for (int i = 0; i < M1; i++) for (int j = 0; j < N2; j++) begin
      automatic int s = 0;
      for (int k = 0; k < N3; k++) s += R[i][k] * Q[k][j];
      Y[i][j] = s;
    end

    // ---------------- program
    set_part(PART_1X2);
    load(0, 0, M1, K1, AX, K1);   load(0, 1, K1, N1, AG1, N1);
    load(1, 0, M2, K2, AG3, K2);  load(1, 1, K2, N2, AG4, N2);
    gemm(0, DF_OS, 0, M1, K1, N1);  gemm(1, DF_WS, 0, M2, K2, N2);
    store(0, 1, M1, N1, AP);      store(1, 1, M2, N2, AQ);
    prog.push_back(mk(OP_SYNC, 0, 0, PART_1X1, DF_WS, 0, 0, 0, 0, 0, 0, 0));
    set_part(PART_1X1);
    // P stays on chip: core 0 C_buf -> core 0 A_buf
    move(0, 0, 0, M1, N1);        load(0, 1, N1, N3, AG2, N3);  gemm(0, DF_IS, 0, M1, N1, N3);
    store(0, 1, M1, N3, AR);
    // Y = R x Q with K = N3 split in two halves accumulated in C_buf
    // first half of Q comes straight from core 1's C_buf, the second from DDR
    load(0, 0, M1, N3 / 2, AR, N3);            move(0, 1, 1, N3 / 2, N2);
    gemm(0, DF_WS, 0, M1, N3 / 2, N2);
    load(0, 0, M1, N3 - N3 / 2, AR + N3 / 2, N3);
    load(0, 1, N3 - N3 / 2, N2, AQ + (N3 / 2) * N2, N2);
    gemm(0, DF_WS, 1, M1, N3 - N3 / 2, N2);
    store(0, 0, M1, N2, AY);
    // training-style weight gradient: GW = X^T x P, X loaded transposed
    load(0, 0, K1, M1, AX, K1, 1'b1);  load(0, 1, M1, N1, AP, N1);
    gemm(0, DF_OS, 0, K1, M1, N1);
    store(0, 0, K1, N1, AGW);
    set_part(PART_2X1);
    load(0, 0, M1, K1, AX, K1);   load(0, 1, K1, N1, AG1, N1);
    load(1, 0, M2, K2, AG3, K2);  load(1, 1, K2, N2, AG4, N2);
    gemm(0, DF_IS, 0, M1, K1, N1);  gemm(1, DF_OS, 0, M2, K2, N2);
    store(0, 0, M1, N1, AZ0);     store(1, 0, M2, N2, AZ1);
    prog.push_back(mk(OP_END, 0, 0, PART_1X1, DF_WS, 0, 0, 0, 0, 0, 0, 0));
    if (prog.size() > PD) $fatal(1, "program too long");

    // hold reset longer than the memory model's read latency, so that nothing
    // requested from the random pre-reset state can return after it
    repeat (10) @(negedge clk);
    rst_n = 1'b1;
    foreach (prog[i]) begin
      @(negedge clk);
      prog_we = 1'b1; prog_addr = $bits(prog_addr)'(i); prog_data = prog[i];
    end
    @(negedge clk); prog_we = 1'b0; start = 1'b1;
    @(negedge clk); start = 1'b0;
    while (!done) @(negedge clk);
    repeat (2) @(negedge clk);

    // ---------------- results
    for (int i = 0; i < M1; i++) for (int j = 0; j < N1; j++) check_word("P", AP + i * N1 + j, P[i][j]);
    for (int i = 0; i < M2; i++) for (int j = 0; j < N2; j++) check_word("Q", AQ + i * N2 + j, Q[i][j]);
    for (int i = 0; i < M1; i++) for (int j = 0; j < N3; j++) check_word("R", AR + i * N3 + j, R[i][j]);
    for (int i = 0; i < M1; i++) for (int j = 0; j < N2; j++) check_word("Y", AY + i * N2 + j, Y[i][j]);
    for (int i = 0; i < M1; i++) for (int j = 0; j < N1; j++) check_word("Z0", AZ0 + i * N1 + j, Z0[i][j]);
    for (int i = 0; i < M2; i++) for (int j = 0; j < N2; j++) check_word("Z1", AZ1 + i * N2 + j, Z1[i][j]);
    for (int i = 0; i < K1; i++) for (int j = 0; j < N1; j++) check_word("GW", AGW + i * N1 + j, GW[i][j]);

    // ---------------- mechanisms
    $display("mechanisms: WS %0d OS %0d IS %0d | 1x1 %0d 1x2 %0d 2x1 %0d | dual-core cycles %0d | stalls %0d | ddr back-pressure %0d | saturated %0d | accumulate %0d | multi-pass %0d | transposed loads %0d | on-chip moves %0d + %0d cross-core | cycles %0d",
             n_df[0], n_df[1], n_df[2], n_part[0], n_part[1], n_part[2], perf_dual, perf_stalls,
             u_ddr.stall_cycles, n_sat, n_acc, n_multipass, n_trans, n_move, n_move_x, perf_cycles);
    for (int d = 0; d < 3; d++) begin checks++; if (n_df[d] == 0) begin failures++; $display("FAIL dataflow %0d never used", d); end end
    for (int p = 0; p < 3; p++) begin checks++; if (n_part[p] == 0) begin failures++; $display("FAIL partition %0d never used", p); end end
    checks++; if (perf_dual == 0) begin failures++; $display("FAIL cores never ran together"); end
    checks++; if (perf_stalls == 0) begin failures++; $display("FAIL no sequencer stall"); end
    checks++; if (u_ddr.stall_cycles == 0) begin failures++; $display("FAIL no DDR back-pressure"); end
    checks++; if (n_sat == 0) begin failures++; $display("FAIL no requantisation saturation"); end
    checks++; if (n_trans == 0) begin failures++; $display("FAIL no transposed load"); end
    checks++; if (n_move == 0) begin failures++; $display("FAIL no on-chip move"); end
    checks++; if (n_move_x == 0) begin failures++; $display("FAIL no cross-core move"); end
    checks++; if (n_acc == 0) begin failures++; $display("FAIL no accumulate GEMM"); end
    checks++; if (n_multipass == 0) begin failures++; $display("FAIL no multi-pass GEMM"); end
    checks++; if (perf_gemms != 8) begin failures++; $display("FAIL perf_gemms %0d", perf_gemms); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
