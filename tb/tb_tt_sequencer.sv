// tb_tt_sequencer: checks the contraction sequencer against simple stand-ins
// for the two cores and the DMA (each stays busy for a random time after its
// start). A two-branch program is run: under the 1x2 partition both cores
// get loads and a GEMM, then a SYNC joins them, the partition switches to
// 1x1 and a dependent GEMM and a store follow. An on-chip move from core 1's
// C_buf to core 0 is placed right behind core 1's GEMM, so it must wait for
// that GEMM to end. The testbench checks the
// order and fields of every issued command, that core 1's work overlaps
// core 0's GEMM, that nothing touches a busy core, that the partition only
// changes when both cores are idle, and the counters.
module tb_tt_sequencer;
  import tnn_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic prog_we = 1'b0, start = 1'b0;
  logic [5:0] prog_addr;
  instr_t prog_data;
  logic busy, done;
  part_e part;
  logic core_start [2], core_busy [2];
  dataflow_e core_df;
  dim_t core_m, core_k, core_n;
  logic core_acc;
  logic dma_start, dma_dir, dma_move, dma_src, dma_core, dma_buf_b, dma_trans, dma_quant, dma_busy, dma_done;
  dim_t dma_rows, dma_cols, dma_stride;
  addr_t dma_addr;
  logic [4:0] dma_shift;
  logic [31:0] perf_cycles, perf_stalls, perf_dual, perf_gemms;

  tt_sequencer #(.PROG_DEPTH(64)) dut (.*);

  // stand-in cores and DMA
  int core_left [2] = '{0, 0};
  int dma_left = 0;
  logic dma_done_q = 1'b0;
  assign core_busy[0] = core_left[0] > 0;
  assign core_busy[1] = core_left[1] > 0;
  assign dma_busy = dma_left > 0 || dma_done_q;
  assign dma_done = dma_done_q;

  typedef struct { int t; string what; int core; int a; } ev_t;
  ev_t log_q [$];
  int cyc = 0;
  int overlap_seen = 0, bad_touch = 0, bad_part = 0;

  always @(posedge clk) begin
    cyc++;
    for (int c = 0; c < 2; c++) begin
      if (core_start[c]) begin
        if (core_busy[c]) bad_touch++;
        log_q.push_back('{cyc, "gemm", c, int'(core_df) * 1000000 + int'(core_m) * 10000 + int'(core_k) * 100 + int'(core_n)});
        core_left[c] <= 10 + int'($urandom_range(20));
      end else if (core_left[c] > 0) core_left[c] <= core_left[c] - 1;
    end
    dma_done_q <= 1'b0;
    if (dma_start) begin
      if (dma_busy || core_busy[dma_core] || (dma_move && core_busy[dma_src])) bad_touch++;
      if (core_busy[!dma_core]) overlap_seen++;
      if (dma_move)
        log_q.push_back('{cyc, dma_buf_b ? "moveB" : "moveA", int'(dma_core), int'(dma_src)});
      else
        log_q.push_back('{cyc, dma_dir ? "store" : (dma_buf_b ? "loadB" : "loadA"), int'(dma_core), int'(dma_addr)});
      dma_left <= 3 + int'($urandom_range(6));
    end else if (dma_left == 1) begin
      dma_left   <= 0;
      dma_done_q <= 1'b1;
    end else if (dma_left > 0) dma_left <= dma_left - 1;
    if (dut.state == dut.Q_RUN && dut.ins.op == OP_CONFIG && dut.issue && (core_busy[0] || core_busy[1]))
      bad_part++;
  end

  function automatic instr_t mk(opcode_e op, bit core, bit bb, part_e p, dataflow_e d,
                                int m, int k, int n, int a);
    instr_t i;
    i = '0;
    i.op = op; i.core = core; i.buf_b = bb; i.part = p; i.df = d;
    i.dim0 = dim_t'(m); i.dim1 = dim_t'(k); i.dim2 = dim_t'(n);
    i.addr = addr_t'(a); i.stride = dim_t'(k);
    return i;
  endfunction

  instr_t prog [$];

  task automatic expect_ev(int idx, string what, int core, int a);
    checks++;
    if (idx >= log_q.size() || log_q[idx].what != what || log_q[idx].core != core || log_q[idx].a != a) begin
      failures++;
      if (idx < log_q.size())
        $display("FAIL event %0d: %s core %0d arg %0d, expected %s core %0d arg %0d", idx,
                 log_q[idx].what, log_q[idx].core, log_q[idx].a, what, core, a);
      else $display("FAIL event %0d missing", idx);
    end
  endtask

  initial begin
    int t_gemm0_end, idx_store;
    prog.push_back(mk(OP_CONFIG, 0, 0, PART_1X2, DF_WS, 0, 0, 0, 0));
    prog.push_back(mk(OP_LOAD,   0, 0, PART_1X1, DF_WS, 4, 5, 0, 100));
    prog.push_back(mk(OP_LOAD,   0, 1, PART_1X1, DF_WS, 5, 6, 0, 200));
    prog.push_back(mk(OP_GEMM,   0, 0, PART_1X1, DF_OS, 4, 5, 6, 0));
    prog.push_back(mk(OP_LOAD,   1, 0, PART_1X1, DF_WS, 3, 3, 0, 300));
    prog.push_back(mk(OP_LOAD,   1, 1, PART_1X1, DF_WS, 3, 2, 0, 400));
    prog.push_back(mk(OP_GEMM,   1, 0, PART_1X1, DF_WS, 3, 3, 2, 0));
    begin
      instr_t mv;
      mv = mk(OP_MOVE, 0, 1, PART_1X1, DF_WS, 3, 2, 0, 0);
      mv.src = 1'b1;
      prog.push_back(mv);
    end
    prog.push_back(mk(OP_SYNC,   0, 0, PART_1X1, DF_WS, 0, 0, 0, 0));
    prog.push_back(mk(OP_CONFIG, 0, 0, PART_1X1, DF_WS, 0, 0, 0, 0));
    prog.push_back(mk(OP_LOAD,   0, 0, PART_1X1, DF_WS, 2, 2, 0, 500));
    prog.push_back(mk(OP_GEMM,   0, 0, PART_1X1, DF_IS, 2, 2, 2, 0));
    prog.push_back(mk(OP_GEMM,   0, 0, PART_1X1, DF_IS, 2, 2, 3, 0));  // same core: must wait
    prog.push_back(mk(OP_STORE,  0, 0, PART_1X1, DF_WS, 2, 2, 0, 600));
    prog.push_back(mk(OP_END,    0, 0, PART_1X1, DF_WS, 0, 0, 0, 0));
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    foreach (prog[i]) begin
      @(negedge clk);
      prog_we = 1'b1; prog_addr = 6'(i); prog_data = prog[i];
    end
    @(negedge clk); prog_we = 1'b0; start = 1'b1;
    @(negedge clk); start = 1'b0;
    // watch the partition at every GEMM issue
    fork
      forever begin
        @(posedge clk);
        if (core_start[0] || core_start[1]) begin
          checks++;
          if (part != (perf_gemms < 2 ? PART_1X2 : PART_1X1)) begin
            failures++;
            $display("FAIL partition %s at GEMM %0d", part.name(), perf_gemms);
          end
        end
      end
    join_none
    while (!done) @(negedge clk);
    expect_ev(0, "loadA", 0, 100);
    expect_ev(1, "loadB", 0, 200);
    expect_ev(2, "gemm",  0, 1 * 1000000 + 4 * 10000 + 5 * 100 + 6);
    expect_ev(3, "loadA", 1, 300);
    expect_ev(4, "loadB", 1, 400);
    expect_ev(5, "gemm",  1, 0 * 1000000 + 3 * 10000 + 3 * 100 + 2);
    expect_ev(6, "moveB", 0, 1);
    expect_ev(7, "loadA", 0, 500);
    expect_ev(8, "gemm",  0, 2 * 1000000 + 2 * 10000 + 2 * 100 + 2);
    expect_ev(9, "gemm",  0, 2 * 1000000 + 2 * 10000 + 2 * 100 + 3);
    expect_ev(10, "store", 0, 600);
    checks++;
    if (log_q.size() != 11) begin failures++; $display("FAIL %0d events", log_q.size()); end
    // the move reads core 1's C_buf: it must wait for core 1's GEMM
    checks++;
    if (log_q.size() == 11 && log_q[6].t - log_q[5].t < 10) begin
      failures++; $display("FAIL move issued %0d cycles after core 1's GEMM", log_q[6].t - log_q[5].t);
    end
    checks++;
    if (log_q.size() == 11 && log_q[9].t - log_q[8].t < 10) begin
      failures++; $display("FAIL second GEMM issued %0d cycles after the first", log_q[9].t - log_q[8].t);
    end
    // the store must wait for the GEMM before it (at least 10 busy cycles)
    checks++;
    if (log_q.size() == 11 && log_q[10].t - log_q[9].t < 10) begin
      failures++; $display("FAIL store issued %0d cycles after GEMM", log_q[10].t - log_q[9].t);
    end
    checks++; if (overlap_seen == 0) begin failures++; $display("FAIL no DMA/GEMM overlap"); end
    checks++; if (bad_touch != 0) begin failures++; $display("FAIL busy unit touched"); end
    checks++; if (bad_part != 0) begin failures++; $display("FAIL partition switched while busy"); end
    checks++; if (perf_gemms != 4) begin failures++; $display("FAIL perf_gemms %0d", perf_gemms); end
    checks++; if (perf_stalls == 0) begin failures++; $display("FAIL no stall counted"); end
    checks++; if (perf_dual == 0) begin failures++; $display("FAIL no dual-core cycle"); end
    @(negedge clk);
    checks++; if (busy) begin failures++; $display("FAIL still busy"); end
    $display("stalls %0d dual %0d cycles %0d", perf_stalls, perf_dual, perf_cycles);
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
