// tt_sequencer: control unit of the TT contraction kernel.
//
// A tensor-train layer is executed as a sequence of GEMM contractions chosen
// offline (contraction path, core partition and dataflow per contraction).
// The host writes that sequence as a program of instr_t words into the
// program memory (prog_we/prog_addr/prog_data) and pulses start. The
// sequencer then steps through it one instruction at a time:
//   OP_CONFIG  wait until both cores are idle, then switch the partition
//              (1x1, 1x2, 2x1).
//   OP_LOAD    wait until the DMA and the target core are idle, start the DMA
//              (off-chip -> A_buf/B_buf of that core), wait for it to finish.
//   OP_STORE   same, C_buf of that core -> off-chip.
//   OP_MOVE    wait until the DMA, the target core and the source core are
//              idle, then copy C_buf of core 'src' into A_buf/B_buf of the
//              target core on chip (requantised), and wait for it to finish:
//              an intermediate tensor feeds the next contraction without an
//              off-chip round trip, also from one core to the other.
//   OP_GEMM    wait until the target core is idle, start it and move on at
//              once, so a GEMM on the other core (or a load for it) can run
//              in parallel: two independent contraction branches proceed
//              concurrently on the two halves of the array.
//   OP_SYNC    wait until both cores are idle (join of parallel branches).
//   OP_END     wait until everything is idle, then raise done for one cycle.
// A GEMM addressed to core 1 under the 1x1 partition is an error: it is
// reported by an assertion and skipped. An instruction that has to wait counts
// a stall cycle; cycles with both cores busy are counted as dual-core cycles.
// The paper describes the dual-core behaviour (independent branches in
// parallel, then both cores jointly on the dependent contractions) and a
// streaming kernel that reuses data on chip; the program format, the on-chip
// move and the hazard rules are this design's own.
module tt_sequencer
  import tnn_pkg::*;
#(
  parameter int PROG_DEPTH = 64,
  parameter int PA_W       = (PROG_DEPTH > 1) ? $clog2(PROG_DEPTH) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  // program load and control
  input  logic            prog_we,
  input  logic [PA_W-1:0] prog_addr,
  input  instr_t          prog_data,
  input  logic            start,
  output logic            busy,
  output logic            done,
  // partition
  output part_e           part,
  // cores
  output logic            core_start [2],
  output dataflow_e       core_df,
  output dim_t            core_m,
  output dim_t            core_k,
  output dim_t            core_n,
  output logic            core_acc,
  input  logic            core_busy [2],
  // DMA
  output logic            dma_start,
  output logic            dma_dir,
  output logic            dma_move,
  output logic            dma_src,
  output logic            dma_core,
  output logic            dma_buf_b,
  output dim_t            dma_rows,
  output dim_t            dma_cols,
  output addr_t           dma_addr,
  output dim_t            dma_stride,
  output logic            dma_trans,
  output logic            dma_quant,
  output logic [4:0]      dma_shift,
  input  logic            dma_busy,
  input  logic            dma_done,
  // counters
  output logic [31:0]     perf_cycles,
  output logic [31:0]     perf_stalls,
  output logic [31:0]     perf_dual,
  output logic [31:0]     perf_gemms
);

  typedef enum logic [1:0] {Q_IDLE, Q_RUN, Q_WAIT_DMA, Q_DONE} state_e;
  state_e state;

  instr_t prog [PROG_DEPTH];
  logic [PA_W-1:0] pc;
  instr_t ins;

  always_ff @(posedge clk) begin
    if (prog_we) prog[prog_addr] <= prog_data;
  end

  assign ins = prog[pc];

  logic both_idle, tgt_idle, issue, illegal;
  always_comb begin
    both_idle = !core_busy[0] && !core_busy[1];
    tgt_idle  = !core_busy[ins.core];
    illegal   = (ins.op == OP_GEMM) && ins.core && (part == PART_1X1);
    issue     = 1'b0;
    if (state == Q_RUN) begin
      unique case (ins.op)
        OP_LOAD, OP_STORE: issue = !dma_busy && tgt_idle;
        OP_MOVE:           issue = !dma_busy && tgt_idle && !core_busy[ins.src];
        OP_GEMM:           issue = tgt_idle || illegal;
        OP_CONFIG,
        OP_SYNC:           issue = both_idle;
        OP_END:            issue = both_idle && !dma_busy;
        default:           issue = 1'b1;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= Q_IDLE;
      pc          <= '0;
      part        <= PART_1X1;
      perf_cycles <= '0;
      perf_stalls <= '0;
      perf_dual   <= '0;
      perf_gemms  <= '0;
    end else begin
      unique case (state)
        Q_IDLE: if (start) begin
          state       <= Q_RUN;
          pc          <= '0;
          perf_cycles <= '0;
          perf_stalls <= '0;
          perf_dual   <= '0;
          perf_gemms  <= '0;
        end
        Q_RUN: begin
          if (!issue) perf_stalls <= perf_stalls + 1;
          else begin
            unique case (ins.op)
              OP_LOAD, OP_STORE,
              OP_MOVE:           state <= Q_WAIT_DMA;
              OP_END:            state <= Q_DONE;
              OP_CONFIG: begin part <= ins.part; pc <= pc + 1'b1; end
              OP_GEMM: begin
                if (!illegal) perf_gemms <= perf_gemms + 1;
                pc <= pc + 1'b1;
              end
              default: pc <= pc + 1'b1;
            endcase
          end
        end
        Q_WAIT_DMA: if (dma_done) begin
          state <= Q_RUN;
          pc    <= pc + 1'b1;
        end
        Q_DONE: state <= Q_IDLE;
        default: state <= Q_IDLE;
      endcase
      if (state != Q_IDLE) begin
        perf_cycles <= perf_cycles + 1;
        if (core_busy[0] && core_busy[1]) perf_dual <= perf_dual + 1;
      end
    end
  end

  assign busy = (state != Q_IDLE);
  assign done = (state == Q_DONE);

  always_comb begin
    core_start[0] = issue && ins.op == OP_GEMM && !illegal && !ins.core;
    core_start[1] = issue && ins.op == OP_GEMM && !illegal &&  ins.core;
  end
  assign core_df    = ins.df;
  assign core_m     = ins.dim0;
  assign core_k     = ins.dim1;
  assign core_n     = ins.dim2;
  assign core_acc   = ins.acc;

  assign dma_start  = issue && (ins.op == OP_LOAD || ins.op == OP_STORE || ins.op == OP_MOVE);
  assign dma_dir    = (ins.op == OP_STORE);
  assign dma_move   = (ins.op == OP_MOVE);
  assign dma_src    = ins.src;
  assign dma_core   = ins.core;
  assign dma_buf_b  = ins.buf_b;
  assign dma_rows   = ins.dim0;
  assign dma_cols   = ins.dim1;
  assign dma_addr   = ins.addr;
  assign dma_stride = ins.stride;
  assign dma_trans  = ins.trans;
  assign dma_quant  = ins.quant;
  assign dma_shift  = ins.shift;

  a_legal_gemm: assert property (@(posedge clk) disable iff (!rst_n)
      (state == Q_RUN) |-> !illegal)
    else $error("tt_sequencer: GEMM on core 1 under the 1x1 partition (skipped)");

endmodule
