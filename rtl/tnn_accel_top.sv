// tnn_accel_top: tensorized-network GEMM accelerator.
//
// An M_PE x N_PE INT8 systolic array (pe_array) runs tensor-train
// contractions as GEMMs in weight-, output- or input-stationary dataflow. The
// array is used whole (1x1) or split into two independent cores (1x2: two
// M_PE x N_PE/2, 2x1: two M_PE/2 x N_PE). Each core has its own
// dataflow_controller and its own A_buf (T_M x T_K), B_buf (T_K x T_N) and
// C_buf (T_M x T_N). One dma_engine moves blocks between off-chip memory and
// whichever buffer the current instruction names, and copies a C_buf (of
// either core) into an operand buffer on chip. The tt_sequencer executes a
// contraction program written by the host and drives all of the above.
//
// Interface: program port (prog_we/prog_addr/prog_data), start/busy/done,
// the off-chip memory request/response port (see dma_engine) and counters.
// All state resets on rst_n (asynchronous, active low) except the buffers and
// program memory. Structure follows the paper's Fig. 4 and Sec. 4; tile sizes
// T_M/T_K/T_N, the program interface and the memory port are this design's
// own choices.
module tnn_accel_top
  import tnn_pkg::*;
#(
  parameter int M_PE       = 32,
  parameter int N_PE       = 32,
  parameter int T_M        = 64,
  parameter int T_K        = 64,
  parameter int T_N        = 64,
  parameter int PROG_DEPTH = 64,
  parameter int PA_W       = (PROG_DEPTH > 1) ? $clog2(PROG_DEPTH) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            prog_we,
  input  logic [PA_W-1:0] prog_addr,
  input  instr_t          prog_data,
  input  logic            start,
  output logic            busy,
  output logic            done,
  output logic            mem_req,
  output logic            mem_we,
  output addr_t           mem_addr,
  output word_t           mem_wdata,
  input  logic            mem_gnt,
  input  logic            mem_rvalid,
  input  word_t           mem_rdata,
  output part_e           part,
  output logic [31:0]     perf_cycles,
  output logic [31:0]     perf_stalls,
  output logic [31:0]     perf_dual,
  output logic [31:0]     perf_gemms
);

  localparam int LANES = (M_PE > N_PE) ? M_PE : N_PE;

  // ------------------------------------------------------------ sequencer
  logic      core_start [2];
  logic      core_busy  [2];
  dataflow_e core_df;
  dim_t      core_m, core_k, core_n;
  logic      core_acc;
  logic      dma_start, dma_dir, dma_move, dma_src, dma_core, dma_buf_b, dma_trans, dma_quant, dma_busy, dma_done;
  dim_t      dma_rows, dma_cols, dma_stride;
  addr_t     dma_addr;
  logic [4:0] dma_shift;

  tt_sequencer #(.PROG_DEPTH(PROG_DEPTH)) u_seq (
    .clk, .rst_n, .prog_we, .prog_addr, .prog_data, .start, .busy, .done, .part,
    .core_start, .core_df, .core_m, .core_k, .core_n, .core_acc, .core_busy,
    .dma_start, .dma_dir, .dma_move, .dma_src, .dma_core, .dma_buf_b, .dma_rows, .dma_cols, .dma_addr,
    .dma_stride, .dma_trans, .dma_quant, .dma_shift, .dma_busy, .dma_done,
    .perf_cycles, .perf_stalls, .perf_dual, .perf_gemms
  );

  // ------------------------------------------------------------------ DMA
  logic  bw_en;
  dim_t  bw_row, bw_col, cr_row, cr_col;
  data_t bw_data;
  acc_t  cr_data;
  acc_t  c_rd_data [2];

  dma_engine u_dma (
    .clk, .rst_n, .start(dma_start), .dir(dma_dir), .move(dma_move), .rows(dma_rows), .cols(dma_cols),
    .addr(dma_addr), .stride(dma_stride), .trans(dma_trans), .quant(dma_quant), .shift(dma_shift),
    .busy(dma_busy), .done(dma_done),
    .mem_req, .mem_we, .mem_addr, .mem_wdata, .mem_gnt, .mem_rvalid, .mem_rdata,
    .buf_wr_en(bw_en), .buf_wr_row(bw_row), .buf_wr_col(bw_col), .buf_wr_data(bw_data),
    .c_rd_row(cr_row), .c_rd_col(cr_col), .c_rd_data(cr_data)
  );
  // STORE reads the addressed core's C_buf, MOVE the source core's.
  assign cr_data = c_rd_data[dma_move ? dma_src : dma_core];

  // ------------------------------------------------- core geometry by part
  dim_t rows_g, cols_g;
  always_comb begin
    unique case (part)
      PART_1X2: begin rows_g = dim_t'(M_PE);     cols_g = dim_t'(N_PE / 2); end
      PART_2X1: begin rows_g = dim_t'(M_PE / 2); cols_g = dim_t'(N_PE);     end
      default:  begin rows_g = dim_t'(M_PE);     cols_g = dim_t'(N_PE);     end
    endcase
  end

  // ---------------------------------------------------------------- cores
  pe_op_e    pe_op  [2];
  dataflow_e pe_df  [2];
  data_t     west   [2][M_PE];
  data_t     north  [2][N_PE];
  acc_t      south  [2][N_PE];

  for (genvar c = 0; c < 2; c++) begin : g_core
    logic  a_cm, b_cm;
    dim_t  a_r, a_c, b_r, b_c;
    data_t a_d [LANES];
    data_t b_d [LANES];
    logic  c_en, c_cm, c_acc;
    dim_t  c_r, c_c;
    logic  c_mask [N_PE];
    acc_t  c_data [N_PE];
    logic  done_unused;
    logic  sel;

    assign sel = (dma_core == 1'(c));

    dataflow_controller #(.M_PE(M_PE), .N_PE(N_PE)) u_ctrl (
      .clk, .rst_n, .start(core_start[c]), .df_in(core_df), .m_in(core_m), .k_in(core_k),
      .n_in(core_n), .acc_in(core_acc), .rows_g(rows_g), .cols_g(cols_g),
      .busy(core_busy[c]), .done(done_unused),
      .a_rd_col_mode(a_cm), .a_rd_row(a_r), .a_rd_col(a_c), .a_rd_data(a_d),
      .b_rd_col_mode(b_cm), .b_rd_row(b_r), .b_rd_col(b_c), .b_rd_data(b_d),
      .pe_op(pe_op[c]), .pe_df(pe_df[c]), .west(west[c]), .north(north[c]), .south(south[c]),
      .c_wr_en(c_en), .c_wr_col_mode(c_cm), .c_wr_acc(c_acc), .c_wr_row(c_r), .c_wr_col(c_c),
      .c_wr_mask(c_mask), .c_wr_data(c_data)
    );

    operand_buffer #(.ROWS(T_M), .COLS(T_K), .LANES(LANES)) u_a_buf (
      .clk, .wr_en(bw_en && sel && !dma_buf_b), .wr_row(bw_row), .wr_col(bw_col),
      .wr_data(bw_data), .rd_col_mode(a_cm), .rd_row(a_r), .rd_col(a_c), .rd_data(a_d)
    );
    operand_buffer #(.ROWS(T_K), .COLS(T_N), .LANES(LANES)) u_b_buf (
      .clk, .wr_en(bw_en && sel && dma_buf_b), .wr_row(bw_row), .wr_col(bw_col),
      .wr_data(bw_data), .rd_col_mode(b_cm), .rd_row(b_r), .rd_col(b_c), .rd_data(b_d)
    );
    output_buffer #(.ROWS(T_M), .COLS(T_N), .LANES(N_PE)) u_c_buf (
      .clk, .wr_en(c_en), .wr_col_mode(c_cm), .wr_acc(c_acc), .wr_row(c_r), .wr_col(c_c),
      .wr_mask(c_mask), .wr_data(c_data), .rd_row(cr_row), .rd_col(cr_col),
      .rd_data(c_rd_data[c])
    );
  end

  // ------------------------------------------------------------- PE array
  pe_array #(.M_PE(M_PE), .N_PE(N_PE)) u_array (
    .clk, .rst_n, .part,
    .op_c0(pe_op[0]), .df_c0(pe_df[0]), .op_c1(pe_op[1]), .df_c1(pe_df[1]),
    .west_c0(west[0]), .north_c0(north[0]), .west_c1(west[1]), .north_c1(north[1]),
    .south_c0(south[0]), .south_c1(south[1])
  );

  // The buffers must not change under a running core.
  a_no_load_under_gemm: assert property (@(posedge clk) disable iff (!rst_n)
      bw_en |-> !core_busy[dma_core])
    else $error("tnn_accel_top: operand buffer written while its core runs");
  a_no_move_from_busy: assert property (@(posedge clk) disable iff (!rst_n)
      (bw_en && dma_move) |-> !core_busy[dma_src])
    else $error("tnn_accel_top: C_buf copied while its core runs");

endmodule
