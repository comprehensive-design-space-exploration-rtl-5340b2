// dataflow_controller: runs one GEMM, C (+)= A x B, on one core of the array.
//
// A (M x K) sits in A_buf, B (K x N) in B_buf, C (M x N) goes to C_buf. The
// core is rows_g x cols_g PEs (its size under the current partition). The
// controller cuts the problem into passes that fit the core and, for each
// pass, reads operand vectors from the buffers, skews them into the array,
// sets the PE operation and writes the results back:
//
//   OS  passes over (M tile of rows_g, N tile of cols_g). CLEAR (1 cycle),
//       COMPUTE (K + rows_g + cols_g - 2 cycles; A columns enter from the west,
//       B rows from the north), DRAIN (rows_g cycles; one C row per cycle
//       leaves the bottom, last row first).
//   WS  passes over (K tile of rows_g, N tile of cols_g). LOAD (rows_g cycles;
//       a B block is shifted in as stationary operand), COMPUTE
//       (M + rows_g + N_PE - 1 cycles; A rows stream from the west, partial
//       sums leave the bottom, are deskewed and added into one C row per cycle).
//   IS  passes over (K tile of rows_g, M tile of cols_g). LOAD (rows_g cycles;
//       an A block, transposed, becomes stationary), COMPUTE
//       (N + rows_g + N_PE - 1 cycles; B columns stream from the west, one C
//       column per cycle is added into C_buf).
//
// Each pass ends with one bookkeeping cycle; 'start' is accepted in IDLE and
// 'done' is high for one cycle, 1 + passes * (phase cycles + 1) cycles after
// the cycle in which start was presented. C is overwritten
// on the first K contribution unless 'acc' is set. Operands outside M, K, N
// are fed as zeros. The paper gives the three dataflows and says the switch is
// made by data-path multiplexers, buffer roles and the PE's stationary operand
// selection; the pass order, phase timing and lack of load/compute overlap are
// this design's own.
module dataflow_controller
  import tnn_pkg::*;
#(
  parameter int M_PE  = 32,
  parameter int N_PE  = 32,
  parameter int LANES = (M_PE > N_PE) ? M_PE : N_PE
) (
  input  logic      clk,
  input  logic      rst_n,
  // command
  input  logic      start,
  input  dataflow_e df_in,
  input  dim_t      m_in,
  input  dim_t      k_in,
  input  dim_t      n_in,
  input  logic      acc_in,
  input  dim_t      rows_g,
  input  dim_t      cols_g,
  output logic      busy,
  output logic      done,
  // A_buf and B_buf vector reads
  output logic      a_rd_col_mode,
  output dim_t      a_rd_row,
  output dim_t      a_rd_col,
  input  data_t     a_rd_data [LANES],
  output logic      b_rd_col_mode,
  output dim_t      b_rd_row,
  output dim_t      b_rd_col,
  input  data_t     b_rd_data [LANES],
  // PE array (this core's lanes)
  output pe_op_e    pe_op,
  output dataflow_e pe_df,
  output data_t     west  [M_PE],
  output data_t     north [N_PE],
  input  acc_t      south [N_PE],
  // C_buf vector writes
  output logic      c_wr_en,
  output logic      c_wr_col_mode,
  output logic      c_wr_acc,
  output dim_t      c_wr_row,
  output dim_t      c_wr_col,
  output logic      c_wr_mask [N_PE],
  output acc_t      c_wr_data [N_PE]
);

  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_CLEAR, S_COMPUTE, S_DRAIN, S_NEXT, S_DONE} state_e;

  state_e    state;
  dataflow_e df;
  dim_t      m_q, k_q, n_q, rg, cg;
  logic      acc_q;
  int        t;        // cycle within the current phase
  int        p_base;   // first index of the outer tile (rows of the core)
  int        q_base;   // first index of the inner tile (columns of the core)

  // Problem extents seen by the pass loops.
  int s_len, p_lim, q_lim, off, compute_len;
  always_comb begin
    unique case (df)
      DF_OS:   begin s_len = int'(k_q); p_lim = int'(m_q); q_lim = int'(n_q); end
      DF_WS:   begin s_len = int'(m_q); p_lim = int'(k_q); q_lim = int'(n_q); end
      default: begin s_len = int'(n_q); p_lim = int'(k_q); q_lim = int'(m_q); end
    endcase
    off = int'(rg) + N_PE - 1;
    if (df == DF_OS) compute_len = s_len + int'(rg) + int'(cg) - 2;
    else             compute_len = s_len + off;
  end

  // ---------------------------------------------------------------- FSM
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      df     <= DF_WS;
      m_q    <= '0;
      k_q    <= '0;
      n_q    <= '0;
      rg     <= '0;
      cg     <= '0;
      acc_q  <= 1'b0;
      t      <= 0;
      p_base <= 0;
      q_base <= 0;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          df     <= df_in;
          m_q    <= m_in;
          k_q    <= k_in;
          n_q    <= n_in;
          acc_q  <= acc_in;
          rg     <= rows_g;
          cg     <= cols_g;
          t      <= 0;
          p_base <= 0;
          q_base <= 0;
          state  <= (df_in == DF_OS) ? S_CLEAR : S_LOAD;
        end
        S_LOAD: begin
          if (t == int'(rg) - 1) begin t <= 0; state <= S_COMPUTE; end
          else t <= t + 1;
        end
        S_CLEAR: begin t <= 0; state <= S_COMPUTE; end
        S_COMPUTE: begin
          if (t == compute_len - 1) begin
            t     <= 0;
            state <= (df == DF_OS) ? S_DRAIN : S_NEXT;
          end else t <= t + 1;
        end
        S_DRAIN: begin
          if (t == int'(rg) - 1) begin t <= 0; state <= S_NEXT; end
          else t <= t + 1;
        end
        S_NEXT: begin
          if (q_base + int'(cg) < q_lim) begin
            q_base <= q_base + int'(cg);
            state  <= (df == DF_OS) ? S_CLEAR : S_LOAD;
          end else if (p_base + int'(rg) < p_lim) begin
            q_base <= 0;
            p_base <= p_base + int'(rg);
            state  <= (df == DF_OS) ? S_CLEAR : S_LOAD;
          end else begin
            state <= S_DONE;
          end
        end
        S_DONE: state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);
  assign done = (state == S_DONE);

  // ------------------------------------------------------ operand fetch
  data_t west_raw  [M_PE];
  data_t north_raw [N_PE];
  int    kload;    // K index of the stationary row loaded this cycle
  int    c_idx;    // M row (WS) or N column (IS) written this cycle

  // Addresses and lane masks are computed apart from the data selection so
  // that the buffer read path is not a combinational loop through one block.
  logic west_v  [M_PE];
  logic north_v [N_PE];
  logic west_from_b, north_from_a;

  always_comb begin
    a_rd_col_mode = 1'b0;
    a_rd_row      = '0;
    a_rd_col      = '0;
    b_rd_col_mode = 1'b0;
    b_rd_row      = '0;
    b_rd_col      = '0;
    west_from_b   = 1'b0;
    north_from_a  = 1'b0;
    kload         = p_base + int'(rg) - 1 - t;
    for (int i = 0; i < M_PE; i++) west_v[i]  = 1'b0;
    for (int j = 0; j < N_PE; j++) north_v[j] = 1'b0;

    unique case (state)
      S_LOAD: begin
        if (df == DF_WS) begin
          // B[kload][q_base + j] becomes stationary in column j
          b_rd_col_mode = 1'b0;
          b_rd_row      = dim_t'(kload);
          b_rd_col      = dim_t'(q_base);
          for (int j = 0; j < N_PE; j++)
            north_v[j] = j < int'(cg) && q_base + j < int'(n_q) && kload < int'(k_q);
        end else begin
          // A[q_base + j][kload] becomes stationary in column j
          north_from_a  = 1'b1;
          a_rd_col_mode = 1'b1;
          a_rd_row      = dim_t'(q_base);
          a_rd_col      = dim_t'(kload);
          for (int j = 0; j < N_PE; j++)
            north_v[j] = j < int'(cg) && q_base + j < int'(m_q) && kload < int'(k_q);
        end
      end
      S_COMPUTE: begin
        if (t < s_len) begin
          unique case (df)
            DF_OS: begin
              // column t of A to the west, row t of B to the north
              a_rd_col_mode = 1'b1;
              a_rd_row      = dim_t'(p_base);
              a_rd_col      = dim_t'(t);
              b_rd_col_mode = 1'b0;
              b_rd_row      = dim_t'(t);
              b_rd_col      = dim_t'(q_base);
              for (int i = 0; i < M_PE; i++) west_v[i]  = i < int'(rg) && p_base + i < int'(m_q);
              for (int j = 0; j < N_PE; j++) north_v[j] = j < int'(cg) && q_base + j < int'(n_q);
            end
            DF_WS: begin
              // row t of A (K slice) to the west
              a_rd_col_mode = 1'b0;
              a_rd_row      = dim_t'(t);
              a_rd_col      = dim_t'(p_base);
              for (int i = 0; i < M_PE; i++) west_v[i] = i < int'(rg) && p_base + i < int'(k_q);
            end
            default: begin
              // column t of B (K slice) to the west
              west_from_b   = 1'b1;
              b_rd_col_mode = 1'b1;
              b_rd_row      = dim_t'(p_base);
              b_rd_col      = dim_t'(t);
              for (int i = 0; i < M_PE; i++) west_v[i] = i < int'(rg) && p_base + i < int'(k_q);
            end
          endcase
        end
      end
      default: ;
    endcase
  end

  // Operand multiplexers: which buffer feeds which array edge.
  always_comb begin
    for (int i = 0; i < M_PE; i++)
      west_raw[i] = !west_v[i] ? data_t'(0) : (west_from_b ? b_rd_data[i] : a_rd_data[i]);
    for (int j = 0; j < N_PE; j++)
      north_raw[j] = !north_v[j] ? data_t'(0) : (north_from_a ? a_rd_data[j] : b_rd_data[j]);
  end

  // ------------------------------------------------ skew into the array
  logic skew_flush, skew_bypass;
  assign skew_flush  = (state != S_COMPUTE);
  assign skew_bypass = (state == S_LOAD);

  skew_line #(.LANES(M_PE), .T(data_t), .REVERSE(1'b0)) u_west_skew (
    .clk(clk), .rst_n(rst_n), .flush(skew_flush), .bypass(skew_bypass),
    .din(west_raw), .dout(west)
  );
  skew_line #(.LANES(N_PE), .T(data_t), .REVERSE(1'b0)) u_north_skew (
    .clk(clk), .rst_n(rst_n), .flush(skew_flush), .bypass(skew_bypass),
    .din(north_raw), .dout(north)
  );

  always_comb begin
    unique case (state)
      S_LOAD:    pe_op = PE_LOAD;
      S_CLEAR:   pe_op = PE_CLEAR;
      S_COMPUTE: pe_op = PE_COMPUTE;
      S_DRAIN:   pe_op = PE_DRAIN;
      default:   pe_op = PE_IDLE;
    endcase
  end
  assign pe_df = df;

  // ------------------------------------------------ results to C_buf
  acc_t south_al [N_PE];
  skew_line #(.LANES(N_PE), .T(acc_t), .REVERSE(1'b1)) u_deskew (
    .clk(clk), .rst_n(rst_n), .flush(1'b0), .bypass(state == S_DRAIN),
    .din(south), .dout(south_al)
  );

  always_comb begin
    c_wr_en       = 1'b0;
    c_wr_col_mode = 1'b0;
    c_wr_acc      = 1'b0;
    c_wr_row      = '0;
    c_wr_col      = '0;
    c_idx         = t - off;
    for (int j = 0; j < N_PE; j++) begin
      c_wr_mask[j] = 1'b0;
      c_wr_data[j] = south_al[j];
    end
    if (state == S_DRAIN) begin
      // OS: row (rg-1-t) of the tile leaves the bottom
      c_wr_en  = (p_base + int'(rg) - 1 - t) < int'(m_q);
      c_wr_acc = acc_q;
      c_wr_row = dim_t'(p_base + int'(rg) - 1 - t);
      c_wr_col = dim_t'(q_base);
      for (int j = 0; j < N_PE; j++)
        c_wr_mask[j] = (j < int'(cg)) && (q_base + j < int'(n_q));
    end else if (state == S_COMPUTE && df != DF_OS && t >= off && c_idx < s_len) begin
      c_wr_en  = 1'b1;
      c_wr_acc = acc_q || (p_base != 0);
      if (df == DF_WS) begin
        c_wr_col_mode = 1'b0;
        c_wr_row      = dim_t'(c_idx);
        c_wr_col      = dim_t'(q_base);
        for (int j = 0; j < N_PE; j++)
          c_wr_mask[j] = (j < int'(cg)) && (q_base + j < int'(n_q));
      end else begin
        c_wr_col_mode = 1'b1;
        c_wr_row      = dim_t'(q_base);
        c_wr_col      = dim_t'(c_idx);
        for (int j = 0; j < N_PE; j++)
          c_wr_mask[j] = (j < int'(cg)) && (q_base + j < int'(m_q));
      end
    end
  end

  // ------------------------------------------------ command rules
  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy)
    else $error("dataflow_controller: start while busy");
  a_dims: assert property (@(posedge clk) disable iff (!rst_n)
      (start && !busy) |-> (m_in != 0 && k_in != 0 && n_in != 0 && rows_g != 0 && cols_g != 0))
    else $error("dataflow_controller: zero dimension");

endmodule
