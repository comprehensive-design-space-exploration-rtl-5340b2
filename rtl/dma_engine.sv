// dma_engine: moves 2-D blocks between off-chip memory and the on-chip buffers.
//
// Off-chip memory is seen as a word-addressed request/response port: a request
// (mem_req with mem_we, mem_addr, mem_wdata) is taken in a cycle where
// mem_gnt is high; read data come back in request order, one word per cycle
// with mem_rvalid. One tensor element sits in each 32-bit word.
//   LOAD  (dir = 0): reads rows x cols words from addr + r*stride + c and
//         writes the low 8 bits of each into an operand buffer (buf_wr_*).
//         With trans set the block is read column-major instead: element
//         (r, c) of the buffer comes from addr + c*stride + r, so a matrix
//         stored row-major off chip arrives transposed (needed for the
//         gradient GEMMs of training). Requests are issued back to back
//         while mem_gnt allows; the command ends when the last response has
//         been written.
//   STORE (dir = 1): reads C_buf element by element (combinational read port
//         c_rd_*) and writes it to memory, either as the 32-bit sum or, with
//         quant set, requantised to INT8: saturate(sum >>> shift), sign-extended.
//   MOVE  (move = 1, dir ignored): copies a rows x cols block of C_buf straight
//         into an operand buffer, requantised as above, one element per cycle
//         with no off-chip traffic; with trans set element (r, c) of C_buf
//         lands at (c, r). This keeps an intermediate tensor on chip between
//         two contractions (the top selects which core's C_buf is read).
// 'start' is accepted when idle; 'done' is high for one cycle at the end.
// The paper only names an AXI-MM / DMA interface to off-chip DDR; the port
// protocol, one element per word, the requantisation step and the on-chip
// copy (this design's reading of the paper's "streaming" kernel) are this
// design's own (an AXI-MM bridge would sit outside this block).
module dma_engine
  import tnn_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  // command
  input  logic  start,
  input  logic  dir,        // 0 = load, 1 = store
  input  logic  move,       // 1 = on-chip C_buf -> operand buffer copy
  input  dim_t  rows,
  input  dim_t  cols,
  input  addr_t addr,
  input  dim_t  stride,
  input  logic  trans,      // load: element (r, c) from addr + c*stride + r
  input  logic  quant,
  input  logic [4:0] shift,
  output logic  busy,
  output logic  done,
  // off-chip memory port
  output logic  mem_req,
  output logic  mem_we,
  output addr_t mem_addr,
  output word_t mem_wdata,
  input  logic  mem_gnt,
  input  logic  mem_rvalid,
  input  word_t mem_rdata,
  // operand buffer write
  output logic  buf_wr_en,
  output dim_t  buf_wr_row,
  output dim_t  buf_wr_col,
  output data_t buf_wr_data,
  // C_buf read
  output dim_t  c_rd_row,
  output dim_t  c_rd_col,
  input  acc_t  c_rd_data
);

  typedef enum logic [1:0] {D_IDLE, D_RUN, D_DONE} state_e;
  state_e state;

  logic  dir_q, move_q, quant_q, trans_q;
  logic [4:0] shift_q;
  dim_t  rows_q, cols_q, stride_q;
  addr_t addr_q;
  dim_t  ir, ic;        // next element to request
  dim_t  rr, rc;        // next element whose response is expected (load)
  logic  issue_done;

  wire last_issue = (ir == rows_q - 1) && (ic == cols_q - 1);
  wire last_resp  = (rr == rows_q - 1) && (rc == cols_q - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= D_IDLE;
      dir_q      <= 1'b0;
      move_q     <= 1'b0;
      quant_q    <= 1'b0;
      trans_q    <= 1'b0;
      shift_q    <= '0;
      rows_q     <= '0;
      cols_q     <= '0;
      stride_q   <= '0;
      addr_q     <= '0;
      ir         <= '0;
      ic         <= '0;
      rr         <= '0;
      rc         <= '0;
      issue_done <= 1'b0;
    end else begin
      unique case (state)
        D_IDLE: if (start) begin
          dir_q      <= dir && !move;
          move_q     <= move;
          quant_q    <= quant;
          trans_q    <= trans && !dir;
          shift_q    <= shift;
          rows_q     <= rows;
          cols_q     <= cols;
          stride_q   <= stride;
          addr_q     <= addr;
          ir         <= '0;
          ic         <= '0;
          rr         <= '0;
          rc         <= '0;
          issue_done <= 1'b0;
          state      <= D_RUN;
        end
        D_RUN: begin
          if ((mem_req && mem_gnt) || move_q) begin
            if (last_issue) begin
              issue_done <= 1'b1;
              if (dir_q || move_q) state <= D_DONE;
            end else if (ic == cols_q - 1) begin
              ic <= '0;
              ir <= ir + 1'b1;
            end else begin
              ic <= ic + 1'b1;
            end
          end
          if (!dir_q && !move_q && mem_rvalid) begin
            if (last_resp) state <= D_DONE;
            else if (rc == cols_q - 1) begin
              rc <= '0;
              rr <= rr + 1'b1;
            end else begin
              rc <= rc + 1'b1;
            end
          end
        end
        D_DONE: state <= D_IDLE;
        default: state <= D_IDLE;
      endcase
    end
  end

  assign busy = (state != D_IDLE);
  assign done = (state == D_DONE);

  // requests
  acc_t shifted;
  assign shifted   = c_rd_data >>> shift_q;
  assign mem_req   = (state == D_RUN) && !issue_done && !move_q;
  assign mem_we    = dir_q;
  assign mem_addr  = trans_q ? addr_q + addr_t'(ic) * addr_t'(stride_q) + addr_t'(ir)
                             : addr_q + addr_t'(ir) * addr_t'(stride_q) + addr_t'(ic);
  assign mem_wdata = quant_q ? word_t'(acc_t'(sat8(shifted))) : word_t'(c_rd_data);
  assign c_rd_row  = ir;
  assign c_rd_col  = ic;

  // operand buffer writes: load responses, or the on-chip copy
  assign buf_wr_en   = (state == D_RUN) && (move_q ? !issue_done : (!dir_q && mem_rvalid));
  assign buf_wr_row  = move_q ? (trans_q ? ic : ir) : rr;
  assign buf_wr_col  = move_q ? (trans_q ? ir : ic) : rc;
  assign buf_wr_data = move_q ? sat8(shifted) : data_t'(mem_rdata[DATA_W-1:0]);

  a_no_stray_data: assert property (@(posedge clk) disable iff (!rst_n)
      mem_rvalid |-> (state == D_RUN && !dir_q && !move_q))
    else $error("dma_engine: read data with no load in progress");
  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy)
    else $error("dma_engine: start while busy");

endmodule
