// pe: one processing element of the systolic GEMM array.
//
// Each PE multiplies a signed INT8 operand arriving from the west by either a
// stationary INT8 operand held in its control register (WS and IS dataflows)
// or an INT8 operand arriving from the north (OS dataflow), and accumulates in
// 32 bits. The west operand is always passed east through a register. The
// 32-bit north-south bus carries, depending on the operation:
//   PE_LOAD    the stationary operand being shifted down the column (WS/IS);
//   PE_COMPUTE WS/IS: the partial sum, v_out <= v_in + stat*h_in;
//              OS   : the north operand (low 8 bits), passed on unchanged while
//                     acc <= acc + h_in*v_in;
//   PE_DRAIN   the OS accumulator, shifted one row down per cycle
//              (v_out is acc combinationally, acc <= v_in).
// PE_CLEAR zeroes the OS accumulator. Every output is registered except the
// drain path, which is one multiplexer deep. Latency: one cycle per hop.
// The paper names the mechanism (stationary operand selection in each PE's
// control registers, WS/OS/IS); the operation set and bus reuse are this
// design's own.
module pe
  import tnn_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  pe_op_e    op,
  input  dataflow_e df,
  input  data_t     h_in,
  input  acc_t      v_in,
  output data_t     h_out,
  output acc_t      v_out
);

  data_t h_q;
  acc_t  v_q;
  acc_t  acc_q;
  data_t stat_q;

  acc_t prod;
  always_comb begin
    if (df == DF_OS) prod = acc_t'(h_in) * acc_t'(data_t'(v_in[DATA_W-1:0]));
    else             prod = acc_t'(h_in) * acc_t'(stat_q);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      h_q    <= '0;
      v_q    <= '0;
      acc_q  <= '0;
      stat_q <= '0;
    end else begin
      h_q <= h_in;
      unique case (op)
        PE_LOAD: begin
          stat_q <= data_t'(v_in[DATA_W-1:0]);
          v_q    <= v_in;
        end
        PE_CLEAR: acc_q <= '0;
        PE_COMPUTE: begin
          if (df == DF_OS) begin
            acc_q <= acc_q + prod;
            v_q   <= v_in;
          end else begin
            v_q   <= v_in + prod;
          end
        end
        PE_DRAIN: acc_q <= v_in;
        default: ;
      endcase
    end
  end

  assign h_out = h_q;
  assign v_out = (op == PE_DRAIN) ? acc_q : v_q;

endmodule
