// pe_array: M_PE x N_PE systolic array that runs as one core or as two
// independent cores.
//
// The array is a grid of pe instances. West operands enter column 0 and move
// east one PE per cycle; the 32-bit vertical bus enters row 0 and moves south.
// Core 0 and core 1 each present their operand lanes in core-local order:
// west_cX[i] for the core's row i, north_cX[j] for its column j, and receive
// the bottom row of their core on south_cX[j].
//   PART_1X1: core 0 owns the whole array; core 1 is unused (south_c1 = 0).
//   PART_1X2: two M_PE x N_PE/2 cores. Column N_PE/2 takes its west input from
//             core 1 instead of column N_PE/2-1.
//   PART_2X1: two M_PE/2 x N_PE cores. Row M_PE/2 takes its north input from
//             core 1 instead of row M_PE/2-1; core 0's bottom is row M_PE/2-1.
// Each PE takes its operation and dataflow from the core it belongs to. The
// boundary multiplexers are purely combinational; all timing is that of pe.
// The split shapes follow the paper; the lane order and boundary muxes are
// this design's own.
module pe_array
  import tnn_pkg::*;
#(
  parameter int M_PE = 32,
  parameter int N_PE = 32
) (
  input  logic      clk,
  input  logic      rst_n,
  input  part_e     part,
  input  pe_op_e    op_c0,
  input  dataflow_e df_c0,
  input  pe_op_e    op_c1,
  input  dataflow_e df_c1,
  input  data_t     west_c0  [M_PE],
  input  data_t     north_c0 [N_PE],
  input  data_t     west_c1  [M_PE],
  input  data_t     north_c1 [N_PE],
  output acc_t      south_c0 [N_PE],
  output acc_t      south_c1 [N_PE]
);

  localparam int MH = M_PE / 2;
  localparam int NH = N_PE / 2;

  data_t h_out [M_PE][N_PE];
  acc_t  v_out [M_PE][N_PE];

  for (genvar i = 0; i < M_PE; i++) begin : g_row
    for (genvar j = 0; j < N_PE; j++) begin : g_col
      // core-1-local lane numbers of this row and column (in range for every i, j)
      localparam int I1 = (i >= MH) ? i - MH : i;
      localparam int J1 = (j >= NH) ? j - NH : j;
      data_t     h_in;
      acc_t      v_in;
      logic      in_c1;
      pe_op_e    op;
      dataflow_e df;

      always_comb begin
        in_c1 = (part == PART_1X2 && j >= NH) || (part == PART_2X1 && i >= MH);
        op    = in_c1 ? op_c1 : op_c0;
        df    = in_c1 ? df_c1 : df_c0;

        // West input multiplexer
        if (j == 0) begin
          if (part == PART_2X1 && i >= MH) h_in = west_c1[I1];
          else                             h_in = west_c0[i];
        end else if (j == NH && part == PART_1X2) begin
          h_in = west_c1[i];
        end else begin
          h_in = h_out[i][j-1];
        end

        // North input multiplexer
        if (i == 0) begin
          if (part == PART_1X2 && j >= NH) v_in = acc_t'(north_c1[J1]);
          else                             v_in = acc_t'(north_c0[j]);
        end else if (i == MH && part == PART_2X1) begin
          v_in = acc_t'(north_c1[j]);
        end else begin
          v_in = v_out[i-1][j];
        end
      end

      pe u_pe (
        .clk  (clk),
        .rst_n(rst_n),
        .op   (op),
        .df   (df),
        .h_in (h_in),
        .v_in (v_in),
        .h_out(h_out[i][j]),
        .v_out(v_out[i][j])
      );
    end
  end

  // Output selection: each core's bottom row, in core-local lane order.
  always_comb begin
    for (int j = 0; j < N_PE; j++) begin
      south_c0[j] = '0;
      south_c1[j] = '0;
      unique case (part)
        PART_1X2: begin
          if (j < NH) begin
            south_c0[j] = v_out[M_PE-1][j];
            south_c1[j] = v_out[M_PE-1][(j+NH) % N_PE];
          end
        end
        PART_2X1: begin
          south_c0[j] = v_out[MH-1][j];
          south_c1[j] = v_out[M_PE-1][j];
        end
        default: south_c0[j] = v_out[M_PE-1][j];
      endcase
    end
  end

endmodule
