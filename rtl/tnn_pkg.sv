// tnn_pkg: types and constants shared by the tensorized-network GEMM accelerator.
//
// Operands are signed INT8 and partial sums signed 32-bit. The dataflow
// (WS/OS/IS) and array partition (1x1, 1x2, 2x1) encodings, the PE operation
// codes and the instruction word of the contraction sequencer are defined here.
// INT8 follows the paper's quantisation; the 32-bit accumulator, every encoding
// and the instruction layout are this design's own choices.
package tnn_pkg;

  localparam int DATA_W = 8;   // operand width (INT8)
  localparam int ACC_W  = 32;  // accumulator / partial-sum width
  localparam int DIM_W  = 16;  // width of a matrix dimension or index
  localparam int ADDR_W = 32;  // off-chip word address width
  localparam int WORD_W = 32;  // off-chip word width (one element per word)

  typedef logic signed [DATA_W-1:0] data_t;
  typedef logic signed [ACC_W-1:0]  acc_t;
  typedef logic        [DIM_W-1:0]  dim_t;
  typedef logic        [ADDR_W-1:0] addr_t;
  typedef logic        [WORD_W-1:0] word_t;

  // Systolic dataflow mapping: which operand stays in the PEs.
  typedef enum logic [1:0] {
    DF_WS = 2'd0,  // weight (B) stationary, A streams, partial sums flow down
    DF_OS = 2'd1,  // output stationary, A and B stream, sums stay in the PEs
    DF_IS = 2'd2   // input (A) stationary, B streams, partial sums flow down
  } dataflow_e;

  // Core partitioning of the PE array.
  typedef enum logic [1:0] {
    PART_1X1 = 2'd0,  // one core, whole array
    PART_1X2 = 2'd1,  // two cores of M_PE x N_PE/2 (columns split)
    PART_2X1 = 2'd2   // two cores of M_PE/2 x N_PE (rows split)
  } part_e;

  // Operation applied by every PE of one core in a cycle.
  typedef enum logic [2:0] {
    PE_IDLE    = 3'd0,
    PE_LOAD    = 3'd1,  // shift stationary operand down the column
    PE_CLEAR   = 3'd2,  // zero the output-stationary accumulator
    PE_COMPUTE = 3'd3,  // multiply-accumulate
    PE_DRAIN   = 3'd4   // shift OS accumulators down to the array edge
  } pe_op_e;

  // Contraction-sequencer opcodes.
  typedef enum logic [2:0] {
    OP_END    = 3'd0,  // wait for all work to finish, then stop
    OP_CONFIG = 3'd1,  // set the array partition (waits until both cores idle)
    OP_LOAD   = 3'd2,  // off-chip block -> A_buf or B_buf of a core
    OP_STORE  = 3'd3,  // C_buf of a core -> off-chip block
    OP_GEMM   = 3'd4,  // C (+)= A x B on a core, issued without waiting
    OP_SYNC   = 3'd5,  // wait until both cores are idle
    OP_MOVE   = 3'd6   // C_buf of core 'src' -> A_buf or B_buf of core 'core', on chip
  } opcode_e;

  typedef struct packed {
    opcode_e   op;
    logic      core;    // target core 0/1
    logic      src;     // OP_MOVE: core whose C_buf is read
    logic      buf_b;   // OP_LOAD/OP_MOVE: 0 = A_buf, 1 = B_buf
    part_e     part;    // OP_CONFIG
    dataflow_e df;      // OP_GEMM
    logic      acc;     // OP_GEMM: add into C_buf instead of overwriting
    logic      trans;   // OP_LOAD/OP_MOVE: write the block transposed
    logic      quant;   // OP_STORE: requantise to INT8 (OP_MOVE always does)
    logic [4:0] shift;  // OP_STORE/OP_MOVE: arithmetic right shift before saturation
    dim_t      dim0;    // LOAD/STORE/MOVE rows, GEMM M
    dim_t      dim1;    // LOAD/STORE/MOVE cols, GEMM K
    dim_t      dim2;    // GEMM N
    addr_t     addr;    // LOAD/STORE off-chip base word address
    dim_t      stride;  // LOAD/STORE off-chip words per row
  } instr_t;

  // Saturate a 32-bit value to INT8.
  function automatic data_t sat8(input acc_t v);
    if (v > 127)       return data_t'(8'sd127);
    else if (v < -128) return data_t'(-8'sd128);
    else               return data_t'(v[DATA_W-1:0]);
  endfunction

endpackage
