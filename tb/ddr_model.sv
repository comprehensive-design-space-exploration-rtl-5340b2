// ddr_model: behavioural model of the off-chip memory seen through the
// accelerator's word-addressed request/response port (not synthesizable).
//
// WORDS 32-bit words. A request is granted in a cycle where mem_gnt is high;
// with STALL_PCT > 0 the grant is withheld at random in that share of cycles
// (back-pressure). Reads return in order LAT cycles after the grant, one word
// per cycle with mem_rvalid. Writes take effect at the grant. Testbenches
// reach 'mem' hierarchically to preload and inspect data, and read
// 'stall_cycles' to see that back-pressure occurred.
module ddr_model
  import tnn_pkg::*;
#(
  parameter int WORDS     = 65536,
  parameter int LAT       = 4,
  parameter int STALL_PCT = 20
) (
  input  logic  clk,
  input  logic  mem_req,
  input  logic  mem_we,
  input  addr_t mem_addr,
  input  word_t mem_wdata,
  output logic  mem_gnt,
  output logic  mem_rvalid,
  output word_t mem_rdata
);

  word_t mem [WORDS];
  logic  pv [LAT];
  word_t pd [LAT];
  int    stall_cycles = 0;

  initial begin
    for (int i = 0; i < WORDS; i++) mem[i] = '0;
    for (int i = 0; i < LAT; i++) begin pv[i] = 1'b0; pd[i] = '0; end
    mem_gnt = 1'b1;
  end

  always @(negedge clk) mem_gnt <= (STALL_PCT == 0) || ($urandom_range(99) >= STALL_PCT);

  always @(posedge clk) begin
    if (mem_req && !mem_gnt) stall_cycles++;
    for (int i = LAT - 1; i > 0; i--) begin pv[i] <= pv[i-1]; pd[i] <= pd[i-1]; end
    pv[0] <= mem_req && mem_gnt && !mem_we;
    pd[0] <= mem[mem_addr % WORDS];
    if (mem_req && mem_gnt && mem_we) mem[mem_addr % WORDS] <= mem_wdata;
  end

  assign mem_rvalid = pv[LAT-1];
  assign mem_rdata  = pd[LAT-1];

endmodule
