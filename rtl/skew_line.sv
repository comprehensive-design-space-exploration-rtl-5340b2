// skew_line: per-lane delay line that skews or deskews a vector of lanes.
//
// Lane l is delayed by l cycles (REVERSE = 0, used to skew operands into the
// systolic array) or by LANES-1-l cycles (REVERSE = 1, used to realign the
// staggered partial sums leaving the array). A lane with zero delay is a wire.
// 'bypass' routes the input straight to the output (used while stationary
// operands are preloaded and while OS results are drained); 'flush' zeroes
// every stored value so a new stream starts from a clean pipeline. This helper
// is this design's own realisation of the systolic skew the paper implies.
module skew_line #(
  parameter int LANES   = 32,
  parameter type T       = logic [7:0],
  parameter bit REVERSE = 1'b0
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         flush,
  input  logic         bypass,
  input  T din  [LANES],
  output T dout [LANES]
);

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    localparam int D = REVERSE ? (LANES - 1 - l) : l;
    if (D == 0) begin : g_wire
      assign dout[l] = din[l];
    end else begin : g_delay
      T sr [D];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int k = 0; k < D; k++) sr[k] <= '0;
        end else if (flush) begin
          for (int k = 0; k < D; k++) sr[k] <= '0;
        end else begin
          sr[0] <= din[l];
          for (int k = 1; k < D; k++) sr[k] <= sr[k-1];
        end
      end
      assign dout[l] = bypass ? din[l] : sr[D-1];
    end
  end

endmodule
