// mpx_skew: a staircase of delay registers on a vector of lanes.
//
// Lane k is delayed by k cycles (REVERSE = 0) or by LANES-1-k cycles
// (REVERSE = 1); lane 0 (or lane LANES-1) passes straight through. With
// REVERSE = 0 it produces the diagonal wavefront a systolic array needs at its
// West and North edges (element k enters row/column k, k cycles after element
// 0). With REVERSE = 1 it undoes that wavefront at the output edges, so that
// all lanes of one result leave together. The paper draws the wavefront and
// the output registers; building them as plain shift registers with a
// synchronous reset is this design's choice.
module mpx_skew #(
  parameter type         T       = logic [7:0],
  parameter int unsigned LANES   = 32,
  parameter bit          REVERSE = 1'b0
) (
  input  logic clk,
  input  logic rst_n,
  input  T     din  [LANES],
  output T     dout [LANES]
);

  for (genvar k = 0; k < LANES; k++) begin : g_lane
    localparam int unsigned D = REVERSE ? (LANES - 1 - k) : k;
    if (D == 0) begin : g_wire
      assign dout[k] = din[k];
    end else begin : g_delay
      T sr [D];
      always_ff @(posedge clk) begin
        if (!rst_n) begin
          for (int s = 0; s < int'(D); s++) sr[s] <= '0;
        end else begin
          sr[0] <= din[k];
          for (int s = 1; s < int'(D); s++) sr[s] <= sr[s-1];
        end
      end
      assign dout[k] = sr[D-1];
    end
  end

endmodule
