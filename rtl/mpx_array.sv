// mpx_array: the N x N MPX dual-mode systolic array.
//
// PE(i,j) sits in row i, column j. Row i takes its operand a_in[i] at the West
// edge and passes it East; column j takes w_in[j] at the North edge and passes
// it South. Partial sums enter the top row as zero (vertical) and the top row
// and left column as zero (diagonal).
//
// Matrix mode (weight-stationary): with the weights preloaded (w_shift high
// for N cycles, the first vector shifted in ends up in the bottom row), an
// activation vector whose element r enters row r, r cycles late, produces the
// dot product for column j at psum_out[j] N+j+1 cycles after element 0 entered.
//
// Polynomial mode: row i is fed coefficient a_(N-1-i) of an N-coefficient
// block, column j coefficient b_j, both skewed by their row/column index.
// Coefficient c_k of the product leaves on a diagonal: for k < N from the
// bottom row (diag_bot[k]), for k >= N from the right column
// (diag_right[2N-2-k]). With element 0 of both operands entering at cycle t,
// diag_bot[j] is valid at t+N+j+2 and diag_right[i] at t+N+i+2. A new block
// pair may enter every cycle.
// The grid and its three kinds of links follow the paper's figures; the edge
// conventions (zero inputs, index order) are this design's.
module mpx_array
  import mpx_pkg::*;
#(
  parameter int unsigned N = 32
) (
  input  logic  clk,
  input  logic  rst_n,
  input  mode_e mode,
  input  logic  w_shift,
  input  data_t a_in      [N],  // West edge, one per row
  input  data_t w_in      [N],  // North edge, one per column
  output acc_t  psum_bot  [N],  // South edge, vertical partial sums
  output acc_t  diag_bot  [N],  // South edge, diagonal partial sums
  output acc_t  diag_right[N]   // East edge, diagonal partial sums
);

  data_t a_w  [N][N+1];  // a_w[i][j]: operand entering PE(i,j) from the West
  data_t w_w  [N+1][N];  // w_w[i][j]: weight entering PE(i,j) from the North
  acc_t  ps_w [N+1][N];  // vertical partial sum entering PE(i,j)
  acc_t  dg_o [N][N];    // diagonal output of PE(i,j)

  for (genvar i = 0; i < N; i++) begin : g_row
    assign a_w[i][0] = a_in[i];
    for (genvar j = 0; j < N; j++) begin : g_col
      acc_t diag_in;
      if (i == 0 || j == 0) begin : g_edge
        assign diag_in = '0;
      end else begin : g_inner
        assign diag_in = dg_o[i-1][j-1];
      end

      mpx_pe u_pe (
        .clk      (clk),
        .rst_n    (rst_n),
        .mode     (mode),
        .w_shift  (w_shift),
        .a_in     (a_w[i][j]),
        .w_in     (w_w[i][j]),
        .psum_in  (ps_w[i][j]),
        .diag_in  (diag_in),
        .a_out    (a_w[i][j+1]),
        .w_out    (w_w[i+1][j]),
        .psum_out (ps_w[i+1][j]),
        .diag_out (dg_o[i][j])
      );
    end
  end

  for (genvar j = 0; j < N; j++) begin : g_edges
    assign w_w[0][j]   = w_in[j];
    assign ps_w[0][j]  = '0;
    assign psum_bot[j] = ps_w[N][j];
    assign diag_bot[j] = dg_o[N-1][j];
    assign diag_right[j] = dg_o[j][N-1];
  end

endmodule
