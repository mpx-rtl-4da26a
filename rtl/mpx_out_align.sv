// mpx_out_align: output alignment registers of the MPX array.
//
// Matrix mode: column j of the South edge delivers its result N-1-j cycles
// before the last column does; delaying it by N-1-j cycles gives a whole
// result row (mat_row) in one cycle, aligned to column N-1.
// Polynomial mode: product coefficient c_k leaves the bottom row at PE(N-1,k)
// for k < N and the right column at PE(2N-2-k,N-1) for k >= N. Coefficients
// leave a PE N-1-j (bottom) or N-1-i (right) cycles before c_(N-1) does, so
// the same staircase delays align all 2N-1 coefficients of one block product
// in poly_vec. The paper draws these registers for a 2x2 array (one register
// on PE10's and on PE01's diagonal output, none on PE11's); this module
// generalises the pattern to N x N.
// Latency: mat_row / poly_vec are valid in the same cycle as psum_bot[N-1] /
// diag_bot[N-1] of the same wave (zero added latency for lane N-1).
module mpx_out_align
  import mpx_pkg::*;
#(
  parameter int unsigned N = 32
) (
  input  logic clk,
  input  logic rst_n,
  input  acc_t psum_bot  [N],
  input  acc_t diag_bot  [N],
  input  acc_t diag_right[N],
  output acc_t mat_row   [N],
  output acc_t poly_vec  [2*N-1]
);

  acc_t bot_al   [N];
  acc_t right_al [N];

  mpx_skew #(.T(acc_t), .LANES(N), .REVERSE(1'b1)) u_mat (
    .clk(clk), .rst_n(rst_n), .din(psum_bot), .dout(mat_row)
  );

  mpx_skew #(.T(acc_t), .LANES(N), .REVERSE(1'b1)) u_bot (
    .clk(clk), .rst_n(rst_n), .din(diag_bot), .dout(bot_al)
  );

  mpx_skew #(.T(acc_t), .LANES(N), .REVERSE(1'b1)) u_right (
    .clk(clk), .rst_n(rst_n), .din(diag_right), .dout(right_al)
  );

  for (genvar k = 0; k < 2*N-1; k++) begin : g_vec
    if (k < N) begin : g_lo
      assign poly_vec[k] = bot_al[k];
    end else begin : g_hi
      assign poly_vec[k] = right_al[2*N-2-k];
    end
  end

endmodule
