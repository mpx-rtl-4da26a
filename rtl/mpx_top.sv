// mpx_top: the MPX engine, a systolic array that multiplies matrices
// (weight-stationary) or polynomials (diagonal accumulation) in one fabric.
//
// Structure (West/North/South as in an ordinary systolic array):
//   input buffer  -> West skew  -> array rows      (activations / polynomial A)
//   weight buffer -> North skew -> array columns   (weights / polynomial B)
//                    (the North skew is bypassed in matrix mode, where the
//                     weights are shifted in unskewed during preload)
//   array South / East edges -> output alignment -> output buffer (matrix)
//                                                -> poly accumulator (poly)
//   mpx_ctrl sequences both modes.
//
// Host interface:
//   * in_wr_* / w_wr_*: write one operand word (bank, address). Matrix mode:
//     input bank r, address m holds X[m][r]; weight bank c, address r holds
//     W[r][c]; result row m is Y[m][c] = sum_r X[m][r]*W[r][c].
//     Polynomial mode, for A and B of K*N coefficients: input bank r,
//     address i holds a[i*N + N-1-r] (rows take each block high coefficient
//     first); weight bank c, address j holds b[j*N + c].
//   * start with op_mode, m_rows (matrix) or k_blocks (poly); done pulses
//     when the operation is complete; busy is high meanwhile.
//   * out_rd_*: read matrix result Y[m][c] (bank c, address m), one cycle
//     latency. res_rd_idx: read coefficient k of the 2KN-1 coefficient
//     polynomial product, one cycle latency.
// Timing: a matrix operation takes N cycles of preload, m_rows of streaming
// and 2N+1 of drain; a polynomial one K^2 cycles of streaming (one block pair
// per cycle) and 2N+2 of drain. With the control cycles, done comes
// 3N + m_rows + 3 (matrix) or K^2 + 2N + 3 (polynomial) cycles after the
// edge that samples start.
// The dual-mode array and its dataflows follow the paper; the buffer layout,
// the control interface and the accumulator organisation are this design's.
module mpx_top
  import mpx_pkg::*;
#(
  parameter int unsigned N          = 32,
  parameter int unsigned BUF_DEPTH  = 64,
  parameter int unsigned MAX_BLOCKS = 16,
  localparam int unsigned BW  = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned AW  = (BUF_DEPTH > 1) ? $clog2(BUF_DEPTH) : 1,
  localparam int unsigned KW  = $clog2(MAX_BLOCKS + 1),
  localparam int unsigned MW  = $clog2(BUF_DEPTH + 1),
  localparam int unsigned OW  = $clog2(2 * MAX_BLOCKS),
  localparam int unsigned RW  = $clog2(2 * MAX_BLOCKS * N)
) (
  input  logic          clk,
  input  logic          rst_n,
  // operand writes
  input  logic          in_wr_en,
  input  logic [BW-1:0] in_wr_bank,
  input  logic [AW-1:0] in_wr_addr,
  input  data_t         in_wr_data,
  input  logic          w_wr_en,
  input  logic [BW-1:0] w_wr_bank,
  input  logic [AW-1:0] w_wr_addr,
  input  data_t         w_wr_data,
  // command
  input  logic          start,
  input  mode_e         op_mode,
  input  logic [MW-1:0] m_rows,
  input  logic [KW-1:0] k_blocks,
  output logic          busy,
  output logic          done,
  // result reads
  input  logic [BW-1:0] out_rd_bank,
  input  logic [AW-1:0] out_rd_addr,
  output acc_t          out_rd_data,
  input  logic [RW-1:0] res_rd_idx,
  output acc_t          res_rd_data
);

  mode_e         mode;
  logic          in_rd_en, w_rd_en, in_rd_valid, w_rd_valid;
  logic [AW-1:0] in_rd_addr, w_rd_addr, out_wr_addr;
  logic          out_wr_en, acc_clear, acc_valid;
  logic [OW-1:0] acc_blk;

  data_t in_row [N], w_row [N], a_skewed [N], w_skewed [N], w_array [N];
  acc_t  psum_bot [N], diag_bot [N], diag_right [N];
  acc_t  mat_row [N];
  acc_t  poly_vec [2*N-1];
  logic  w_shift;

  mpx_ctrl #(.N(N), .BUF_DEPTH(BUF_DEPTH), .MAX_BLOCKS(MAX_BLOCKS)) u_ctrl (
    .clk, .rst_n, .start, .op_mode, .m_rows, .k_blocks,
    .mode, .busy, .done,
    .in_rd_en, .in_rd_addr, .w_rd_en, .w_rd_addr,
    .out_wr_en, .out_wr_addr, .acc_clear, .acc_valid, .acc_blk
  );

  mpx_operand_buffer #(.BANKS(N), .DEPTH(BUF_DEPTH)) u_in_buf (
    .clk, .rst_n,
    .wr_en(in_wr_en), .wr_bank(in_wr_bank), .wr_addr(in_wr_addr), .wr_data(in_wr_data),
    .rd_en(in_rd_en), .rd_addr(in_rd_addr), .rd_data(in_row), .rd_valid(in_rd_valid)
  );

  mpx_operand_buffer #(.BANKS(N), .DEPTH(BUF_DEPTH)) u_w_buf (
    .clk, .rst_n,
    .wr_en(w_wr_en), .wr_bank(w_wr_bank), .wr_addr(w_wr_addr), .wr_data(w_wr_data),
    .rd_en(w_rd_en), .rd_addr(w_rd_addr), .rd_data(w_row), .rd_valid(w_rd_valid)
  );

  mpx_skew #(.T(data_t), .LANES(N), .REVERSE(1'b0)) u_west_skew (
    .clk, .rst_n, .din(in_row), .dout(a_skewed)
  );

  mpx_skew #(.T(data_t), .LANES(N), .REVERSE(1'b0)) u_north_skew (
    .clk, .rst_n, .din(w_row), .dout(w_skewed)
  );

  // Matrix mode: unskewed weights shift in only while they are being read.
  // Polynomial mode: the weight registers stream B every cycle.
  always_comb begin
    for (int c = 0; c < int'(N); c++)
      w_array[c] = (mode == MODE_POLY) ? w_skewed[c] : w_row[c];
    w_shift = (mode == MODE_POLY) ? 1'b1 : w_rd_valid;
  end

  mpx_array #(.N(N)) u_array (
    .clk, .rst_n, .mode, .w_shift,
    .a_in(a_skewed), .w_in(w_array),
    .psum_bot, .diag_bot, .diag_right
  );

  mpx_out_align #(.N(N)) u_align (
    .clk, .rst_n, .psum_bot, .diag_bot, .diag_right, .mat_row, .poly_vec
  );

  mpx_output_buffer #(.BANKS(N), .DEPTH(BUF_DEPTH)) u_out_buf (
    .clk, .rst_n,
    .wr_en(out_wr_en), .wr_addr(out_wr_addr), .wr_data(mat_row),
    .rd_bank(out_rd_bank), .rd_addr(out_rd_addr), .rd_data(out_rd_data)
  );

  mpx_poly_acc #(.N(N), .BLOCKS(2 * MAX_BLOCKS)) u_acc (
    .clk, .rst_n, .clear(acc_clear),
    .in_valid(acc_valid), .in_blk(acc_blk), .in_vec(poly_vec),
    .rd_idx(res_rd_idx), .rd_data(res_rd_data)
  );

  // The mode must not change under a running operation; in_rd_valid is only
  // used to check that operand rows keep pace with the controller.
  a_mode_stable: assert property (@(posedge clk) disable iff (!rst_n)
                                  (busy && $past(busy)) |-> $stable(mode))
    else $error("mpx_top: mode changed during an operation");
  a_rd_pace: assert property (@(posedge clk) disable iff (!rst_n)
                              $past(in_rd_en) |-> in_rd_valid)
    else $error("mpx_top: input row read lost");

endmodule
