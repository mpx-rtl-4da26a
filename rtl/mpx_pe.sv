// mpx_pe: one dual-mode processing element of the MPX systolic array.
//
// Datapath (following the PE drawing of the paper):
//   * a_q   : operand register (West input). Feeds the multiplier and the East
//             neighbour, so operands move one PE to the right per cycle.
//   * w_q   : weight register (North input). In matrix mode it holds a
//             preloaded weight and only shifts while w_shift is high; in
//             polynomial mode w_shift is held high and the register streams
//             the coefficients of the second polynomial downwards.
//   * a 2:1 mux, steered by mode, picks the partial sum that is added to
//             a_q*w_q: the vertical one from PE(i-1,j) in matrix mode, the
//             diagonal one from PE(i-1,j-1) in polynomial mode.
//   * psum_q: accumulator register, sent South (to PE(i+1,j)).
//   * diag_q: the extra diagonal pipeline register, loaded from psum_q and
//             sent South-East (to PE(i+1,j+1)). It is only enabled in
//             polynomial mode; the enable is where a synthesis flow puts the
//             clock gate the paper describes.
// Timing: every output is a register output. A partial sum therefore needs
// two cycles per diagonal hop, which keeps it in step with operands that take
// one cycle per horizontal and one per vertical hop.
// Signed two's-complement arithmetic and the synchronous active-low reset are
// choices of this design; the paper gives only the widths (8-bit multiplier,
// 32-bit adder).
module mpx_pe
  import mpx_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  mode_e mode,
  input  logic  w_shift,   // load w_q from w_in this cycle
  input  data_t a_in,      // from West neighbour
  input  data_t w_in,      // from North neighbour (weight or b_j)
  input  acc_t  psum_in,   // from PE(i-1,j)
  input  acc_t  diag_in,   // from PE(i-1,j-1)
  output data_t a_out,     // to East neighbour
  output data_t w_out,     // to South neighbour
  output acc_t  psum_out,  // to PE(i+1,j)
  output acc_t  diag_out   // to PE(i+1,j+1)
);

  data_t a_q, w_q;
  acc_t  psum_q, diag_q;
  acc_t  addend, sum;
  logic signed [2*DATA_W-1:0] prod;

  always_comb begin
    prod   = a_q * w_q;
    addend = (mode == MODE_POLY) ? diag_in : psum_in;
    sum    = addend + acc_t'(prod);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      a_q    <= '0;
      w_q    <= '0;
      psum_q <= '0;
    end else begin
      a_q    <= a_in;
      if (w_shift) w_q <= w_in;
      psum_q <= sum;
    end
  end

  // Diagonal register: enabled (clocked) only in polynomial mode.
  always_ff @(posedge clk) begin
    if (!rst_n)                  diag_q <= '0;
    else if (mode == MODE_POLY)  diag_q <= psum_q;
  end

  assign a_out    = a_q;
  assign w_out    = w_q;
  assign psum_out = psum_q;
  assign diag_out = diag_q;

endmodule
