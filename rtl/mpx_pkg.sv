// mpx_pkg: types and constants shared by the MPX dual-mode systolic array.
//
// The array runs in one of two modes. In matrix mode it is an ordinary
// weight-stationary systolic array: weights are preloaded, activations flow
// West to East and partial sums flow North to South. In polynomial mode the
// second polynomial streams North to South through the weight registers and
// partial sums travel diagonally, so that every product a_i*b_j with the same
// i+j meets the same running sum. The 8-bit operand and 32-bit accumulator
// widths follow the paper's evaluation; the mode encoding is this design's.
package mpx_pkg;

  // Operand (multiplier input) and accumulator (adder) widths.
  localparam int unsigned DATA_W = 8;
  localparam int unsigned ACC_W  = 32;

  typedef logic signed [DATA_W-1:0] data_t;
  typedef logic signed [ACC_W-1:0]  acc_t;

  // Operating mode of the whole array (one global select line).
  typedef enum logic {
    MODE_MATRIX = 1'b0,
    MODE_POLY   = 1'b1
  } mode_e;

endpackage
