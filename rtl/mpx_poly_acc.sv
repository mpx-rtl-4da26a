// mpx_poly_acc: vector unit that rebuilds a long polynomial product from the
// block products leaving the array.
//
// A polynomial of K*N coefficients is cut into K blocks of N coefficients;
// the array multiplies every block pair (A_i, B_j) and returns the 2N-1
// coefficients of A_i*B_j in one cycle. That vector belongs at coefficient
// offset (i+j)*N of the full product. The result store is organised as BLOCKS
// rows of N words, so a block product touches exactly two rows: its low N
// coefficients are added into row i+j and its high N-1 coefficients into row
// i+j+1. One block product is absorbed per cycle, which matches the array's
// back-to-back rate.
// Interface: clear zeroes the store in one cycle; in_valid/in_blk/in_vec add a
// block product; rd_idx reads one coefficient with one cycle of latency.
// The paper says only that block products are accumulated with their
// x^((i+j)L) shift in vector units outside the array (it models a 16-lane
// SIMD unit); this full-width, one-product-per-cycle adder row is this
// design's choice.
module mpx_poly_acc
  import mpx_pkg::*;
#(
  parameter int unsigned N      = 32,
  parameter int unsigned BLOCKS = 32,
  localparam int unsigned KW = (BLOCKS > 1) ? $clog2(BLOCKS) : 1,
  localparam int unsigned IW = $clog2(BLOCKS * N),
  localparam int unsigned CW = (N > 1) ? $clog2(N) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear,
  input  logic          in_valid,
  input  logic [KW-1:0] in_blk,           // i+j of the block pair
  input  acc_t          in_vec [2*N-1],   // coefficients of A_i*B_j
  input  logic [IW-1:0] rd_idx,           // coefficient index of the result
  output acc_t          rd_data
);

  acc_t acc [BLOCKS][N];
  logic [KW-1:0] rd_row;
  logic [CW-1:0] rd_col;

  assign rd_row = KW'(rd_idx / IW'(N));
  assign rd_col = CW'(rd_idx % IW'(N));

  always_ff @(posedge clk) begin
    if (!rst_n || clear) begin
      for (int r = 0; r < int'(BLOCKS); r++)
        for (int k = 0; k < int'(N); k++) acc[r][k] <= '0;
    end else if (in_valid) begin
      for (int k = 0; k < int'(N); k++)
        acc[in_blk][k] <= acc[in_blk][k] + in_vec[k];
      if (int'(in_blk) + 1 < int'(BLOCKS)) begin
        for (int k = 0; k < int'(N) - 1; k++)
          acc[in_blk+1][k] <= acc[in_blk+1][k] + in_vec[N+k];
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) rd_data <= '0;
    else        rd_data <= acc[rd_row][rd_col];
  end

  a_blk_range: assert property (@(posedge clk) disable iff (!rst_n)
                                in_valid |-> int'(in_blk) + 1 < int'(BLOCKS))
    else $error("poly accumulator: block offset %0d out of range", in_blk);

endmodule
