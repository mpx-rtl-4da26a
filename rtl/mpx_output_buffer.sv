// mpx_output_buffer: banked result memory on the South edge of the array.
//
// BANKS banks (one per array column) of DEPTH 32-bit words. In matrix mode the
// array side writes one aligned result row per cycle (all banks, one address);
// a host reads single words (bank, address) with one cycle of latency.
// The paper names the output buffer; its organisation is this design's.
module mpx_output_buffer
  import mpx_pkg::*;
#(
  parameter int unsigned BANKS = 32,
  parameter int unsigned DEPTH = 64,
  localparam int unsigned BW = (BANKS > 1) ? $clog2(BANKS) : 1,
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  // array write port (whole row)
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  acc_t          wr_data [BANKS],
  // host read port
  input  logic [BW-1:0] rd_bank,
  input  logic [AW-1:0] rd_addr,
  output acc_t          rd_data
);

  acc_t mem [DEPTH][BANKS];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) rd_data <= '0;
    else        rd_data <= mem[rd_addr][rd_bank];
  end

endmodule
