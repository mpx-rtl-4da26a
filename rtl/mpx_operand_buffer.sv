// mpx_operand_buffer: banked operand memory on the West (input) or North
// (weight) edge of the array.
//
// One bank per array row (West) or column (North), BANKS banks of DEPTH words.
// A host writes single words (bank, address); the array side reads one word
// from every bank at the same address per cycle. The read is registered:
// rd_data and rd_valid appear the cycle after rd_en, and rd_data is all zeros
// when no read was made, so idle cycles push zeros into the array.
// The paper names these local memory banks; their organisation (one bank per
// lane, one shared row address, registered read, zero fill) is this design's.
module mpx_operand_buffer
  import mpx_pkg::*;
#(
  parameter int unsigned BANKS = 32,
  parameter int unsigned DEPTH = 64,
  localparam int unsigned BW = (BANKS > 1) ? $clog2(BANKS) : 1,
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  // host write port
  input  logic          wr_en,
  input  logic [BW-1:0] wr_bank,
  input  logic [AW-1:0] wr_addr,
  input  data_t         wr_data,
  // array read port (whole row)
  input  logic          rd_en,
  input  logic [AW-1:0] rd_addr,
  output data_t         rd_data [BANKS],
  output logic          rd_valid
);

  data_t mem [BANKS][DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_bank][wr_addr] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rd_valid <= 1'b0;
      for (int b = 0; b < int'(BANKS); b++) rd_data[b] <= '0;
    end else begin
      rd_valid <= rd_en;
      for (int b = 0; b < int'(BANKS); b++)
        rd_data[b] <= rd_en ? mem[b][rd_addr] : '0;
    end
  end

  a_wr_bank: assert property (@(posedge clk) disable iff (!rst_n)
                              wr_en |-> int'(wr_bank) < int'(BANKS))
    else $error("operand buffer: write to bank %0d of %0d", wr_bank, BANKS);

endmodule
