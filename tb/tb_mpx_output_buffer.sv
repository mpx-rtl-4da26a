// tb_mpx_output_buffer: self-checking test of the banked result buffer.
//
// Writes random whole rows through the array-side port and reads random
// single words through the host port, checking each read (one cycle of
// latency) against a model of the memory.
module tb_mpx_output_buffer;
  import mpx_pkg::*;

  localparam int BANKS = 4;
  localparam int DEPTH = 8;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic rst_n, wr_en;
  logic [2:0] wr_addr, rd_addr;
  logic [1:0] rd_bank;
  acc_t wr_data [BANKS];
  acc_t rd_data;

  mpx_output_buffer #(.BANKS(BANKS), .DEPTH(DEPTH)) dut (.*);

  acc_t model [DEPTH][BANKS];

  initial begin
    rst_n = 1'b0; wr_en = 1'b0; wr_addr = '0; rd_addr = '0; rd_bank = '0;
    for (int b = 0; b < BANKS; b++) wr_data[b] = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int a = 0; a < DEPTH; a++) begin
      wr_en = 1'b1; wr_addr = 3'(a);
      for (int b = 0; b < BANKS; b++) begin wr_data[b] = acc_t'($urandom); model[a][b] = wr_data[b]; end
      @(posedge clk); #1;
    end
    wr_en = 1'b0;
    for (int t = 0; t < 400; t++) begin
      logic [2:0] ra;
      logic [1:0] rb;
      ra = 3'($urandom); rb = 2'($urandom);
      rd_addr = ra; rd_bank = rb;
      // write another row in the same cycle
      wr_en = ($urandom_range(1) != 0);
      wr_addr = ra + 3'd3;
      for (int b = 0; b < BANKS; b++) wr_data[b] = acc_t'($urandom);
      @(posedge clk); #1;
      checks++;
      if (rd_data !== model[ra][rb]) begin
        failures++;
        if (failures < 20) $display("FAIL read [%0d][%0d]: %0d vs %0d", ra, rb, rd_data, model[ra][rb]);
      end
      if (wr_en) for (int b = 0; b < BANKS; b++) model[wr_addr][b] = wr_data[b];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
