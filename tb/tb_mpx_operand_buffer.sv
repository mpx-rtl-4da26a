// tb_mpx_operand_buffer: self-checking test of the banked operand buffer.
//
// Fills every (bank, address) with a random byte through the host port,
// then reads random rows, possibly while other words are being written, and
// checks that each row read returns every bank's word one cycle later with
// rd_valid high, and zeros with rd_valid low on cycles without a read.
module tb_mpx_operand_buffer;
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

  logic rst_n, wr_en, rd_en, rd_valid;
  logic [1:0] wr_bank;
  logic [2:0] wr_addr, rd_addr;
  data_t wr_data;
  data_t rd_data [BANKS];

  mpx_operand_buffer #(.BANKS(BANKS), .DEPTH(DEPTH)) dut (.*);

  data_t model [BANKS][DEPTH];

  task automatic check(input string what, input int got, input int exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    logic exp_valid;
    logic [2:0] exp_addr;
    rst_n = 1'b0; wr_en = 1'b0; rd_en = 1'b0;
    wr_bank = '0; wr_addr = '0; wr_data = '0; rd_addr = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int b = 0; b < BANKS; b++)
      for (int a = 0; a < DEPTH; a++) begin
        wr_en = 1'b1; wr_bank = 2'(b); wr_addr = 3'(a); wr_data = data_t'($urandom);
        model[b][a] = wr_data;
        @(posedge clk); #1;
      end
    wr_en = 1'b0;
    exp_valid = 1'b0; exp_addr = '0;
    for (int t = 0; t < 400; t++) begin
      rd_en   = ($urandom_range(3) != 0);
      rd_addr = 3'($urandom);
      // a concurrent host write to a different address than the one read
      wr_en   = ($urandom_range(1) != 0);
      wr_bank = 2'($urandom);
      wr_addr = rd_addr + 3'd1;
      wr_data = data_t'($urandom);
      @(posedge clk); #1;
      check("rd_valid", int'(rd_valid), int'(rd_en));
      for (int b = 0; b < BANKS; b++)
        check($sformatf("row %0d bank %0d", rd_addr, b), int'(rd_data[b]),
              rd_en ? int'(model[b][rd_addr]) : 0);
      if (wr_en) model[wr_bank][wr_addr] = wr_data;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
