// tb_mpx_poly_acc: self-checking test of the block-product accumulator.
//
// Sends random (2N-1)-coefficient vectors tagged with random block offsets,
// one per cycle, into a model of the full polynomial, including vectors that
// overlap the previous one, and then reads back every coefficient. A clear
// between two rounds must zero the store.
module tb_mpx_poly_acc;
  import mpx_pkg::*;

  localparam int N = 4;
  localparam int BLOCKS = 6;
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

  logic rst_n, clear, in_valid;
  logic [2:0] in_blk;
  acc_t in_vec [2*N-1];
  logic [4:0] rd_idx;
  acc_t rd_data;

  mpx_poly_acc #(.N(N), .BLOCKS(BLOCKS)) dut (.*);

  int model [BLOCKS*N];

  task automatic round(input int nvec);
    clear = 1'b1;
    @(posedge clk); #1;
    clear = 1'b0;
    for (int k = 0; k < BLOCKS*N; k++) model[k] = 0;
    for (int v = 0; v < nvec; v++) begin
      int blk;
      in_valid = ($urandom_range(4) != 0);
      blk = int'($urandom_range(BLOCKS-2));
      in_blk = 3'(blk);
      for (int k = 0; k < 2*N-1; k++) begin
        in_vec[k] = acc_t'($urandom_range(2000)) - 1000;
        if (in_valid) model[blk*N + k] += int'(in_vec[k]);
      end
      @(posedge clk); #1;
    end
    in_valid = 1'b0;
    for (int k = 0; k < BLOCKS*N; k++) begin
      rd_idx = 5'(k);
      @(posedge clk); #1;
      checks++;
      if (int'(rd_data) !== model[k]) begin
        failures++;
        if (failures < 20) $display("FAIL coef %0d: %0d vs %0d", k, rd_data, model[k]);
      end
    end
  endtask

  initial begin
    rst_n = 1'b0; clear = 1'b0; in_valid = 1'b0; in_blk = '0; rd_idx = '0;
    for (int k = 0; k < 2*N-1; k++) in_vec[k] = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    round(40);
    round(5);
    round(100);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
