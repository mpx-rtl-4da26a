// tb_mpx_top_full: the MPX engine at its default size (32x32 array, 64-word
// operand banks, products of up to 16 blocks = 512 coefficients).
//
// Runs one matrix operation (64 activation rows against a 32x32 weight
// matrix) and polynomial products of two 128-, 256- and 512-coefficient
// polynomials (K = 4, 8, 16 blocks; K^2 block pairs streamed back to back),
// checks every result word against a reference computed in the testbench,
// and checks the start-to-done cycle counts (3N + m + 3 and K^2 + 2N + 3).
module tb_mpx_top_full;
  import mpx_pkg::*;

  localparam int N     = 32;
  localparam int DEPTH = 64;
  localparam int MAXB  = 16;

  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input string what, input int got, input int exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  logic rst_n;
  logic in_wr_en, w_wr_en, start, busy, done;
  logic [4:0] in_wr_bank, w_wr_bank, out_rd_bank;
  logic [5:0] in_wr_addr, w_wr_addr, out_rd_addr;
  data_t in_wr_data, w_wr_data;
  mode_e op_mode;
  logic [6:0] m_rows;
  logic [4:0] k_blocks;
  acc_t out_rd_data, res_rd_data;
  logic [9:0] res_rd_idx;

  mpx_top dut (
    .clk, .rst_n, .in_wr_en, .in_wr_bank, .in_wr_addr, .in_wr_data,
    .w_wr_en, .w_wr_bank, .w_wr_addr, .w_wr_data,
    .start, .op_mode, .m_rows, .k_blocks, .busy, .done,
    .out_rd_bank, .out_rd_addr, .out_rd_data, .res_rd_idx, .res_rd_data
  );

  task automatic wr(input bit west, input int bank, input int addr, input data_t d);
    if (west) begin
      in_wr_en = 1'b1; in_wr_bank = 5'(bank); in_wr_addr = 6'(addr); in_wr_data = d;
    end else begin
      w_wr_en = 1'b1; w_wr_bank = 5'(bank); w_wr_addr = 6'(addr); w_wr_data = d;
    end
    @(posedge clk); #1;
    in_wr_en = 1'b0; w_wr_en = 1'b0;
  endtask

  task automatic run(input mode_e md, input int m, input int k, output int cycles);
    op_mode = md; m_rows = 7'(m); k_blocks = 5'(k);
    start = 1'b1;
    @(posedge clk); #1;
    start = 1'b0;
    cycles = 0;
    do begin
      @(posedge clk); #1;
      cycles++;
    end while (!done);
  endtask

  data_t x [DEPTH][N];
  data_t w [N][N];
  data_t a [MAXB*N];
  data_t b [MAXB*N];

  initial begin
    int cyc;
    rst_n = 1'b0;
    in_wr_en = 1'b0; w_wr_en = 1'b0; start = 1'b0;
    in_wr_bank = '0; in_wr_addr = '0; in_wr_data = '0;
    w_wr_bank = '0; w_wr_addr = '0; w_wr_data = '0;
    op_mode = MODE_MATRIX; m_rows = '0; k_blocks = '0;
    out_rd_bank = '0; out_rd_addr = '0; res_rd_idx = '0;
    repeat (4) @(posedge clk);
    #1 rst_n = 1'b1;
    @(posedge clk); #1;

    // ---- matrix multiplication: Y[64][32] = X[64][32] * W[32][32]
    for (int r = 0; r < DEPTH; r++)
      for (int c = 0; c < N; c++) begin
        x[r][c] = data_t'($urandom);
        wr(1'b1, c, r, x[r][c]);
      end
    for (int r = 0; r < N; r++)
      for (int c = 0; c < N; c++) begin
        w[r][c] = data_t'($urandom);
        wr(1'b0, c, r, w[r][c]);
      end
    run(MODE_MATRIX, DEPTH, 1, cyc);
    check("matrix cycles", cyc, 3*N + DEPTH + 3);
    $display("matrix 64x32 * 32x32: %0d cycles", cyc);
    for (int r = 0; r < DEPTH; r++)
      for (int c = 0; c < N; c++) begin
        acc_t exp;
        exp = '0;
        for (int i = 0; i < N; i++) exp += acc_t'(x[r][i]) * acc_t'(w[i][c]);
        out_rd_bank = 5'(c); out_rd_addr = 6'(r);
        @(posedge clk); #1;
        check($sformatf("Y[%0d][%0d]", r, c), out_rd_data, exp);
      end

    // ---- polynomial multiplication: 128, 256 and 512 coefficients
    // (K = 4, 8, 16 blocks of 32), the sizes of the paper's latency table
    for (int kk = 4; kk <= MAXB; kk *= 2) begin
      for (int i = 0; i < MAXB*N; i++) begin
        a[i] = (i < kk*N) ? data_t'($urandom) : data_t'(0);
        b[i] = (i < kk*N) ? data_t'($urandom) : data_t'(0);
      end
      for (int blk = 0; blk < kk; blk++)
        for (int r = 0; r < N; r++) begin
          wr(1'b1, r, blk, a[blk*N + N-1-r]);
          wr(1'b0, r, blk, b[blk*N + r]);
        end
      run(MODE_POLY, 0, kk, cyc);
      check("poly cycles", cyc, kk*kk + 2*N + 3);
      $display("poly %0d x %0d coefficients on %0dx%0d: %0d cycles", kk*N, kk*N, N, N, cyc);
      for (int o = 0; o < 2*kk*N-1; o++) begin
        acc_t exp;
        exp = '0;
        for (int i = 0; i < kk*N; i++)
          if (o-i >= 0 && o-i < kk*N) exp += acc_t'(a[i]) * acc_t'(b[o-i]);
        res_rd_idx = 10'(o);
        @(posedge clk); #1;
        check($sformatf("K=%0d c[%0d]", kk, o), res_rd_data, exp);
      end
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
