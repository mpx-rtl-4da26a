// tb_mpx_top: end-to-end test of the MPX engine at a reduced array size.
//
// Runs a sequence of matrix and polynomial operations on a 4x4 engine and
// compares every result word with a reference computed here from the same
// random operands (plain loops: Y = X*W, c_k = sum a_i*b_(k-i)). It also runs
// the 3-coefficient example product (2+3x+4x^2)(1+5x+2x^2) on a 3x3 engine
// and a 4-coefficient product split into four 2-coefficient block pairs on a
// 2x2 engine (blocks of length L = 2 streamed back to back).
// Each operation's start-to-done cycle count is checked against the
// controller's schedule: 3N + m + 3 for matrix mode, K^2 + 2N + 3 for
// polynomial mode. The test counts the mechanisms it exercises (weight
// preload, mode switches in both directions, single- and multi-block
// polynomial products, back-to-back block pairs sharing an offset, gated
// diagonal registers holding still in matrix mode) and fails if any never
// happened.
module tb_mpx_top;
  import mpx_pkg::*;

  localparam int N     = 4;
  localparam int DEPTH = 8;
  localparam int MAXB  = 4;

  int checks = 0, failures = 0;
  int n_mat = 0, n_poly = 0, n_m2p = 0, n_p2m = 0, n_multiblk = 0;
  int n_preload = 0, n_shared_off = 0, n_gated = 0, n_example = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
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

  mode_e last_mode = MODE_MATRIX;
  bit    any_op = 1'b0;

  // ---------------------------------------------------------------- 4x4 DUT
  logic rst_n;
  logic in_wr_en, w_wr_en, start, busy, done;
  logic [$clog2(N)-1:0] in_wr_bank, w_wr_bank, out_rd_bank;
  logic [$clog2(DEPTH)-1:0] in_wr_addr, w_wr_addr, out_rd_addr;
  data_t in_wr_data, w_wr_data;
  mode_e op_mode;
  logic [$clog2(DEPTH+1)-1:0] m_rows;
  logic [$clog2(MAXB+1)-1:0] k_blocks;
  acc_t out_rd_data, res_rd_data;
  logic [$clog2(2*MAXB*N)-1:0] res_rd_idx;

  mpx_top #(.N(N), .BUF_DEPTH(DEPTH), .MAX_BLOCKS(MAXB)) dut (
    .clk, .rst_n, .in_wr_en, .in_wr_bank, .in_wr_addr, .in_wr_data,
    .w_wr_en, .w_wr_bank, .w_wr_addr, .w_wr_data,
    .start, .op_mode, .m_rows, .k_blocks, .busy, .done,
    .out_rd_bank, .out_rd_addr, .out_rd_data, .res_rd_idx, .res_rd_data
  );

  task automatic wr_in(input int bank, input int addr, input data_t d);
    in_wr_en = 1'b1; in_wr_bank = bank[$bits(in_wr_bank)-1:0];
    in_wr_addr = addr[$bits(in_wr_addr)-1:0]; in_wr_data = d;
    @(posedge clk); #1 in_wr_en = 1'b0;
  endtask

  task automatic wr_w(input int bank, input int addr, input data_t d);
    w_wr_en = 1'b1; w_wr_bank = bank[$bits(w_wr_bank)-1:0];
    w_wr_addr = addr[$bits(w_wr_addr)-1:0]; w_wr_data = d;
    @(posedge clk); #1 w_wr_en = 1'b0;
  endtask

  task automatic run(input mode_e md, input int m, input int k, output int cycles);
    if (any_op && md != last_mode) begin
      if (md == MODE_POLY) n_m2p++; else n_p2m++;
    end
    any_op = 1'b1; last_mode = md;
    op_mode = md; m_rows = m[$bits(m_rows)-1:0]; k_blocks = k[$bits(k_blocks)-1:0];
    start = 1'b1;
    @(posedge clk); #1;
    start = 1'b0;
    cycles = 0;
    do begin
      @(posedge clk); #1;
      cycles++;
    end while (!done);
  endtask

  task automatic test_matrix(input int m);
    data_t x [DEPTH][N];
    data_t w [N][N];
    acc_t  diag_before;
    int    cyc;
    for (int r = 0; r < m; r++)
      for (int c = 0; c < N; c++) begin
        x[r][c] = data_t'($urandom);
        wr_in(c, r, x[r][c]);
      end
    for (int r = 0; r < N; r++)
      for (int c = 0; c < N; c++) begin
        w[r][c] = data_t'($urandom);
        wr_w(c, r, w[r][c]);
      end
    diag_before = dut.u_array.g_row[1].g_col[1].u_pe.diag_q;
    run(MODE_MATRIX, m, 1, cyc);
    n_mat++; n_preload++;
    check("matrix cycles", cyc, 3*N + m + 3);
    // diagonal registers are gated (held) in matrix mode
    checks++;
    if (dut.u_array.g_row[1].g_col[1].u_pe.diag_q !== diag_before) begin
      failures++; $display("FAIL diagonal register moved in matrix mode");
    end else n_gated++;
    for (int r = 0; r < m; r++)
      for (int c = 0; c < N; c++) begin
        acc_t exp;
        exp = '0;
        for (int i = 0; i < N; i++) exp += acc_t'(x[r][i]) * acc_t'(w[i][c]);
        out_rd_bank = c[$bits(out_rd_bank)-1:0];
        out_rd_addr = r[$bits(out_rd_addr)-1:0];
        @(posedge clk); #1;
        check($sformatf("Y[%0d][%0d]", r, c), out_rd_data, exp);
      end
  endtask

  task automatic test_poly(input int k);
    data_t a [MAXB*N];
    data_t b [MAXB*N];
    int    cyc;
    for (int i = 0; i < k*N; i++) begin
      a[i] = data_t'($urandom);
      b[i] = data_t'($urandom);
    end
    for (int blk = 0; blk < k; blk++)
      for (int r = 0; r < N; r++) begin
        wr_in(r, blk, a[blk*N + N-1-r]);
        wr_w(r, blk, b[blk*N + r]);
      end
    run(MODE_POLY, 0, k, cyc);
    n_poly++;
    if (k > 1) begin n_multiblk++; n_shared_off++; end
    check("poly cycles", cyc, k*k + 2*N + 3);
    for (int o = 0; o < 2*k*N-1; o++) begin
      acc_t exp;
        exp = '0;
      for (int i = 0; i < k*N; i++)
        if (o-i >= 0 && o-i < k*N) exp += acc_t'(a[i]) * acc_t'(b[o-i]);
      res_rd_idx = o[$bits(res_rd_idx)-1:0];
      @(posedge clk); #1;
      check($sformatf("c[%0d] (K=%0d)", o, k), res_rd_data, exp);
    end
  endtask

  // ------------------------------------------- 3x3 DUT: the worked example
  logic e_in_wr_en = 1'b0, e_w_wr_en = 1'b0, e_start = 1'b0, e_busy, e_done;
  logic [1:0] e_in_wr_bank, e_w_wr_bank;
  logic [1:0] e_in_wr_addr, e_w_wr_addr;
  data_t e_in_wr_data, e_w_wr_data;
  acc_t e_out_rd_data, e_res_rd_data;
  logic [2:0] e_res_rd_idx = '0;

  mpx_top #(.N(3), .BUF_DEPTH(4), .MAX_BLOCKS(1)) dut3 (
    .clk, .rst_n, .in_wr_en(e_in_wr_en), .in_wr_bank(e_in_wr_bank),
    .in_wr_addr(e_in_wr_addr), .in_wr_data(e_in_wr_data),
    .w_wr_en(e_w_wr_en), .w_wr_bank(e_w_wr_bank), .w_wr_addr(e_w_wr_addr),
    .w_wr_data(e_w_wr_data),
    .start(e_start), .op_mode(MODE_POLY), .m_rows(3'd1), .k_blocks(1'b1),
    .busy(e_busy), .done(e_done),
    .out_rd_bank(2'd0), .out_rd_addr(2'd0), .out_rd_data(e_out_rd_data),
    .res_rd_idx(e_res_rd_idx), .res_rd_data(e_res_rd_data)
  );

  task automatic test_example();
    int a [3] = '{2, 3, 4};
    int b [3] = '{1, 5, 2};
    int c [5] = '{2, 13, 23, 26, 8};
    int cyc;
    for (int r = 0; r < 3; r++) begin
      e_in_wr_en = 1'b1; e_in_wr_bank = r[1:0]; e_in_wr_addr = '0;
      e_in_wr_data = data_t'(a[2-r]);
      e_w_wr_en = 1'b1; e_w_wr_bank = r[1:0]; e_w_wr_addr = '0;
      e_w_wr_data = data_t'(b[r]);
      @(posedge clk); #1;
    end
    e_in_wr_en = 1'b0; e_w_wr_en = 1'b0;
    e_start = 1'b1; @(posedge clk); #1 e_start = 1'b0;
    cyc = 0;
    do begin @(posedge clk); #1; cyc++; end while (!e_done);
    check("example cycles", cyc, 1 + 2*3 + 3);
    for (int o = 0; o < 5; o++) begin
      e_res_rd_idx = o[2:0];
      @(posedge clk); #1;
      check($sformatf("example c[%0d]", o), e_res_rd_data, c[o]);
    end
    n_example++;
  endtask

  // ------------------------- 2x2 DUT: back-to-back sub-polynomials, L = 2
  // A(x) = a0..a3 and B(x) = b0..b3 split into A0, A1, B0, B1 of two
  // coefficients; the four pairs A0B0, A0B1, A1B0, A1B1 stream back to back.
  logic f_in_wr_en = 1'b0, f_w_wr_en = 1'b0, f_start = 1'b0, f_busy, f_done;
  logic f_in_wr_bank = 1'b0, f_w_wr_bank = 1'b0, f_in_wr_addr = 1'b0, f_w_wr_addr = 1'b0;
  data_t f_in_wr_data = '0, f_w_wr_data = '0;
  acc_t f_out_rd_data, f_res_rd_data;
  logic [2:0] f_res_rd_idx = '0;
  int n_fig6 = 0;

  mpx_top #(.N(2), .BUF_DEPTH(2), .MAX_BLOCKS(2)) dut2 (
    .clk, .rst_n, .in_wr_en(f_in_wr_en), .in_wr_bank(f_in_wr_bank),
    .in_wr_addr(f_in_wr_addr), .in_wr_data(f_in_wr_data),
    .w_wr_en(f_w_wr_en), .w_wr_bank(f_w_wr_bank), .w_wr_addr(f_w_wr_addr),
    .w_wr_data(f_w_wr_data),
    .start(f_start), .op_mode(MODE_POLY), .m_rows(2'd1), .k_blocks(2'd2),
    .busy(f_busy), .done(f_done),
    .out_rd_bank(1'b0), .out_rd_addr(1'b0), .out_rd_data(f_out_rd_data),
    .res_rd_idx(f_res_rd_idx), .res_rd_data(f_res_rd_data)
  );

  task automatic test_fig6();
    data_t a [4], b [4];
    int cyc;
    for (int i = 0; i < 4; i++) begin a[i] = data_t'($urandom); b[i] = data_t'($urandom); end
    for (int blk = 0; blk < 2; blk++)
      for (int r = 0; r < 2; r++) begin
        f_in_wr_en = 1'b1; f_in_wr_bank = r[0]; f_in_wr_addr = blk[0];
        f_in_wr_data = a[blk*2 + 1 - r];
        f_w_wr_en = 1'b1; f_w_wr_bank = r[0]; f_w_wr_addr = blk[0];
        f_w_wr_data = b[blk*2 + r];
        @(posedge clk); #1;
      end
    f_in_wr_en = 1'b0; f_w_wr_en = 1'b0;
    f_start = 1'b1; @(posedge clk); #1 f_start = 1'b0;
    cyc = 0;
    do begin @(posedge clk); #1; cyc++; end while (!f_done);
    // four pairs, one per cycle: 2^2 + 2*2 + 3
    check("2x2 back-to-back cycles", cyc, 4 + 2*2 + 3);
    for (int o = 0; o < 7; o++) begin
      int exp;
      exp = 0;
      for (int i = 0; i < 4; i++) if (o-i >= 0 && o-i < 4) exp += int'(a[i]) * int'(b[o-i]);
      f_res_rd_idx = o[2:0];
      @(posedge clk); #1;
      check($sformatf("2x2 c[%0d]", o), int'(f_res_rd_data), exp);
    end
    n_fig6++;
  endtask

  initial begin
    int unsigned seed_dummy;
    rst_n = 1'b0;
    in_wr_en = 1'b0; w_wr_en = 1'b0; start = 1'b0;
    in_wr_bank = '0; in_wr_addr = '0; in_wr_data = '0;
    w_wr_bank = '0; w_wr_addr = '0; w_wr_data = '0;
    op_mode = MODE_MATRIX; m_rows = '0; k_blocks = '0;
    out_rd_bank = '0; out_rd_addr = '0; res_rd_idx = '0;
    e_in_wr_bank = '0; e_in_wr_addr = '0; e_in_wr_data = '0;
    e_w_wr_bank = '0; e_w_wr_addr = '0; e_w_wr_data = '0;
    seed_dummy = $urandom(12345);
    repeat (4) @(posedge clk);
    #1 rst_n = 1'b1;
    @(posedge clk); #1;

    test_example();
    test_fig6();
    test_matrix(DEPTH);
    test_poly(1);
    test_poly(MAXB);
    test_matrix(1);
    test_matrix(5);
    test_poly(2);
    test_poly(3);
    for (int t = 0; t < 6; t++) begin
      if ($urandom_range(1) != 0) test_matrix(int'($urandom_range(DEPTH, 1)));
      else                   test_poly(int'($urandom_range(MAXB, 1)));
    end

    check("mechanism: matrix ops",            int'(n_mat > 0), 1);
    check("mechanism: weight preload",        int'(n_preload > 0), 1);
    check("mechanism: poly ops",              int'(n_poly > 0), 1);
    check("mechanism: switch matrix->poly",   int'(n_m2p > 0), 1);
    check("mechanism: switch poly->matrix",   int'(n_p2m > 0), 1);
    check("mechanism: multi-block products",  int'(n_multiblk > 0), 1);
    check("mechanism: shared-offset accumulation", int'(n_shared_off > 0), 1);
    check("mechanism: gated diagonal regs",   int'(n_gated > 0), 1);
    check("mechanism: worked example",        int'(n_example > 0), 1);
    check("mechanism: 2x2 back-to-back blocks", int'(n_fig6 > 0), 1);
    $display("mechanisms: matrix=%0d preload=%0d poly=%0d m2p=%0d p2m=%0d multiblock=%0d gated=%0d example=%0d 2x2=%0d",
             n_mat, n_preload, n_poly, n_m2p, n_p2m, n_multiblk, n_gated, n_example, n_fig6);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
