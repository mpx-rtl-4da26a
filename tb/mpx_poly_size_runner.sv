// mpx_poly_size_runner: test helper that builds one MPX engine at the given
// array size and runs polynomial products of KMIN*N, 2*KMIN*N and 4*KMIN*N
// coefficients through it (K = KMIN, 2*KMIN, 4*KMIN blocks, all K^2 block
// pairs streamed back to back).
//
// Each result coefficient is compared with a convolution computed here, and
// the start-to-done time with K^2 + 2N + 3 cycles. When it has finished it
// raises finished and holds its check and failure counts on the outputs.
module mpx_poly_size_runner #(
  parameter int N     = 16,
  parameter int DEPTH = 32,
  parameter int MAXB  = 32,
  parameter int KMIN  = 8
) (
  input  logic clk,
  output logic finished,
  output int   checks,
  output int   failures
);
  import mpx_pkg::*;

  localparam int BW = $clog2(N);
  localparam int AW = $clog2(DEPTH);
  localparam int KW = $clog2(MAXB + 1);
  localparam int MW = $clog2(DEPTH + 1);
  localparam int RW = $clog2(2 * MAXB * N);

  logic rst_n;
  logic in_wr_en, w_wr_en, start, busy, done;
  logic [BW-1:0] in_wr_bank, w_wr_bank, out_rd_bank;
  logic [AW-1:0] in_wr_addr, w_wr_addr, out_rd_addr;
  data_t in_wr_data, w_wr_data;
  mode_e op_mode;
  logic [MW-1:0] m_rows;
  logic [KW-1:0] k_blocks;
  acc_t out_rd_data, res_rd_data;
  logic [RW-1:0] res_rd_idx;

  mpx_top #(.N(N), .BUF_DEPTH(DEPTH), .MAX_BLOCKS(MAXB)) dut (
    .clk, .rst_n, .in_wr_en, .in_wr_bank, .in_wr_addr, .in_wr_data,
    .w_wr_en, .w_wr_bank, .w_wr_addr, .w_wr_data,
    .start, .op_mode, .m_rows, .k_blocks, .busy, .done,
    .out_rd_bank, .out_rd_addr, .out_rd_data, .res_rd_idx, .res_rd_data
  );

  task automatic check(input string what, input int got, input int exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL N=%0d %s: got %0d expected %0d", N, what, got, exp);
    end
  endtask

  // Writes one operand word to each buffer in the same cycle.
  task automatic wr2(input int bank, input int addr, input data_t da, input data_t db);
    in_wr_en = 1'b1; in_wr_bank = BW'(bank); in_wr_addr = AW'(addr); in_wr_data = da;
    w_wr_en  = 1'b1; w_wr_bank  = BW'(bank); w_wr_addr  = AW'(addr); w_wr_data  = db;
    @(posedge clk); #1;
    in_wr_en = 1'b0; w_wr_en = 1'b0;
  endtask

  data_t a [MAXB*N];
  data_t b [MAXB*N];

  initial begin
    int cyc;
    finished = 1'b0; checks = 0; failures = 0;
    rst_n = 1'b0;
    in_wr_en = 1'b0; w_wr_en = 1'b0; start = 1'b0;
    in_wr_bank = '0; in_wr_addr = '0; in_wr_data = '0;
    w_wr_bank = '0; w_wr_addr = '0; w_wr_data = '0;
    op_mode = MODE_POLY; m_rows = '0; k_blocks = '0;
    out_rd_bank = '0; out_rd_addr = '0; res_rd_idx = '0;
    repeat (4) @(posedge clk);
    #1 rst_n = 1'b1;
    @(posedge clk); #1;

    for (int kk = KMIN; kk <= 4*KMIN; kk *= 2) begin
      for (int i = 0; i < MAXB*N; i++) begin
        a[i] = (i < kk*N) ? data_t'($urandom) : data_t'(0);
        b[i] = (i < kk*N) ? data_t'($urandom) : data_t'(0);
      end
      // block blk of A goes to address blk, reversed across the West banks;
      // block blk of B goes to address blk, in order across the North banks
      for (int blk = 0; blk < kk; blk++)
        for (int r = 0; r < N; r++)
          wr2(r, blk, a[blk*N + N-1-r], b[blk*N + r]);

      op_mode = MODE_POLY; k_blocks = KW'(kk);
      start = 1'b1;
      @(posedge clk); #1;
      start = 1'b0;
      cyc = 0;
      do begin
        @(posedge clk); #1;
        cyc++;
      end while (!done);
      check("poly cycles", cyc, kk*kk + 2*N + 3);
      $display("poly %0d x %0d coefficients on %0dx%0d: %0d cycles", kk*N, kk*N, N, N, cyc);

      for (int o = 0; o < 2*kk*N-1; o++) begin
        acc_t exp;
        exp = '0;
        for (int i = 0; i < kk*N; i++)
          if (o-i >= 0 && o-i < kk*N) exp += acc_t'(a[i]) * acc_t'(b[o-i]);
        res_rd_idx = RW'(o);
        @(posedge clk); #1;
        check($sformatf("K=%0d c[%0d]", kk, o), res_rd_data, exp);
      end
    end
    finished = 1'b1;
  end

endmodule
