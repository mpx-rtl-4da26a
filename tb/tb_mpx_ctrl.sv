// tb_mpx_ctrl: self-checking test of the MPX sequencer.
//
// For matrix commands it checks the preload reads (weight rows N-1..0 in N
// consecutive cycles), the streaming reads (input rows 0..m-1 in m
// consecutive cycles right after), that output row m is written 2N+1 cycles
// after row m was read, and the start-to-done cycle count 3N+m+3. For
// polynomial commands it checks that the K^2 block pairs are read in order
// (i,j) = (0,0),(0,1),... one per cycle, that the accumulator is cleared at
// start, that each pair's product is accumulated 2N+2 cycles after its read
// with offset i+j, and the cycle count K^2+2N+3.
module tb_mpx_ctrl;
  import mpx_pkg::*;

  localparam int N = 4, DEPTH = 8, MAXB = 4;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic rst_n, start, busy, done;
  mode_e op_mode, mode;
  logic [3:0] m_rows;
  logic [2:0] k_blocks;
  logic in_rd_en, w_rd_en, out_wr_en, acc_clear, acc_valid;
  logic [2:0] in_rd_addr, w_rd_addr, out_wr_addr, acc_blk;

  mpx_ctrl #(.N(N), .BUF_DEPTH(DEPTH), .MAX_BLOCKS(MAXB)) dut (.*);

  task automatic check(input string what, input int got, input int exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 30) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  // Per-cycle log of one operation, cycle 0 = the cycle after start.
  typedef struct packed {
    logic in_rd; logic [2:0] in_a; logic w_rd; logic [2:0] w_a;
    logic ow; logic [2:0] ow_a; logic av; logic [2:0] ab; logic clr; logic dn;
  } ev_t;

  task automatic run(input mode_e md, input int m, input int k);
    ev_t ev [$];
    int  cyc;
    op_mode = md; m_rows = 4'(m); k_blocks = 3'(k);
    start = 1'b1;
    #1;
    check("acc_clear at start", int'(acc_clear), int'(md == MODE_POLY));
    @(posedge clk); #1;
    start = 1'b0;
    cyc = 0;
    forever begin
      ev.push_back('{in_rd_en, in_rd_addr, w_rd_en, w_rd_addr, out_wr_en, out_wr_addr,
                     acc_valid, acc_blk, acc_clear, done});
      cyc++;
      check("busy", int'(busy), 1);
      if (done) break;
      @(posedge clk); #1;
    end
    if (md == MODE_MATRIX) begin
      check("matrix cycles", cyc - 1, 3*N + m + 3);
      for (int c = 0; c < cyc; c++) begin
        bit exp_w  = (c < N);
        bit exp_in = (c >= N && c < N + m);
        bit exp_o  = (c >= N + 2*N+1 && c < N + m + 2*N+1);
        check($sformatf("c%0d w_rd_en", c), int'(ev[c].w_rd), int'(exp_w));
        if (exp_w) check($sformatf("c%0d w_rd_addr", c), int'(ev[c].w_a), N-1-c);
        check($sformatf("c%0d in_rd_en", c), int'(ev[c].in_rd), int'(exp_in));
        if (exp_in) check($sformatf("c%0d in_rd_addr", c), int'(ev[c].in_a), c-N);
        check($sformatf("c%0d out_wr_en", c), int'(ev[c].ow), int'(exp_o));
        if (exp_o) check($sformatf("c%0d out_wr_addr", c), int'(ev[c].ow_a), c-N-(2*N+1));
        check($sformatf("c%0d acc_valid", c), int'(ev[c].av), 0);
      end
    end else begin
      check("poly cycles", cyc - 1, k*k + 2*N + 3);
      for (int c = 0; c < cyc; c++) begin
        bit exp_rd = (c < k*k);
        bit exp_av = (c >= 2*N+2 && c < k*k + 2*N+2);
        check($sformatf("c%0d in_rd_en", c), int'(ev[c].in_rd), int'(exp_rd));
        check($sformatf("c%0d w_rd_en", c), int'(ev[c].w_rd), int'(exp_rd));
        if (exp_rd) begin
          check($sformatf("c%0d in_rd_addr", c), int'(ev[c].in_a), c / k);
          check($sformatf("c%0d w_rd_addr", c), int'(ev[c].w_a), c % k);
        end
        check($sformatf("c%0d acc_valid", c), int'(ev[c].av), int'(exp_av));
        if (exp_av) begin
          int p = c - (2*N+2);
          check($sformatf("c%0d acc_blk", c), int'(ev[c].ab), p / k + p % k);
        end
        check($sformatf("c%0d out_wr_en", c), int'(ev[c].ow), 0);
      end
    end
    @(posedge clk); #1;
    check("idle after done", int'(busy), 0);
  endtask

  initial begin
    rst_n = 1'b0; start = 1'b0; op_mode = MODE_MATRIX; m_rows = '0; k_blocks = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    @(posedge clk); #1;
    run(MODE_MATRIX, 1, 1);
    run(MODE_POLY, 0, 1);
    run(MODE_POLY, 0, 3);
    run(MODE_MATRIX, DEPTH, 1);
    run(MODE_POLY, 0, MAXB);
    run(MODE_MATRIX, 5, 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
