// tb_mpx_pe: self-checking test of one dual-mode processing element.
//
// Drives random operands, partial sums, w_shift and mode every cycle and
// compares every output with a cycle-level model kept in the testbench:
// a and w registers (w only when w_shift), psum = (poly ? diag_in : psum_in)
// + a*w with signed 8-bit operands, and a diagonal register that follows
// psum only in polynomial mode and holds in matrix mode.
module tb_mpx_pe;
  import mpx_pkg::*;

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

  logic  rst_n, w_shift;
  mode_e mode;
  data_t a_in, w_in, a_out, w_out;
  acc_t  psum_in, diag_in, psum_out, diag_out;

  mpx_pe dut (.*);

  task automatic check(input string what, input int got, input int exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  // reference state
  int ra, rw, rp, rd;
  int n_hold_w = 0, n_hold_d = 0;

  initial begin
    rst_n = 1'b0; w_shift = 1'b0; mode = MODE_MATRIX;
    a_in = '0; w_in = '0; psum_in = '0; diag_in = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    ra = 0; rw = 0; rp = 0; rd = 0;
    for (int t = 0; t < 4000; t++) begin
      int na, nw, np, nd;
      // drive random inputs
      a_in    = data_t'($urandom);
      w_in    = data_t'($urandom);
      psum_in = acc_t'($urandom);
      diag_in = acc_t'($urandom);
      w_shift = ($urandom_range(3) == 0);
      if ($urandom_range(15) == 0) mode = (mode == MODE_POLY) ? MODE_MATRIX : MODE_POLY;
      // model of the next state
      na = int'(a_in);
      nw = w_shift ? int'(w_in) : rw;
      np = ((mode == MODE_POLY) ? int'(diag_in) : int'(psum_in)) + ra * rw;
      nd = (mode == MODE_POLY) ? rp : rd;
      if (!w_shift) n_hold_w++;
      if (mode == MODE_MATRIX) n_hold_d++;
      @(posedge clk); #1;
      ra = na; rw = nw; rp = np; rd = nd;
      check("a_out", int'(a_out), ra);
      check("w_out", int'(w_out), rw);
      check("psum_out", int'(psum_out), rp);
      check("diag_out", int'(diag_out), rd);
    end
    check("weight hold exercised", int'(n_hold_w > 0), 1);
    check("diagonal gating exercised", int'(n_hold_d > 0), 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
