// tb_mpx_poly_sizes: polynomial products of 128, 256 and 512 coefficients on
// a 16x16 and a 64x64 engine, the two array sizes evaluated besides the
// default 32x32 one (which tb_mpx_top_full covers).
//
// The 16x16 engine needs 8, 16 and 32 blocks per operand, so it is built
// with 32-block buffers and result store; the 64x64 engine needs 2, 4 and
// 8 blocks. Both run at once; each checks every result coefficient and the
// start-to-done time K^2 + 2N + 3 (see mpx_poly_size_runner).
module tb_mpx_poly_sizes;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic fin16, fin64;
  int   chk16, chk64, fail16, fail64;
  int   checks, failures;

  mpx_poly_size_runner #(.N(16), .DEPTH(32), .MAXB(32), .KMIN(8)) u_n16 (
    .clk, .finished(fin16), .checks(chk16), .failures(fail16)
  );

  mpx_poly_size_runner #(.N(64), .DEPTH(64), .MAXB(8), .KMIN(2)) u_n64 (
    .clk, .finished(fin64), .checks(chk64), .failures(fail64)
  );

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    checks   = chk16 + chk64;
    failures = fail16 + fail64 + 1;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wait (fin16 && fin64);
    @(posedge clk);
    checks   = chk16 + chk64;
    failures = fail16 + fail64;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
