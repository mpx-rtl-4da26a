// tb_mpx_out_align: self-checking test of the output alignment registers.
//
// Drives the array-edge inputs of a 4x4 aligner with values stamped as
// (cycle, lane) every cycle and checks that mat_row[j] shows psum_bot[j] from
// N-1-j cycles ago, poly_vec[k] (k < N) shows diag_bot[k] from N-1-k cycles
// ago and poly_vec[k] (k >= N) shows diag_right[2N-2-k] from k-N+1 cycles ago.
module tb_mpx_out_align;
  import mpx_pkg::*;

  localparam int N = 4;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic rst_n;
  acc_t psum_bot [N], diag_bot [N], diag_right [N];
  acc_t mat_row [N], poly_vec [2*N-1];

  mpx_out_align #(.N(N)) dut (.*);

  // stamp: 1000*t + 100*src + lane, src 1 = psum_bot, 2 = diag_bot, 3 = diag_right
  function automatic int stamp(int t, int src, int lane);
    return (t < 0) ? 0 : 1000*t + 100*src + lane;
  endfunction

  task automatic check(input string what, input int got, input int exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    rst_n = 1'b0;
    for (int k = 0; k < N; k++) begin psum_bot[k] = '0; diag_bot[k] = '0; diag_right[k] = '0; end
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int t = 0; t < 200; t++) begin
      for (int k = 0; k < N; k++) begin
        psum_bot[k]   = stamp(t, 1, k);
        diag_bot[k]   = stamp(t, 2, k);
        diag_right[k] = stamp(t, 3, k);
      end
      #1;
      for (int j = 0; j < N; j++)
        check($sformatf("mat_row[%0d]", j), mat_row[j], stamp(t-(N-1-j), 1, j));
      for (int k = 0; k < 2*N-1; k++) begin
        if (k < N) check($sformatf("poly_vec[%0d]", k), poly_vec[k], stamp(t-(N-1-k), 2, k));
        else       check($sformatf("poly_vec[%0d]", k), poly_vec[k], stamp(t-(k-N+1), 3, 2*N-2-k));
      end
      @(posedge clk); #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
