// tb_mpx_array: self-checking test of the dual-mode systolic array.
//
// 1. The worked example (2+3x+4x^2)(1+5x+2x^2) on a 3x3 array in polynomial
//    mode. Row i is fed a_(2-i) and column j b_j, skewed by i and j. The
//    partial sum every PE holds at each step is checked against the values of
//    the example (4, 20, 3, 8, 19, 2, 26, 13, 23), then the five product
//    coefficients 2, 13, 23, 26, 8 on the diagonal outputs.
// 2. Matrix mode on a 4x4 array: random weights are shifted in, then random
//    activation rows are streamed back to back; each South output is checked
//    against X*W in the cycle it is due (N+j+1 after the row entered).
// 3. Polynomial mode on the same array: random block pairs streamed back to
//    back, one per cycle; every diagonal output is checked against the
//    reference block product in the cycle it is due (N+j+2 / N+i+2).
module tb_mpx_array;
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

  task automatic check(input string what, input int got, input int exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  logic rst_n;

  // ------------------------------------------------------------ 3x3 example
  mode_e e_mode;
  data_t e_a [3], e_w [3];
  acc_t  e_pb [3], e_db [3], e_dr [3];
  mpx_array #(.N(3)) u_ex (
    .clk, .rst_n, .mode(e_mode), .w_shift(1'b1), .a_in(e_a), .w_in(e_w),
    .psum_bot(e_pb), .diag_bot(e_db), .diag_right(e_dr)
  );

  // psum of PE(i,j) after the step in which it computed (step i+j+1)
  function automatic int ex_psum(int i, int j);
    int v [3][3] = '{'{4, 20, 8}, '{3, 19, 26}, '{2, 13, 23}};
    return v[i][j];
  endfunction

  function automatic int ex_pe_psum(int i, int j);
    unique case ({i[1:0], j[1:0]})
      4'b0000: return int'(u_ex.g_row[0].g_col[0].u_pe.psum_out);
      4'b0001: return int'(u_ex.g_row[0].g_col[1].u_pe.psum_out);
      4'b0010: return int'(u_ex.g_row[0].g_col[2].u_pe.psum_out);
      4'b0100: return int'(u_ex.g_row[1].g_col[0].u_pe.psum_out);
      4'b0101: return int'(u_ex.g_row[1].g_col[1].u_pe.psum_out);
      4'b0110: return int'(u_ex.g_row[1].g_col[2].u_pe.psum_out);
      4'b1000: return int'(u_ex.g_row[2].g_col[0].u_pe.psum_out);
      4'b1001: return int'(u_ex.g_row[2].g_col[1].u_pe.psum_out);
      default: return int'(u_ex.g_row[2].g_col[2].u_pe.psum_out);
    endcase
  endfunction

  task automatic run_example();
    int a [3] = '{2, 3, 4};
    int b [3] = '{1, 5, 2};
    e_mode = MODE_POLY;
    // cycle c = 0 is the cycle in which a_(2) enters row 0 and b_0 column 0
    for (int c = 0; c < 12; c++) begin
      for (int k = 0; k < 3; k++) begin
        e_a[k] = (c == k) ? data_t'(a[2-k]) : data_t'(0);
        e_w[k] = (c == k) ? data_t'(b[k])   : data_t'(0);
      end
      #1;
      // step s of the example: PE(i,j) with i+j+1 == s has computed; its
      // partial sum is visible in cycle s+1
      for (int i = 0; i < 3; i++)
        for (int j = 0; j < 3; j++)
          if (c == i + j + 2)
            check($sformatf("example step %0d PE%0d%0d", i+j+1, i, j), ex_pe_psum(i, j), ex_psum(i, j));
      // diagonal outputs, PE(i,j) diag valid in cycle i+j+3
      for (int j = 0; j < 3; j++)
        if (c == 2 + j + 3) check($sformatf("example c%0d", j), int'(e_db[j]), ex_psum(2, j));
      for (int i = 0; i < 2; i++)
        if (c == i + 2 + 3) check($sformatf("example c%0d", 4-i), int'(e_dr[i]), ex_psum(i, 2));
      @(posedge clk); #1;
    end
  endtask

  // ----------------------------------------------------------- 4x4 random
  localparam int N = 4;
  localparam int P = 12;   // rows / block pairs per test
  mode_e mode;
  logic  w_shift;
  data_t a_in [N], w_in [N];
  acc_t  psum_bot [N], diag_bot [N], diag_right [N];
  mpx_array #(.N(N)) dut (.clk, .rst_n, .mode, .w_shift, .a_in, .w_in,
                          .psum_bot, .diag_bot, .diag_right);

  data_t X [P][N], W [N][N], A [P][N], B [P][N];

  task automatic run_matrix();
    mode = MODE_MATRIX;
    for (int m = 0; m < P; m++) for (int r = 0; r < N; r++) X[m][r] = data_t'($urandom);
    for (int r = 0; r < N; r++) for (int c = 0; c < N; c++) W[r][c] = data_t'($urandom);
    // preload: N shifts, last row first
    for (int s = 0; s < N; s++) begin
      w_shift = 1'b1;
      for (int c = 0; c < N; c++) begin w_in[c] = W[N-1-s][c]; a_in[c] = '0; end
      @(posedge clk); #1;
    end
    w_shift = 1'b0;
    for (int c = 0; c < N; c++) w_in[c] = data_t'($urandom);  // ignored while held
    for (int t = 0; t < P + 3*N; t++) begin
      for (int r = 0; r < N; r++)
        a_in[r] = (t - r >= 0 && t - r < P) ? X[t-r][r] : data_t'(0);
      #1;
      for (int j = 0; j < N; j++) begin
        int m;
        m = t - (N + j + 1);
        if (m >= 0 && m < P) begin
          int exp;
          exp = 0;
          for (int i = 0; i < N; i++) exp += int'(X[m][i]) * int'(W[i][j]);
          check($sformatf("matrix Y[%0d][%0d]", m, j), int'(psum_bot[j]), exp);
        end
      end
      @(posedge clk); #1;
    end
  endtask

  function automatic int coef(int p, int k);
    int s;
    s = 0;
    for (int i = 0; i < N; i++)
      if (k - i >= 0 && k - i < N) s += int'(A[p][i]) * int'(B[p][k-i]);
    return s;
  endfunction

  task automatic run_poly();
    mode = MODE_POLY;
    w_shift = 1'b1;
    for (int p = 0; p < P; p++)
      for (int i = 0; i < N; i++) begin
        A[p][i] = data_t'($urandom);
        B[p][i] = data_t'($urandom);
      end
    for (int t = 0; t < P + 3*N + 2; t++) begin
      for (int r = 0; r < N; r++) begin
        a_in[r] = (t - r >= 0 && t - r < P) ? A[t-r][N-1-r] : data_t'(0);
        w_in[r] = (t - r >= 0 && t - r < P) ? B[t-r][r]     : data_t'(0);
      end
      #1;
      for (int j = 0; j < N; j++) begin
        int p;
        p = t - (N + j + 2);
        if (p >= 0 && p < P) check($sformatf("poly pair %0d c%0d", p, j), int'(diag_bot[j]), coef(p, j));
        p = t - (N + j + 2);   // right column row j: coefficient 2N-2-j
        if (p >= 0 && p < P && j < N-1)
          check($sformatf("poly pair %0d c%0d", p, 2*N-2-j), int'(diag_right[j]), coef(p, 2*N-2-j));
      end
      @(posedge clk); #1;
    end
  endtask

  initial begin
    rst_n = 1'b0; e_mode = MODE_POLY; mode = MODE_MATRIX; w_shift = 1'b0;
    for (int k = 0; k < 3; k++) begin e_a[k] = '0; e_w[k] = '0; end
    for (int k = 0; k < N; k++) begin a_in[k] = '0; w_in[k] = '0; end
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    run_example();
    run_matrix();
    run_poly();
    run_matrix();
    run_poly();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
