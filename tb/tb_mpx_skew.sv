// tb_mpx_skew: self-checking test of the staircase delay lines.
//
// Feeds a fresh random vector every cycle into a forward (lane k delayed k)
// and a reverse (lane k delayed LANES-1-k) instance and checks each output
// lane against the input history recorded by the testbench.
module tb_mpx_skew;
  import mpx_pkg::*;

  localparam int L = 6;
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

  logic  rst_n;
  data_t din [L];
  data_t fwd [L], rev [L];

  mpx_skew #(.T(data_t), .LANES(L), .REVERSE(1'b0)) u_fwd (.clk, .rst_n, .din, .dout(fwd));
  mpx_skew #(.T(data_t), .LANES(L), .REVERSE(1'b1)) u_rev (.clk, .rst_n, .din, .dout(rev));

  data_t hist [$];   // hist[t*L + k]: lane k input at cycle t

  initial begin
    rst_n = 1'b0;
    for (int k = 0; k < L; k++) din[k] = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int t = 0; t < 500; t++) begin
      for (int k = 0; k < L; k++) begin
        din[k] = data_t'($urandom);
        hist.push_back(din[k]);
      end
      #1;
      for (int k = 0; k < L; k++) begin
        int df, dr;
        data_t ef, er;
        df = k;
        dr = L-1-k;
        ef = (t >= df) ? hist[(t-df)*L + k] : data_t'(0);
        er = (t >= dr) ? hist[(t-dr)*L + k] : data_t'(0);
        checks += 2;
        if (fwd[k] !== ef) begin
          failures++;
          if (failures < 20) $display("FAIL fwd lane %0d t=%0d: %0d vs %0d", k, t, fwd[k], ef);
        end
        if (rev[k] !== er) begin
          failures++;
          if (failures < 20) $display("FAIL rev lane %0d t=%0d: %0d vs %0d", k, t, rev[k], er);
        end
      end
      @(posedge clk); #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
