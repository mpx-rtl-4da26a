// mpx_ctrl: sequencer of the MPX engine.
//
// Matrix mode (op_mode = MODE_MATRIX), weight-stationary:
//   PRELOAD  N cycles: weight-buffer rows N-1 down to 0 are read and shifted
//            into the array (the first row read ends in the bottom PE row).
//   STREAM   m_rows cycles: input-buffer row m is read in cycle m.
//   DRAIN    until the last result row has been written to the output buffer.
//   Result row m is written 2N+1 cycles after its input row was read.
// Polynomial mode (op_mode = MODE_POLY), blocked multiplication:
//   STREAM   k_blocks^2 cycles: block pair (i,j) is read from the input
//            buffer (address i) and weight buffer (address j), in the order
//            (0,0),(0,1),...,(K-1,K-1), one pair per cycle with no idle
//            cycle in between.
//   DRAIN    until the last block product has entered the accumulator.
//   The product of a pair reaches the accumulator 2N+2 cycles after its read,
//   tagged with the offset i+j (in blocks of N coefficients).
// start is taken only in IDLE; done pulses for one cycle at the end and busy
// is high from the cycle after start until done. Counting from the clock edge
// that samples start, done is high 3N + m_rows + 3 cycles later in matrix
// mode and k_blocks^2 + 2N + 3 cycles later in polynomial mode.
// The preload-then-stream order and the back-to-back pair order follow the
// paper; the state machine, counters and latency pipe are this design's.
module mpx_ctrl
  import mpx_pkg::*;
#(
  parameter int unsigned N          = 32,
  parameter int unsigned BUF_DEPTH  = 64,
  parameter int unsigned MAX_BLOCKS = 16,
  localparam int unsigned AW  = (BUF_DEPTH > 1) ? $clog2(BUF_DEPTH) : 1,
  localparam int unsigned KW  = $clog2(MAX_BLOCKS + 1),
  localparam int unsigned MW  = $clog2(BUF_DEPTH + 1),
  localparam int unsigned OW  = $clog2(2 * MAX_BLOCKS),
  localparam int unsigned TW  = (AW > OW) ? AW : OW
) (
  input  logic          clk,
  input  logic          rst_n,
  // command
  input  logic          start,
  input  mode_e         op_mode,
  input  logic [MW-1:0] m_rows,     // matrix: activation rows (1..BUF_DEPTH)
  input  logic [KW-1:0] k_blocks,   // poly: blocks per operand (1..MAX_BLOCKS)
  output mode_e         mode,       // mode of the running operation
  output logic          busy,
  output logic          done,
  // operand buffers
  output logic          in_rd_en,
  output logic [AW-1:0] in_rd_addr,
  output logic          w_rd_en,
  output logic [AW-1:0] w_rd_addr,
  // results
  output logic          out_wr_en,  // matrix: write aligned row
  output logic [AW-1:0] out_wr_addr,
  output logic          acc_clear,  // poly: zero the accumulator
  output logic          acc_valid,  // poly: add aligned block product
  output logic [OW-1:0] acc_blk
);

  typedef enum logic [2:0] {S_IDLE, S_PRELOAD, S_STREAM, S_DRAIN, S_DONE} state_e;

  localparam int unsigned LAT_MAT  = 2 * N + 1;
  localparam int unsigned LAT_POLY = 2 * N + 2;

  state_e        state;
  logic [AW-1:0] cnt;        // preload row / matrix row
  logic [KW-1:0] bi, bj;     // poly block pair
  logic [MW-1:0] rows_q;
  logic [KW-1:0] kb_q;

  logic          issue;      // a read that produces a result is issued now
  logic [TW-1:0] issue_tag;
  logic          last_issue;

  // latency pipe: valid bit and tag of every read in flight
  logic          pv [LAT_POLY];
  logic [TW-1:0] pt [LAT_POLY];
  logic          in_flight;

  always_comb begin
    in_rd_en   = 1'b0;
    in_rd_addr = '0;
    w_rd_en    = 1'b0;
    w_rd_addr  = '0;
    issue      = 1'b0;
    issue_tag  = '0;
    last_issue = 1'b0;
    unique case (state)
      S_PRELOAD: begin
        w_rd_en   = 1'b1;
        w_rd_addr = AW'(N - 1) - cnt;
      end
      S_STREAM: begin
        if (mode == MODE_MATRIX) begin
          in_rd_en   = 1'b1;
          in_rd_addr = cnt;
          issue      = 1'b1;
          issue_tag  = TW'(cnt);
          last_issue = (MW'(cnt) + 1'b1 == rows_q);
        end else begin
          in_rd_en   = 1'b1;
          in_rd_addr = AW'(bi);
          w_rd_en    = 1'b1;
          w_rd_addr  = AW'(bj);
          issue      = 1'b1;
          issue_tag  = TW'(bi) + TW'(bj);
          last_issue = (bi + 1'b1 == kb_q) && (bj + 1'b1 == kb_q);
        end
      end
      default: ;
    endcase
  end

  always_comb begin
    in_flight = 1'b0;
    for (int s = 0; s < int'(LAT_POLY); s++) in_flight |= pv[s];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      mode   <= MODE_MATRIX;
      cnt    <= '0;
      bi     <= '0;
      bj     <= '0;
      rows_q <= '0;
      kb_q   <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          mode   <= op_mode;
          rows_q <= m_rows;
          kb_q   <= k_blocks;
          cnt    <= '0;
          bi     <= '0;
          bj     <= '0;
          state  <= (op_mode == MODE_MATRIX) ? S_PRELOAD : S_STREAM;
        end
        S_PRELOAD: begin
          if (cnt == AW'(N - 1)) begin
            cnt   <= '0;
            state <= S_STREAM;
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
        S_STREAM: begin
          if (last_issue) state <= S_DRAIN;
          if (mode == MODE_MATRIX) begin
            cnt <= cnt + 1'b1;
          end else if (bj + 1'b1 == kb_q) begin
            bj <= '0;
            bi <= bi + 1'b1;
          end else begin
            bj <= bj + 1'b1;
          end
        end
        S_DRAIN: if (!in_flight) state <= S_DONE;
        S_DONE:  state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int s = 0; s < int'(LAT_POLY); s++) begin
        pv[s] <= 1'b0;
        pt[s] <= '0;
      end
    end else begin
      pv[0] <= issue;
      pt[0] <= issue_tag;
      for (int s = 1; s < int'(LAT_POLY); s++) begin
        pv[s] <= pv[s-1];
        pt[s] <= pt[s-1];
      end
    end
  end

  // The read issued in cycle t is aligned at the array output in cycle
  // t+LAT; pipe stage s holds reads issued s+1 cycles ago.
  assign out_wr_en   = (mode == MODE_MATRIX) && pv[LAT_MAT-1];
  assign out_wr_addr = AW'(pt[LAT_MAT-1]);
  assign acc_valid   = (mode == MODE_POLY) && pv[LAT_POLY-1];
  assign acc_blk     = OW'(pt[LAT_POLY-1]);
  assign acc_clear   = (state == S_IDLE) && start && (op_mode == MODE_POLY);

  assign busy = (state != S_IDLE);
  assign done = (state == S_DONE);

  a_rows: assert property (@(posedge clk) disable iff (!rst_n)
                           (start && state == S_IDLE && op_mode == MODE_MATRIX)
                           |-> (m_rows != 0 && int'(m_rows) <= int'(BUF_DEPTH)))
    else $error("mpx_ctrl: m_rows %0d out of range", m_rows);
  a_blocks: assert property (@(posedge clk) disable iff (!rst_n)
                             (start && state == S_IDLE && op_mode == MODE_POLY)
                             |-> (k_blocks != 0 && int'(k_blocks) <= int'(MAX_BLOCKS)))
    else $error("mpx_ctrl: k_blocks %0d out of range", k_blocks);
  a_no_start_busy: assert property (@(posedge clk) disable iff (!rst_n)
                                    busy |-> !start)
    else $error("mpx_ctrl: start while busy");

endmodule
