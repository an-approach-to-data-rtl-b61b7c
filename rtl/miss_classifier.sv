// miss_classifier: the miss metric. Decides whether the current instruction
// has a low miss rate ("doing well") relative to the reference set in the
// sample table.
//
// A pulse on start latches the instruction's miss and call counts. The
// sample entries are then read one per cycle (rd_idx = 0 .. SAMPLES-1); for
// every valid one the classifier counts it, and counts it as "worse" when its
// miss rate is strictly higher, tested without a divider as
// rd_misses * q_calls > q_misses * rd_calls. One cycle after the last entry,
// done pulses with low_miss = (100 * worse >= THRESH_PCT * valid); an empty
// sample table gives low_miss = 1. Latency: done is high SAMPLES + 1 cycles
// after the start cycle.
//
// The threshold rule follows the paper's example (at 50 % an instruction
// does well when its miss rate is below that of half the compared entries);
// THRESH_PCT = 30 is this design's pick inside the 25-40 % range the paper
// reports as best.
module miss_classifier
  import umbp_pkg::*;
#(
  parameter int unsigned SAMPLES    = 70,
  parameter int unsigned THRESH_PCT = 30,
  localparam int unsigned SIDX_W    = $clog2(SAMPLES)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [CNT_W-1:0]  q_misses,
  input  logic [CNT_W-1:0]  q_calls,
  output logic [SIDX_W-1:0] rd_idx,
  input  logic              rd_valid,
  input  logic [CNT_W-1:0]  rd_misses,
  input  logic [CNT_W-1:0]  rd_calls,
  output logic              busy,
  output logic              done,
  output logic              low_miss
);

  typedef enum logic [1:0] {S_IDLE, S_SCAN, S_FIN} state_e;

  state_e             state;
  logic [CNT_W-1:0]   m_q, c_q;
  logic [SIDX_W:0]    n_valid, n_worse;
  logic [2*CNT_W-1:0] lhs, rhs;

  assign lhs  = rd_misses * c_q;
  assign rhs  = m_q * rd_calls;
  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      rd_idx   <= '0;
      m_q      <= '0;
      c_q      <= '0;
      n_valid  <= '0;
      n_worse  <= '0;
      done     <= 1'b0;
      low_miss <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          m_q     <= q_misses;
          c_q     <= q_calls;
          rd_idx  <= '0;
          n_valid <= '0;
          n_worse <= '0;
          state   <= S_SCAN;
        end
        S_SCAN: begin
          if (rd_valid) begin
            n_valid <= n_valid + 1'b1;
            if (lhs > rhs) n_worse <= n_worse + 1'b1;
          end
          if (rd_idx == SIDX_W'(SAMPLES - 1)) state <= S_FIN;
          else rd_idx <= rd_idx + 1'b1;
        end
        S_FIN: begin
          done     <= 1'b1;
          low_miss <= (n_valid == '0) ||
                      (32'(n_worse) * 32'd100 >= 32'(n_valid) * 32'(THRESH_PCT));
          state    <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
