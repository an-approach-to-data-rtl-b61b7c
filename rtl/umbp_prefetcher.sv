// umbp_prefetcher: usage-and-miss-based data prefetcher (top level).
//
// For every L2 access it is given the load's instruction pointer, the data
// address and whether the access hit. It keeps per-instruction state in a
// 128-entry instruction table, detects a stream, stride or stream-then-stride
// pattern, and prefetches 1, 4 or 8 lines depending on two metrics of the
// instruction: how often it is referenced compared with the other tracked
// instructions (usage: common = among the 50 most referenced) and how its
// miss rate compares with a 70-entry reference set (50 common + 20 random
// uncommon instructions). Common instructions with a high miss rate get the
// high degree, uncommon ones with a low miss rate the low degree, all others
// the standard degree. This structure and all sizes are the paper's.
//
// This design's own choices: accesses are taken one at a time through a
// valid/ready port and processed by a control FSM,
//   UPDATE  CAM lookup, allocate on miss, update counters and pattern (1 cycle)
//   RANK    usage rank of the entry, start of the miss comparison (1 cycle)
//   MISS    compare with the 70 sample entries, one per cycle (71 cycles)
//   ISSUE   hand out the prefetch addresses, one per accepted cycle
//   REFILL  every REFRESH_PERIOD accesses, rebuild the sample table by a scan
//           of the instruction table (ENTRIES cycles)
// so an access with pf_ready high takes about 75 + degree cycles. acc_ready is
// high only in IDLE. The call and miss counters saturate. A decision report
// (dec_*) pulses once per access for performance counting.
module umbp_prefetcher
  import umbp_pkg::*;
#(
  parameter int unsigned ENTRIES        = 128,
  parameter int unsigned NUM_COMMON     = 50,
  parameter int unsigned N_RANDOM       = 20,
  parameter int unsigned THRESH_PCT     = 30,
  parameter int unsigned DEG_LOW        = 1,
  parameter int unsigned DEG_STD        = 4,
  parameter int unsigned DEG_HIGH       = 8,
  parameter int unsigned REFRESH_PERIOD = 128
) (
  input  logic              clk,
  input  logic              rst_n,
  // accesses from the core / L2 ("Hit (0,1)", "Instruction")
  input  logic              acc_valid,
  output logic              acc_ready,
  input  logic [IP_W-1:0]   acc_ip,
  input  logic [ADDR_W-1:0] acc_addr,
  input  logic              acc_hit,
  // prefetch requests to memory ("Data to Fetch")
  output logic              pf_valid,
  input  logic              pf_ready,
  output logic [ADDR_W-1:0] pf_addr,
  // decision report, one pulse per access
  output logic              dec_valid,
  output pattern_e          dec_pattern,
  output degree_e           dec_degree,
  output logic              dec_common,
  output logic              dec_low_miss,
  output logic              dec_table_hit,
  output logic              dec_evict,
  output logic              refill_active
);

  localparam int unsigned IDX_W   = $clog2(ENTRIES);
  localparam int unsigned SAMPLES = NUM_COMMON + N_RANDOM;
  localparam int unsigned SIDX_W  = $clog2(SAMPLES);
  localparam int unsigned RCNT_W  = $clog2(REFRESH_PERIOD + 1);

  typedef enum logic [2:0] {S_IDLE, S_UPDATE, S_RANK, S_MISS, S_ISSUE, S_REFILL} state_e;
  state_e state;

  // latched access
  logic [IP_W-1:0]    ip_q;
  logic [LINE_W-1:0]  line_q;
  logic               hit_q;
  logic [IDX_W-1:0]   cur_idx;
  pattern_e           pat_q;
  logic signed [STRIDE_W-1:0] stride_q;
  logic               common_q, thit_q, evict_q;
  logic [RCNT_W-1:0]  acc_cnt;

  // instruction table
  logic               lk_hit;
  logic [IDX_W-1:0]   lk_idx, victim_idx, rd_idx, scan_idx, wr_idx;
  ip_entry_t          rd_entry, scan_entry, wr_entry;
  logic               wr_en;
  logic [ENTRIES-1:0][CNT_W-1:0] all_calls;
  logic [ENTRIES-1:0] all_valid;

  ip_table #(.ENTRIES(ENTRIES)) u_table (
    .clk, .rst_n,
    .lookup_ip(ip_q), .lookup_hit(lk_hit), .lookup_idx(lk_idx), .victim_idx,
    .rd_idx, .rd_entry, .scan_idx, .scan_entry,
    .wr_en, .wr_idx, .wr_entry, .all_calls, .all_valid
  );

  // pattern detection on the entry being updated
  pattern_e                   pd_pattern;
  logic signed [STRIDE_W-1:0] pd_stride;
  logic [STREAM_W-1:0]        pd_stream;

  pattern_detector u_pattern (
    .entry_valid(lk_hit), .last_line(rd_entry.last_line), .stride_in(rd_entry.stride),
    .stream_in(rd_entry.stream_cnt), .new_line(line_q),
    .pattern(pd_pattern), .stride_out(pd_stride), .stream_out(pd_stream)
  );

  // usage metric, shared between the access path and the refill scan
  logic [IDX_W-1:0] rk_idx;
  logic [IDX_W:0]   rk_rank;
  logic             rk_common;

  usage_ranker #(.ENTRIES(ENTRIES), .NUM_COMMON(NUM_COMMON)) u_rank (
    .all_calls, .all_valid, .q_idx(rk_idx), .rank(rk_rank), .common(rk_common)
  );

  // sample table and miss metric
  logic              st_start, st_busy, st_done;
  logic [SIDX_W-1:0] st_rd_idx;
  logic              st_rd_valid;
  logic [CNT_W-1:0]  st_rd_misses, st_rd_calls;
  logic              mc_start, mc_busy, mc_done, mc_low;

  sample_table #(.ENTRIES(ENTRIES), .N_COMMON(NUM_COMMON), .N_RANDOM(N_RANDOM)) u_sample (
    .clk, .rst_n, .refill_start(st_start), .busy(st_busy), .done(st_done),
    .scan_idx, .scan_valid(scan_entry.valid), .scan_misses(scan_entry.misses),
    .scan_calls(scan_entry.calls), .scan_common(rk_common),
    .rd_idx(st_rd_idx), .rd_valid(st_rd_valid), .rd_misses(st_rd_misses), .rd_calls(st_rd_calls)
  );

  miss_classifier #(.SAMPLES(SAMPLES), .THRESH_PCT(THRESH_PCT)) u_miss (
    .clk, .rst_n, .start(mc_start), .q_misses(rd_entry.misses), .q_calls(rd_entry.calls),
    .rd_idx(st_rd_idx), .rd_valid(st_rd_valid), .rd_misses(st_rd_misses), .rd_calls(st_rd_calls),
    .busy(mc_busy), .done(mc_done), .low_miss(mc_low)
  );

  // degree and issue
  degree_e          ds_degree;
  logic [DEG_W-1:0] ds_lines;
  logic             pi_start, pi_busy, pi_done;

  degree_select #(.DEG_LOW(DEG_LOW), .DEG_STD(DEG_STD), .DEG_HIGH(DEG_HIGH)) u_degree (
    .common(common_q), .low_miss(mc_low), .degree(ds_degree), .lines(ds_lines)
  );

  prefetch_issue u_issue (
    .clk, .rst_n, .start(pi_start), .base_line(line_q), .pattern(pat_q), .stride(stride_q),
    .lines(ds_lines), .pf_valid, .pf_ready, .pf_addr, .busy(pi_busy), .done(pi_done)
  );

  // control
  logic refresh_due;
  assign refresh_due   = (acc_cnt == RCNT_W'(REFRESH_PERIOD - 1));
  assign acc_ready     = (state == S_IDLE);
  assign refill_active = st_busy;

  always_comb begin
    rd_idx   = (state == S_UPDATE) ? (lk_hit ? lk_idx : victim_idx) : cur_idx;
    rk_idx   = (state == S_REFILL) ? scan_idx : cur_idx;
    wr_en    = (state == S_UPDATE);
    wr_idx   = rd_idx;
    mc_start = (state == S_RANK);
    pi_start = (state == S_MISS) && mc_done;
    st_start = (state == S_ISSUE) && pi_done && refresh_due;
    wr_entry = rd_entry;
    wr_entry.valid      = 1'b1;
    wr_entry.ip         = ip_q;
    wr_entry.last_line  = line_q;
    wr_entry.stride     = pd_stride;
    wr_entry.stream_cnt = pd_stream;
    if (lk_hit) begin
      wr_entry.calls  = (rd_entry.calls == '1) ? rd_entry.calls : rd_entry.calls + 1'b1;
      wr_entry.misses = (rd_entry.misses == '1 || hit_q) ? rd_entry.misses : rd_entry.misses + 1'b1;
    end else begin
      wr_entry.calls  = CNT_W'(1);
      wr_entry.misses = CNT_W'(!hit_q);
    end
    wr_entry.age = '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      ip_q      <= '0;
      line_q    <= '0;
      hit_q     <= 1'b0;
      cur_idx   <= '0;
      pat_q     <= PAT_NONE;
      stride_q  <= '0;
      common_q  <= 1'b0;
      thit_q    <= 1'b0;
      evict_q   <= 1'b0;
      acc_cnt   <= '0;
      dec_valid <= 1'b0;
      dec_pattern   <= PAT_NONE;
      dec_degree    <= DEG_CLASS_STANDARD;
      dec_common    <= 1'b0;
      dec_low_miss  <= 1'b0;
      dec_table_hit <= 1'b0;
      dec_evict     <= 1'b0;
    end else begin
      dec_valid <= 1'b0;
      unique case (state)
        S_IDLE: if (acc_valid) begin
          ip_q   <= acc_ip;
          line_q <= acc_addr[ADDR_W-1:LINE_OFF];
          hit_q  <= acc_hit;
          state  <= S_UPDATE;
        end
        S_UPDATE: begin
          cur_idx  <= rd_idx;
          pat_q    <= pd_pattern;
          stride_q <= pd_stride;
          thit_q   <= lk_hit;
          evict_q  <= !lk_hit && rd_entry.valid;
          state    <= S_RANK;
        end
        S_RANK: begin
          common_q <= rk_common;
          state    <= S_MISS;
        end
        S_MISS: if (mc_done) begin
          dec_valid     <= 1'b1;
          dec_pattern   <= pat_q;
          dec_degree    <= ds_degree;
          dec_common    <= common_q;
          dec_low_miss  <= mc_low;
          dec_table_hit <= thit_q;
          dec_evict     <= evict_q;
          state         <= S_ISSUE;
        end
        S_ISSUE: if (pi_done) begin
          if (refresh_due) begin
            acc_cnt <= '0;
            state   <= S_REFILL;
          end else begin
            acc_cnt <= acc_cnt + 1'b1;
            state   <= S_IDLE;
          end
        end
        S_REFILL: if (st_done) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  // the sub-units are only started when idle
  assert property (@(posedge clk) disable iff (!rst_n) mc_start |-> !mc_busy);
  assert property (@(posedge clk) disable iff (!rst_n) pi_start |-> !pi_busy);
  assert property (@(posedge clk) disable iff (!rst_n) st_start |-> !st_busy);

endmodule
