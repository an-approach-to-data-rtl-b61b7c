// tb_umbp_prefetcher: end-to-end test of the prefetcher at its default
// sizes (128-entry table, 50 common, 20 random samples, degrees 1/4/8).
//
// The testbench keeps its own model of the instruction table (allocation,
// saturating-age replacement, counters, stream/stride state) and of the
// usage rank. For every access it checks the reported pattern, table hit,
// eviction and common flag against the model, checks that the degree follows
// the usage/miss matrix, and compares every prefetch address with the
// sequence expected for the pattern and degree. The miss verdict depends on
// the randomly drawn reference set, so it is checked exactly only while that
// set is empty (before the first refill), where it must be "low".
//
// Workload: phase 1 has 40 hot instructions (streams, strides, streams with
// jumps; miss probabilities 0..90 %) and 80 cold ones (streams, some always
// missing); phase 2 adds 300 new instructions to force replacements. Access
// requests are sometimes raised while the prefetcher is busy (stall) and the
// prefetch port applies random backpressure. Every mechanism is counted and
// a mechanism that never occurs counts as a failure.
module tb_umbp_prefetcher;
  import umbp_pkg::*;
  localparam int N = 128;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  logic acc_valid = 0, acc_ready, acc_hit = 0;
  logic [IP_W-1:0] acc_ip = '0;
  logic [ADDR_W-1:0] acc_addr = '0;
  logic pf_valid, pf_ready = 0;
  logic [ADDR_W-1:0] pf_addr;
  logic dec_valid, dec_common, dec_low_miss, dec_table_hit, dec_evict, refill_active;
  pattern_e dec_pattern;
  degree_e dec_degree;

  umbp_prefetcher dut (.*);
  always #5 clk = ~clk;

  // ---------------- model of the instruction table ----------------
  bit              m_valid [N];
  longint unsigned m_ip [N], m_last [N];
  int              m_stride [N], m_stream [N], m_age [N];
  int unsigned     m_calls [N];

  typedef struct {
    pattern_e        pat;
    bit              thit, evict, common;
    longint unsigned line;
    int              stride;
  } exp_t;
  exp_t            pend [$];
  longint unsigned exp_pf [$];

  int n_stream, n_stride, n_ss, n_none, n_low, n_std, n_high, n_evict, n_alloc, n_refill;
  int n_stall, n_backpressure, n_common, n_uncommon, n_lowmiss, n_highmiss, n_pf;
  bit sampled;   // a refill has completed, reference set no longer empty
  bit refill_prev = 0;

  function automatic exp_t model_access(longint unsigned ip, longint unsigned line);
    exp_t e;
    int idx = -1, best_age = -1, rank;
    longint signed d;
    for (int i = 0; i < N; i++) if (m_valid[i] && m_ip[i] == ip) idx = i;
    e.thit = (idx >= 0); e.evict = 0; e.pat = PAT_NONE; e.line = line;
    if (idx < 0) begin
      for (int i = N - 1; i >= 0; i--) if (!m_valid[i]) idx = i;
      if (idx < 0) for (int i = 0; i < N; i++) if (m_age[i] > best_age) begin best_age = m_age[i]; idx = i; end
      e.evict = m_valid[idx];
      m_valid[idx] = 1; m_ip[idx] = ip; m_calls[idx] = 1; m_stride[idx] = 0; m_stream[idx] = 0;
    end else begin
      d = longint'(line) - longint'(m_last[idx]);
      m_calls[idx]++;
      if (d == 1) begin
        e.pat = (m_stride[idx] == 0) ? PAT_STREAM : PAT_STREAM_STRIDE;
        if (m_stream[idx] < 31) m_stream[idx]++;
      end else if (d != 0 && d >= -32 && d <= 31) begin
        if (m_stride[idx] != 0 && d == m_stride[idx]) e.pat = PAT_STRIDE;
        m_stride[idx] = int'(d); m_stream[idx] = 0;
      end else begin
        m_stride[idx] = 0; m_stream[idx] = 0;
      end
    end
    m_last[idx] = line;
    e.stride = m_stride[idx];
    for (int i = 0; i < N; i++) if (i != idx && m_valid[i] && m_age[i] < 63) m_age[i]++;
    m_age[idx] = 0;
    rank = 0;
    for (int j = 0; j < N; j++)
      if (m_valid[j] && (m_calls[j] > m_calls[idx] || (m_calls[j] == m_calls[idx] && j < idx))) rank++;
    e.common = (rank < 50);
    return e;
  endfunction

  // ---------------- driver ----------------
  task automatic send(input longint unsigned ip, input longint unsigned line, input bit hit);
    exp_t e;
    // sometimes raise the request while the prefetcher is still busy
    if ($urandom_range(0, 3) != 0) wait (acc_ready);
    @(negedge clk);
    acc_valid = 1; acc_ip = ip; acc_addr = {line[LINE_W-1:0], 6'($urandom_range(0, 63))}; acc_hit = hit;
    e = model_access(ip, line & ((64'd1 << LINE_W) - 1));
    pend.push_back(e);
    @(posedge clk);
    while (!acc_ready) begin n_stall++; @(posedge clk); end
    #1 acc_valid = 0;
  endtask

  // ---------------- monitors ----------------
  always @(posedge clk) if (rst_n) begin
    pf_ready <= ($urandom_range(0, 3) != 0);
    if (refill_prev && !refill_active) begin n_refill++; sampled = 1; end
    refill_prev <= refill_active;
    if (dec_valid) begin
      exp_t e;
      degree_e want_deg;
      int n;
      checks++;
      if (pend.size() == 0) begin failures++; $display("FAIL decision without access"); end
      else begin
        e = pend.pop_front();
        if (dec_pattern != e.pat || dec_table_hit != e.thit || dec_evict != e.evict || dec_common != e.common) begin
          failures++;
          $display("FAIL decision pat=%s hit=%0b ev=%0b common=%0b want %s %0b %0b %0b", dec_pattern.name(),
                   dec_table_hit, dec_evict, dec_common, e.pat.name(), e.thit, e.evict, e.common);
        end
        want_deg = dec_common ? (dec_low_miss ? DEG_CLASS_STANDARD : DEG_CLASS_HIGH)
                              : (dec_low_miss ? DEG_CLASS_LOW : DEG_CLASS_STANDARD);
        checks++;
        if (dec_degree != want_deg) begin failures++; $display("FAIL degree %s", dec_degree.name()); end
        if (!sampled) begin
          checks++;
          if (!dec_low_miss) begin failures++; $display("FAIL empty reference set must give low miss"); end
        end
        n = (want_deg == DEG_CLASS_LOW) ? 1 : ((want_deg == DEG_CLASS_HIGH) ? 8 : 4);
        if (e.pat != PAT_NONE)
          for (int k = 1; k <= n; k++)
            case (e.pat)
              PAT_STREAM: exp_pf.push_back(e.line + k);
              PAT_STRIDE: exp_pf.push_back(e.line + longint'(e.stride) * k);
              default:    exp_pf.push_back(e.line + 1 + longint'(e.stride) * (k - 1));
            endcase
        case (dec_pattern)
          PAT_STREAM: n_stream++;
          PAT_STRIDE: n_stride++;
          PAT_STREAM_STRIDE: n_ss++;
          default: n_none++;
        endcase
        if (e.pat != PAT_NONE) case (dec_degree)
          DEG_CLASS_LOW: n_low++;
          DEG_CLASS_HIGH: n_high++;
          default: n_std++;
        endcase
        if (dec_evict) n_evict++;
        if (!dec_table_hit) n_alloc++;
        if (dec_common) n_common++; else n_uncommon++;
        if (dec_low_miss) n_lowmiss++; else n_highmiss++;
      end
    end
    // prefetches are checked after the decision of the same cycle was taken in
    if (pf_valid && !pf_ready) n_backpressure++;
    if (pf_valid && pf_ready) begin
      n_pf++;
      checks++;
      if (exp_pf.size() == 0) begin failures++; $display("FAIL unexpected prefetch %0h", pf_addr); end
      else begin
        longint unsigned x;
        x = exp_pf.pop_front();
        if (pf_addr != {x[LINE_W-1:0], 6'b0}) begin failures++; $display("FAIL prefetch %0h want %0h", pf_addr, {x[LINE_W-1:0], 6'b0}); end
      end
    end
  end

  task automatic finish_test();
    $display("mechanisms: stream=%0d stride=%0d stream+stride=%0d none=%0d", n_stream, n_stride, n_ss, n_none);
    $display("degrees: low=%0d standard=%0d high=%0d  common=%0d uncommon=%0d lowmiss=%0d highmiss=%0d",
             n_low, n_std, n_high, n_common, n_uncommon, n_lowmiss, n_highmiss);
    $display("allocations=%0d evictions=%0d refills=%0d stall_cycles=%0d backpressure_cycles=%0d prefetches=%0d",
             n_alloc, n_evict, n_refill, n_stall, n_backpressure, n_pf);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    finish_test();
  end

  // ---------------- stimulus ----------------
  longint unsigned hot_line [40], cold_line [80];
  int              hot_pos [40];

  function automatic longint unsigned hot_next(int h);
    // 0..13 stream, 14..26 stride 3..5, 27..39 runs of 3 lines then a jump of 5
    longint unsigned l;
    l = hot_line[h];
    if (h < 14) l = l + 1;
    else if (h < 27) l = l + 3 + (h % 3);
    else l = (hot_pos[h] % 3 == 2) ? l + 5 : l + 1;
    hot_pos[h]++;
    return l;
  endfunction

  initial begin
    int t0, t1;
    for (int i = 0; i < N; i++) begin m_valid[i] = 0; m_age[i] = 0; m_calls[i] = 0; end
    for (int h = 0; h < 40; h++) begin hot_line[h] = 64'h10_0000 * (h + 1); hot_pos[h] = 0; end
    for (int c = 0; c < 80; c++) cold_line[c] = 64'h800_0000 + 64'h1000 * c;
    repeat (3) @(posedge clk); rst_n = 1;
    // phase 1: hot instructions every round, cold ones every tenth round
    t0 = $time;
    for (int r = 0; r < 40; r++) begin
      for (int h = 0; h < 40; h++) begin
        hot_line[h] = hot_next(h);
        send(64'h40_0000 + 4 * h, hot_line[h], $urandom_range(0, 9) >= (h % 10));
      end
      if (r % 10 == 0)
        for (int c = 0; c < 80; c++) begin
          cold_line[c] = cold_line[c] + 1;
          send(64'h50_0000 + 4 * c, cold_line[c], (c % 8) != 0);
        end
    end
    t1 = $time;
    $display("phase 1: %0d accesses, %0d cycles per access on average", 40 * 40 + 4 * 80, (t1 - t0) / 10 / (40 * 40 + 4 * 80));
    // phase 2: a flood of new instructions forces replacement
    for (int k = 0; k < 300; k++) begin
      send(64'h90_0000 + 4 * k, 64'h2000_0000 + 64'h100 * k, $urandom_range(0, 1));
      send(64'h90_0000 + 4 * k, 64'h2000_0000 + 64'h100 * k + 1, $urandom_range(0, 1));
      if (k % 3 == 0) begin
        int h = k % 40;
        hot_line[h] = hot_next(h);
        send(64'h40_0000 + 4 * h, hot_line[h], $urandom_range(0, 1));
      end
    end
    wait (acc_ready && pend.size() == 0 && exp_pf.size() == 0);
    repeat (10) @(posedge clk);
    checks++; if (exp_pf.size() != 0 || pend.size() != 0) begin failures++; $display("FAIL leftovers"); end
    checks++;
    if (n_stream == 0 || n_stride == 0 || n_ss == 0 || n_low == 0 || n_std == 0 || n_high == 0 ||
        n_evict == 0 || n_refill == 0 || n_stall == 0 || n_backpressure == 0 || n_common == 0 ||
        n_uncommon == 0 || n_lowmiss == 0 || n_highmiss == 0) begin
      failures++; $display("FAIL a mechanism never occurred");
    end
    finish_test();
  end
endmodule
