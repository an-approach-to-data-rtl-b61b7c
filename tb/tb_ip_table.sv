// tb_ip_table: fills the 128-entry table, then performs random rewrites at
// the victim or at random entries, and checks CAM lookups, both read ports,
// the call-count view and the victim choice against a model of the
// saturating-age replacement rule.
module tb_ip_table;
  import umbp_pkg::*;
  localparam int N = 128;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic [IP_W-1:0] lookup_ip;
  logic lookup_hit;
  logic [6:0] lookup_idx, victim_idx, rd_idx, scan_idx, wr_idx;
  ip_entry_t rd_entry, scan_entry, wr_entry;
  logic wr_en = 0;
  logic [N-1:0][CNT_W-1:0] all_calls;
  logic [N-1:0] all_valid;

  ip_table dut (.*);
  always #5 clk = ~clk;

  // model
  bit              m_valid [N];
  longint unsigned m_ip [N];
  int unsigned     m_calls [N];
  int              m_age [N];

  function automatic int model_victim();
    int best = 0, best_age = -1;
    for (int i = 0; i < N; i++) if (!m_valid[i]) return i;
    for (int i = 0; i < N; i++) if (m_age[i] > best_age) begin best_age = m_age[i]; best = i; end
    return best;
  endfunction

  task automatic write(input int idx, input longint unsigned ip, input int unsigned calls);
    @(negedge clk);
    wr_entry = '0;
    wr_entry.valid = 1; wr_entry.ip = ip; wr_entry.calls = calls; wr_entry.misses = calls / 2;
    wr_entry.last_line = LINE_W'(ip * 3); wr_entry.stride = 6'sd5; wr_entry.stream_cnt = 5'd7;
    wr_entry.age = 6'd33;                       // must be ignored: a write makes it youngest
    wr_idx = 7'(idx); wr_en = 1;
    @(posedge clk); #1 wr_en = 0;
    for (int i = 0; i < N; i++) if (i != idx && m_valid[i] && m_age[i] < 63) m_age[i]++;
    m_valid[idx] = 1; m_ip[idx] = ip; m_calls[idx] = calls; m_age[idx] = 0;
  endtask

  task automatic check_all();
    int v;
    v = model_victim();
    checks++;
    if (int'(victim_idx) != v) begin failures++; $display("FAIL victim %0d want %0d", victim_idx, v); end
    for (int i = 0; i < N; i++) begin
      rd_idx = 7'(i); scan_idx = 7'(N - 1 - i); lookup_ip = m_ip[i]; #1;
      checks++;
      if (all_valid[i] != m_valid[i]) begin failures++; $display("FAIL valid %0d", i); end
      else if (m_valid[i]) begin
        if (!lookup_hit || int'(lookup_idx) != i || rd_entry.ip != m_ip[i] ||
            rd_entry.calls != m_calls[i] || all_calls[i] != m_calls[i] ||
            int'(rd_entry.age) != m_age[i] || rd_entry.stride != 6'sd5 ||
            scan_entry.valid != m_valid[N-1-i] || (m_valid[N-1-i] && scan_entry.ip != m_ip[N-1-i])) begin
          failures++;
          $display("FAIL entry %0d hit=%0b idx=%0d ip=%0h age=%0d (want age %0d)", i,
                   lookup_hit, lookup_idx, rd_entry.ip, rd_entry.age, m_age[i]);
        end
      end
    end
    lookup_ip = 64'hDEAD_0000_0000_0000; #1;
    checks++;
    if (lookup_hit) begin failures++; $display("FAIL false hit"); end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < N; i++) begin m_valid[i] = 0; m_ip[i] = 0; m_age[i] = 0; m_calls[i] = 0; end
    rd_idx = 0; scan_idx = 0; wr_idx = 0; lookup_ip = 0; wr_entry = '0;
    repeat (2) @(posedge clk); rst_n = 1; #1;
    check_all();
    // fill: each write must go to the first free entry
    for (int i = 0; i < N; i++) begin
      lookup_ip = 64'h1000 + i; #1;
      checks++;
      if (lookup_hit || int'(victim_idx) != i) begin failures++; $display("FAIL fill %0d victim %0d", i, victim_idx); end
      write(int'(victim_idx), 64'h1000 + i, $urandom_range(1, 1000));
    end
    check_all();
    // replacements and updates
    for (int t = 0; t < 300; t++) begin
      if ($urandom_range(0, 1)) write(model_victim(), 64'h9000_0000 + t, 1);
      else write($urandom_range(0, N - 1), 64'h5000_0000 + t, $urandom_range(1, 1000));
      if (t % 25 == 0) check_all();
    end
    check_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
