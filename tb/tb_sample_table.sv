// tb_sample_table: runs refill scans over modelled instruction tables (full,
// sparse, fewer than 20 uncommon entries) and checks that slots 0..49 hold
// the common entries in scan order, that the 20 random slots hold distinct
// uncommon entries (all of them when there are at most 20), that the scan
// takes 128 cycles, and that repeated refills draw different random sets.
module tb_sample_table;
  import umbp_pkg::*;
  localparam int N = 128, NC = 50, NR = 20, S = 70;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic refill_start = 0, busy, done;
  logic [6:0] scan_idx, rd_idx;
  logic scan_valid, scan_common, rd_valid;
  logic [CNT_W-1:0] scan_misses, scan_calls, rd_misses, rd_calls;

  sample_table dut (.*);
  always #5 clk = ~clk;

  bit          t_valid [N], t_common [N];
  int unsigned t_calls [N];
  always_comb begin
    scan_valid  = t_valid[scan_idx];
    scan_calls  = t_calls[scan_idx];
    scan_misses = t_calls[scan_idx] ^ 32'h5A5A;   // tag to tie misses to calls
    scan_common = t_common[scan_idx];
  end

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic refill_and_check(output int unsigned sig);
    int cyc, k, n_unc, n_com;
    int unsigned seen [$];
    @(negedge clk); refill_start = 1; @(negedge clk); refill_start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != N + 1) begin failures++; $display("FAIL refill took %0d", cyc); end
    // common slots in scan order
    k = 0; n_unc = 0; n_com = 0;
    for (int i = 0; i < N; i++) if (t_valid[i]) begin
      if (t_common[i]) begin
        if (k < NC) begin
          rd_idx = 7'(k); #1;
          checks++;
          if (!rd_valid || rd_calls != t_calls[i] || rd_misses != (t_calls[i] ^ 32'h5A5A)) begin
            failures++; $display("FAIL common slot %0d", k);
          end
          k++;
        end
        n_com++;
      end else n_unc++;
    end
    for (int j = k; j < NC; j++) begin
      rd_idx = 7'(j); #1; checks++;
      if (rd_valid) begin failures++; $display("FAIL slot %0d should be empty", j); end
    end
    // random slots: distinct uncommon entries
    sig = 0;
    for (int j = NC; j < S; j++) begin
      bit ok;
      rd_idx = 7'(j); #1;
      checks++;
      if (j - NC < n_unc) begin
        ok = rd_valid && rd_misses == (rd_calls ^ 32'h5A5A);
        if (ok) begin
          ok = 0;
          for (int i = 0; i < N; i++) if (t_valid[i] && !t_common[i] && t_calls[i] == rd_calls) ok = 1;
          foreach (seen[q]) if (seen[q] == rd_calls) ok = 0;
          seen.push_back(rd_calls);
          sig = sig * 31 + rd_calls;
        end
        if (!ok) begin failures++; $display("FAIL random slot %0d calls=%0d", j, rd_calls); end
      end else if (rd_valid) begin failures++; $display("FAIL random slot %0d should be empty", j); end
    end
  endtask

  // build a table: unique call counts, top 50 valid ones common
  task automatic make_table(input int p_valid);
    int order [$];
    for (int i = 0; i < N; i++) begin
      t_valid[i] = ($urandom_range(0, 99) < p_valid);
      t_calls[i] = 1000 * i + $urandom_range(0, 999);
      t_common[i] = 0;
    end
    for (int i = 0; i < N; i++) if (t_valid[i]) order.push_back(i);
    order.shuffle();
    for (int k = 0; k < order.size() && k < NC; k++) t_common[order[k]] = 1;
  endtask

  initial begin
    int unsigned s1, s2;
    int differ;
    rd_idx = 0;
    make_table(100);
    repeat (2) @(posedge clk); rst_n = 1;
    rd_idx = 7'd0; #1; checks++;
    if (rd_valid) begin failures++; $display("FAIL not empty after reset"); end
    differ = 0;
    for (int r = 0; r < 6; r++) begin
      refill_and_check(s1);
      repeat ($urandom_range(1, 40)) @(negedge clk);
      refill_and_check(s2);
      if (s1 != s2) differ++;
      make_table((r % 3 == 0) ? 100 : ((r % 3 == 1) ? 60 : 55));
    end
    make_table(40);     // 51 valid or fewer: few uncommon entries
    refill_and_check(s1);
    checks++;
    if (differ == 0) begin failures++; $display("FAIL random slots never changed"); end
    $display("refills with a different random draw: %0d of 6", differ);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
