// tb_usage_ranker: random call counts (with many ties) and valid masks; the
// expected rank and common flag come from sorting the entries in the
// testbench.
module tb_usage_ranker;
  import umbp_pkg::*;
  localparam int N = 128;
  int checks = 0, failures = 0;
  logic [N-1:0][CNT_W-1:0] all_calls;
  logic [N-1:0]            all_valid;
  logic [6:0]              q_idx;
  logic [7:0]              rank;
  logic                    common;

  usage_ranker dut (.*);

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int order [$];
    int n_common;
    for (int t = 0; t < 40; t++) begin
      for (int i = 0; i < N; i++) begin
        all_calls[i] = (t % 2) ? $urandom_range(0, 20) : $urandom();
        all_valid[i] = (t < 30) ? 1'b1 : ($urandom_range(0, 3) != 0);
      end
      // sorted order: most calls first, lower index first on ties, valid only
      order = {};
      for (int i = 0; i < N; i++) if (all_valid[i]) order.push_back(i);
      order.sort() with ((64'(~all_calls[item]) << 8) | 64'(item));
      n_common = 0;
      for (int q = 0; q < N; q++) begin
        int exp_rank;
        q_idx = 7'(q); #1;
        exp_rank = 0;
        foreach (order[k]) if (order[k] == q) exp_rank = k;
        if (!all_valid[q]) exp_rank = order.size();  // all valid ones rank above
        // an invalid entry counts every valid entry that beats its stale count
        if (all_valid[q]) begin
          checks++;
          if (int'(rank) != exp_rank || common != (exp_rank < 50)) begin
            failures++;
            $display("FAIL t=%0d q=%0d rank=%0d common=%0b want %0d", t, q, rank, common, exp_rank);
          end
          if (common) n_common++;
        end
      end
      checks++;
      if (n_common != ((order.size() < 50) ? order.size() : 50)) begin
        failures++; $display("FAIL t=%0d %0d common entries", t, n_common);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
