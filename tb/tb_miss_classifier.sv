// tb_miss_classifier: random sample sets (full, partly valid, empty) and
// query counters; the expected verdict is computed with real-valued miss
// rates and compared with low_miss, and the start-to-done latency is checked
// to be SAMPLES + 1 cycles.
module tb_miss_classifier;
  import umbp_pkg::*;
  localparam int S = 70;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic start = 0;
  logic [CNT_W-1:0] q_misses, q_calls, rd_misses, rd_calls;
  logic [6:0] rd_idx;
  logic rd_valid, busy, done, low_miss;

  miss_classifier dut (.*);
  always #5 clk = ~clk;

  bit          s_valid [S];
  int unsigned s_m [S], s_c [S];
  always_comb begin
    rd_valid  = (rd_idx < S) ? s_valid[rd_idx] : 1'b0;
    rd_misses = (rd_idx < S) ? s_m[rd_idx] : '0;
    rd_calls  = (rd_idx < S) ? s_c[rd_idx] : '0;
  end

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n_low = 0, n_high = 0;
    q_misses = 0; q_calls = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      int nv, nw, lat;
      real qr;
      bit exp_low;
      for (int i = 0; i < S; i++) begin
        s_valid[i] = (t % 50 == 7) ? 0 : ((t % 3 == 0) ? ($urandom_range(0, 2) != 0) : 1);
        s_c[i] = (t % 4 == 0) ? $urandom_range(1, 20) : $urandom_range(1, 32'h7fff_ffff);
        s_m[i] = $urandom_range(0, s_c[i]);
      end
      q_calls  = (t % 4 == 0) ? $urandom_range(1, 20) : $urandom_range(1, 32'h7fff_ffff);
      q_misses = $urandom_range(0, q_calls);
      // every fifth set: many entries with exactly the query's miss rate (ties are not worse)
      if (t % 5 == 1) begin
        q_calls = $urandom_range(1, 1000); q_misses = $urandom_range(0, q_calls);
        for (int i = 0; i < S; i++) if (i % 2 == 0) begin
          s_c[i] = q_calls * (1 + i % 3); s_m[i] = q_misses * (1 + i % 3);
        end
      end
      qr = real'(q_misses) / real'(q_calls);
      nv = 0; nw = 0;
      for (int i = 0; i < S; i++) if (s_valid[i]) begin
        nv++;
        if (real'(s_m[i]) * real'(q_calls) > real'(q_misses) * real'(s_c[i])) nw++;
      end
      exp_low = (nv == 0) || (nw * 100 >= 30 * nv);
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      lat = 1;
      while (!done) begin @(negedge clk); lat++; end
      checks++;
      if (low_miss != exp_low) begin
        failures++; $display("FAIL t=%0d low=%0b want %0b (%0d of %0d worse)", t, low_miss, exp_low, nw, nv);
      end
      checks++;
      // lat counts falling edges from the start edge; done rises S + 1 clock edges after it
      if (lat - 1 != S + 1) begin failures++; $display("FAIL latency %0d", lat - 1); end
      if (exp_low) n_low++; else n_high++;
    end
    checks++;
    if (n_low == 0 || n_high == 0) begin failures++; $display("FAIL coverage low=%0d high=%0d", n_low, n_high); end
    $display("verdicts: low=%0d high=%0d", n_low, n_high);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
