// tb_prefetch_issue: random bases, patterns, strides and degrees under
// random backpressure; every address is compared with the expected sequence,
// the number of addresses with the degree, and with pf_ready held high the
// issue time is checked to be one address per cycle.
module tb_prefetch_issue;
  import umbp_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic start = 0;
  logic [LINE_W-1:0] base_line;
  pattern_e pattern;
  logic signed [STRIDE_W-1:0] stride;
  logic [DEG_W-1:0] lines;
  logic pf_valid, pf_ready, busy, done;
  logic [ADDR_W-1:0] pf_addr;

  prefetch_issue dut (.*);
  always #5 clk = ~clk;

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    pf_ready = 0; base_line = 0; pattern = PAT_NONE; stride = 0; lines = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      longint unsigned a, exp_line;
      int s, n, got, cyc;
      bit full_speed;
      a = {$urandom(), $urandom()} & ((64'd1 << LINE_W) - 1);
      pattern = pattern_e'($urandom_range(0, 3));
      s = $urandom_range(0, 63) - 32;
      n = (t % 3 == 0) ? 1 : ((t % 3 == 1) ? 4 : 8);
      full_speed = (t % 2 == 0);
      @(negedge clk);
      base_line = LINE_W'(a); stride = STRIDE_W'(s); lines = DEG_W'(n); start = 1;
      @(negedge clk); start = 0;
      got = 0; cyc = 0;
      while (!done) begin
        pf_ready = full_speed ? 1'b1 : 1'($urandom_range(0, 1));
        #1;
        if (pf_valid && pf_ready) begin
          got++;
          case (pattern)
            PAT_STREAM:        exp_line = a + got;
            PAT_STRIDE:        exp_line = a + longint'(s) * got;
            default:           exp_line = a + 1 + longint'(s) * (got - 1);
          endcase
          exp_line &= (64'd1 << LINE_W) - 1;
          checks++;
          if (pf_addr != {exp_line[LINE_W-1:0], 6'b0}) begin
            failures++; $display("FAIL t=%0d k=%0d %s addr=%0h want %0h", t, got, pattern.name(), pf_addr, {exp_line[LINE_W-1:0], 6'b0});
          end
        end
        @(negedge clk); cyc++;
      end
      pf_ready = 0;
      checks++;
      if (got != ((pattern == PAT_NONE) ? 0 : n)) begin failures++; $display("FAIL t=%0d issued %0d", t, got); end
      if (full_speed && pattern != PAT_NONE) begin
        checks++;
        if (cyc != n) begin failures++; $display("FAIL t=%0d took %0d cycles for %0d", t, cyc, n); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
