// tb_pattern_detector: directed walks of the three access shapes (stream,
// stride, stream followed by stride) plus random deltas, checked against an
// independent model of the classification rules.
module tb_pattern_detector;
  import umbp_pkg::*;
  int checks = 0, failures = 0;
  logic                       entry_valid;
  logic [LINE_W-1:0]          last_line, new_line;
  logic signed [STRIDE_W-1:0] stride_in, stride_out;
  logic [STREAM_W-1:0]        stream_in, stream_out;
  pattern_e                   pattern;

  pattern_detector dut (.*);

  // reference state of one instruction
  longint unsigned m_last;
  int              m_stride, m_stream;
  bit              m_valid;

  task automatic step(input longint unsigned line);
    longint signed d;
    pattern_e exp_p;
    int exp_s, exp_c;
    entry_valid = m_valid; last_line = LINE_W'(m_last);
    stride_in = STRIDE_W'(m_stride); stream_in = STREAM_W'(m_stream);
    new_line = LINE_W'(line);
    #1;
    d = longint'(line) - longint'(m_last);
    exp_p = PAT_NONE; exp_s = 0; exp_c = 0;
    if (m_valid) begin
      if (d == 1) begin
        exp_s = m_stride; exp_c = (m_stream == 31) ? 31 : m_stream + 1;
        exp_p = (m_stride == 0) ? PAT_STREAM : PAT_STREAM_STRIDE;
      end else if (d != 0 && d >= -32 && d <= 31) begin
        exp_s = int'(d); exp_c = 0;
        if (m_stride != 0 && d == m_stride) exp_p = PAT_STRIDE;
      end
    end
    checks++;
    if (pattern != exp_p || int'(stride_out) != exp_s || int'(stream_out) != exp_c) begin
      failures++;
      $display("FAIL line=%0d d=%0d: got %s s=%0d c=%0d want %s s=%0d c=%0d", line, d,
               pattern.name(), stride_out, stream_out, exp_p.name(), exp_s, exp_c);
    end
    m_valid = 1; m_last = line; m_stride = exp_s; m_stream = exp_c;
  endtask

  int n_stream, n_stride, n_ss;
  always @(pattern) begin
    if (pattern == PAT_STREAM) n_stream++;
    if (pattern == PAT_STRIDE) n_stride++;
    if (pattern == PAT_STREAM_STRIDE) n_ss++;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint unsigned a;
    pattern_e p;
    // (A) stream: after the first access every step is a stream
    m_valid = 0; a = 1000;
    for (int i = 0; i < 40; i++) begin step(a); a++; end
    checks++; if (pattern != PAT_STREAM || stream_out != 5'd31) begin failures++; $display("FAIL stream saturation"); end
    // (B) stride 4: from the third access it is a stride
    m_valid = 0; a = 5000;
    for (int i = 0; i < 10; i++) begin
      step(a);
      if (i >= 2) begin checks++; if (pattern != PAT_STRIDE || stride_out != 6'sd4) begin failures++; $display("FAIL stride walk %0d", i); end end
      a += 4;
    end
    // negative stride
    m_valid = 0; a = 9000;
    for (int i = 0; i < 6; i++) begin step(a); a -= 7; end
    checks++; if (pattern != PAT_STRIDE || stride_out != -6'sd7) begin failures++; $display("FAIL negative stride"); end
    // (C) runs of three lines separated by jumps of 5
    m_valid = 0; a = 20000;
    for (int r = 0; r < 5; r++) begin
      for (int k = 0; k < 3; k++) begin step(a); a++; end
      a += 4;
    end
    // far jump resets the state
    step(a + 100000);
    checks++; if (pattern != PAT_NONE || stride_out != 0 || stream_out != 0) begin failures++; $display("FAIL far jump"); end
    // random deltas
    for (int i = 0; i < 2000; i++) begin
      int d;
      d = $urandom_range(0, 80) - 40;
      if ($urandom_range(0, 3) == 0) d = 1;
      step(m_last + longint'(d));
    end
    checks++;
    if (n_stream == 0 || n_stride == 0 || n_ss == 0) begin failures++; $display("FAIL pattern coverage %0d %0d %0d", n_stream, n_stride, n_ss); end
    $display("patterns seen: stream=%0d stride=%0d stream+stride=%0d", n_stream, n_stride, n_ss);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
