// pattern_detector: classifies one access of an instruction as a stream, a
// stride, a stream followed by a stride, or none, and computes the
// instruction's new pattern state. Purely combinational.
//
// The paper's prefetcher chooses between these three patterns and stores a
// 6-bit stride and a 5-bit stream count per instruction; the rules below are
// this design's own, since the paper does not spell them out. With the line
// delta d = new_line - last_line:
//   d == +1                      stream step: stream count +1 (saturating),
//                                stride kept;
//   d != 0 and fits 6 bits signed the stride becomes d, stream count cleared;
//   otherwise (d == 0 or too big) stride and stream count cleared.
// Pattern: STRIDE when d equals the stored (old) stride, i.e. the same stride
// seen twice; STREAM when d == +1 and no stride is stored; STREAM_STRIDE when
// d == +1 and a stride is stored; otherwise NONE. For a first access of an
// instruction (entry_valid = 0) the pattern is NONE and the state cleared.
module pattern_detector
  import umbp_pkg::*;
(
  input  logic                       entry_valid,
  input  logic [LINE_W-1:0]          last_line,
  input  logic signed [STRIDE_W-1:0] stride_in,
  input  logic [STREAM_W-1:0]        stream_in,
  input  logic [LINE_W-1:0]          new_line,
  output pattern_e                   pattern,
  output logic signed [STRIDE_W-1:0] stride_out,
  output logic [STREAM_W-1:0]        stream_out
);

  localparam logic signed [LINE_W-1:0] SMAX = LINE_W'(2**(STRIDE_W-1) - 1);
  localparam logic signed [LINE_W-1:0] SMIN = -LINE_W'(2**(STRIDE_W-1));

  logic signed [LINE_W-1:0] delta;
  logic                     unit, fits;

  always_comb begin
    delta      = $signed(new_line - last_line);
    unit       = (delta == LINE_W'(1));
    fits       = (delta != '0) && (delta <= SMAX) && (delta >= SMIN);
    pattern    = PAT_NONE;
    stride_out = '0;
    stream_out = '0;
    if (entry_valid) begin
      if (unit) begin
        stride_out = stride_in;
        stream_out = (stream_in == {STREAM_W{1'b1}}) ? stream_in : stream_in + 1'b1;
        pattern    = (stride_in == '0) ? PAT_STREAM : PAT_STREAM_STRIDE;
      end else if (fits) begin
        stride_out = delta[STRIDE_W-1:0];
        stream_out = '0;
        if (stride_in != '0 && delta == LINE_W'(stride_in)) pattern = PAT_STRIDE;
      end
    end
  end

endmodule
