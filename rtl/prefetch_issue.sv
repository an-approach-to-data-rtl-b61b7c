// prefetch_issue: generates the prefetch addresses ("data to fetch") for one
// access once its pattern and degree are known.
//
// On a start pulse it latches the access's line address A, the pattern, the
// signed stride S (in lines) and the number of lines n (the degree), then
// presents one address per accepted transfer on a valid/ready port:
//   STREAM         A+1, A+2, ..., A+n
//   STRIDE         A+S, A+2S, ..., A+nS
//   STREAM_STRIDE  A+1, A+1+S, ..., A+1+(n-1)S   (one stream step, then strided)
// pf_addr is the line-aligned byte address. Pattern NONE (or n = 0) issues
// nothing. done pulses in the cycle after the last handshake, or in the cycle
// after start when nothing is issued. With pf_ready held high the n addresses
// take n consecutive cycles. The address sequences and the handshake are this
// design's choices; the paper names the three patterns and the degrees.
module prefetch_issue
  import umbp_pkg::*;
(
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       start,
  input  logic [LINE_W-1:0]          base_line,
  input  pattern_e                   pattern,
  input  logic signed [STRIDE_W-1:0] stride,
  input  logic [DEG_W-1:0]           lines,
  output logic                       pf_valid,
  input  logic                       pf_ready,
  output logic [ADDR_W-1:0]          pf_addr,
  output logic                       busy,
  output logic                       done
);

  logic [LINE_W-1:0] cur, step;
  logic [DEG_W-1:0]  left;
  logic [LINE_W-1:0] s_ext;

  assign s_ext    = LINE_W'(stride);            // sign-extended stride
  assign pf_valid = busy;
  assign pf_addr  = {cur, {LINE_OFF{1'b0}}};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      cur  <= '0;
      step <= '0;
      left <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          if (pattern == PAT_NONE || lines == '0) begin
            done <= 1'b1;
          end else begin
            busy <= 1'b1;
            left <= lines;
            cur  <= base_line + ((pattern == PAT_STRIDE) ? s_ext : LINE_W'(1));
            step <= (pattern == PAT_STREAM) ? LINE_W'(1) : s_ext;
          end
        end
      end else if (pf_ready) begin
        cur  <= cur + step;
        left <= left - 1'b1;
        if (left == DEG_W'(1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  // a presented prefetch must stay stable until it is taken
  property p_stable;
    @(posedge clk) disable iff (!rst_n) pf_valid && !pf_ready |=> pf_valid && $stable(pf_addr);
  endproperty
  assert property (p_stable);

endmodule
