// umbp_pkg: types and constants shared by the usage-and-miss-based prefetcher.
//
// The field widths are those of the instruction-table entry: a 64-bit
// instruction pointer, a 58-bit line address (64-byte lines), a 6-bit signed
// stride in lines, a 5-bit stream count, 32-bit miss and call counters and a
// 6-bit age used for replacement. The valid bit is this design's addition.
package umbp_pkg;

  localparam int unsigned IP_W     = 64;
  localparam int unsigned ADDR_W   = 64;
  localparam int unsigned LINE_OFF = 6;                  // 64-byte lines
  localparam int unsigned LINE_W   = ADDR_W - LINE_OFF;  // 58
  localparam int unsigned STRIDE_W = 6;
  localparam int unsigned STREAM_W = 5;
  localparam int unsigned CNT_W    = 32;
  localparam int unsigned LRU_W    = 6;
  localparam int unsigned DEG_W    = 4;                  // holds 1..8 lines

  // Access pattern detected for one instruction.
  typedef enum logic [1:0] {
    PAT_NONE          = 2'd0,
    PAT_STREAM        = 2'd1,
    PAT_STRIDE        = 2'd2,
    PAT_STREAM_STRIDE = 2'd3
  } pattern_e;

  // Prefetch degree class (Table 1 of the usage/miss matrix).
  typedef enum logic [1:0] {
    DEG_CLASS_LOW      = 2'd0,
    DEG_CLASS_STANDARD = 2'd1,
    DEG_CLASS_HIGH     = 2'd2
  } degree_e;

  // One instruction-table entry (203 bits of state plus a valid bit).
  typedef struct packed {
    logic                       valid;
    logic [IP_W-1:0]            ip;
    logic [LINE_W-1:0]          last_line;
    logic signed [STRIDE_W-1:0] stride;
    logic [STREAM_W-1:0]        stream_cnt;
    logic [CNT_W-1:0]           misses;
    logic [CNT_W-1:0]           calls;
    logic [LRU_W-1:0]           age;
  } ip_entry_t;

endpackage
