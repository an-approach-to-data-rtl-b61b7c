// ip_table: the prefetcher's instruction table.
//
// Holds ENTRIES (128) fully associative entries, one per recently seen load
// instruction, each with the instruction pointer, the last line address the
// instruction touched, its stride and stream count, and 32-bit miss and call
// counters (the entry layout is the paper's; see umbp_pkg::ip_entry_t).
//
// Lookup is a combinational CAM search on lookup_ip: lookup_hit/lookup_idx
// report a match in the same cycle. victim_idx names the entry to replace on
// a miss: the first invalid entry, otherwise the entry with the largest age
// (lowest index on ties). The 6-bit per-entry "LRU value" is kept as a
// saturating age, because six bits cannot rank 128 entries exactly: a write
// sets the written entry's age to 0 and ages every other valid entry by one.
// This replacement rule is this design's choice.
//
// Two combinational read ports (rd_*, scan_*) and one synchronous write port.
// all_calls/all_valid expose every call count for the usage ranking.
// Reset clears the valid bits only.
module ip_table
  import umbp_pkg::*;
#(
  parameter int unsigned ENTRIES = 128,
  localparam int unsigned IDX_W  = $clog2(ENTRIES)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // CAM lookup
  input  logic [IP_W-1:0]        lookup_ip,
  output logic                   lookup_hit,
  output logic [IDX_W-1:0]       lookup_idx,
  output logic [IDX_W-1:0]       victim_idx,
  // read port A
  input  logic [IDX_W-1:0]       rd_idx,
  output ip_entry_t              rd_entry,
  // read port B (sample-table refill scan)
  input  logic [IDX_W-1:0]       scan_idx,
  output ip_entry_t              scan_entry,
  // write port
  input  logic                   wr_en,
  input  logic [IDX_W-1:0]       wr_idx,
  input  ip_entry_t              wr_entry,
  // whole-table view for ranking
  output logic [ENTRIES-1:0][CNT_W-1:0] all_calls,
  output logic [ENTRIES-1:0]     all_valid
);

  ip_entry_t mem [ENTRIES];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < ENTRIES; i++) mem[i].valid <= 1'b0;
    end else if (wr_en) begin
      for (int i = 0; i < ENTRIES; i++) begin
        if (IDX_W'(i) == wr_idx) begin
          mem[i]     <= wr_entry;
          mem[i].age <= '0;
        end else if (mem[i].valid && mem[i].age != {LRU_W{1'b1}}) begin
          mem[i].age <= mem[i].age + 1'b1;
        end
      end
    end
  end

  // CAM search and victim choice
  always_comb begin
    logic [LRU_W-1:0] best_age;
    logic             found_free;
    lookup_hit = 1'b0;
    lookup_idx = '0;
    victim_idx = '0;
    best_age   = '0;
    found_free = 1'b0;
    for (int i = 0; i < ENTRIES; i++) begin
      if (mem[i].valid && mem[i].ip == lookup_ip && !lookup_hit) begin
        lookup_hit = 1'b1;
        lookup_idx = IDX_W'(i);
      end
    end
    for (int i = 0; i < ENTRIES; i++) begin
      if (!found_free) begin
        if (!mem[i].valid) begin
          found_free = 1'b1;
          victim_idx = IDX_W'(i);
        end else if (i == 0 || mem[i].age > best_age) begin
          best_age   = mem[i].age;
          victim_idx = IDX_W'(i);
        end
      end
    end
  end

  always_comb begin
    rd_entry   = mem[rd_idx];
    scan_entry = mem[scan_idx];
    for (int i = 0; i < ENTRIES; i++) begin
      all_calls[i] = mem[i].calls;
      all_valid[i] = mem[i].valid;
    end
  end

endmodule
