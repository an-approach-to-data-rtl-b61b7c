// usage_ranker: the usage metric. Decides whether the instruction in entry
// q_idx is "common", i.e. among the NUM_COMMON (50) most referenced valid
// entries of the instruction table, the remaining ones (78 in a full
// 128-entry table) being "uncommon".
//
// The paper sorts the table by reference count; this design computes only
// the rank of the entry asked about, which gives the same split: one
// comparator per entry counts the valid entries that rank above it (more
// calls, or equal calls and a lower index), and the entry is common when that
// count is below NUM_COMMON. The index tie-break is this design's choice; it
// makes exactly NUM_COMMON entries common in a full table. Combinational.
module usage_ranker
  import umbp_pkg::*;
#(
  parameter int unsigned ENTRIES    = 128,
  parameter int unsigned NUM_COMMON = 50,
  localparam int unsigned IDX_W     = $clog2(ENTRIES)
) (
  input  logic [ENTRIES-1:0][CNT_W-1:0] all_calls,
  input  logic [ENTRIES-1:0]            all_valid,
  input  logic [IDX_W-1:0]              q_idx,
  output logic [IDX_W:0]                rank,
  output logic                          common
);

  logic [CNT_W-1:0] q_calls;

  always_comb begin
    q_calls = all_calls[q_idx];
    rank    = '0;
    for (int j = 0; j < ENTRIES; j++) begin
      if (all_valid[j] &&
          (all_calls[j] > q_calls || (all_calls[j] == q_calls && IDX_W'(j) < q_idx)))
        rank = rank + 1'b1;
    end
    common = (rank < (IDX_W+1)'(NUM_COMMON));
  end

endmodule
