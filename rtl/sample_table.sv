// sample_table: the miss-metric reference set. Holds N_COMMON + N_RANDOM
// (50 + 20 = 70) snapshots of instruction-table counters, 64 bits each: a
// 32-bit miss count and a 32-bit call count. The miss classifier compares the
// current instruction's miss rate against these entries.
//
// Refill: a pulse on refill_start clears the table and starts a scan of the
// instruction table, one entry per cycle, scan_idx = 0 .. ENTRIES-1 (busy is
// high for those ENTRIES cycles; done pulses in the cycle after the last).
// For each valid scanned entry the caller returns its counters and its
// common flag in the same cycle. Common entries fill slots 0 .. N_COMMON-1 in
// scan order. Uncommon entries compete for the N_RANDOM remaining slots by
// reservoir sampling: the k-th uncommon entry (k from 0) takes slot k while
// k < N_RANDOM, and afterwards replaces slot (lfsr * (k+1)) >> 16 when that is
// below N_RANDOM, lfsr being a 16-bit maximal-length LFSR stepped every cycle.
// The paper asks for the 50 most common plus 20 random less common
// instructions; when and how they are drawn is this design's choice.
//
// Read port: rd_idx -> rd_valid/rd_misses/rd_calls, combinational.
module sample_table
  import umbp_pkg::*;
#(
  parameter int unsigned ENTRIES  = 128,
  parameter int unsigned N_COMMON = 50,
  parameter int unsigned N_RANDOM = 20,
  localparam int unsigned SAMPLES = N_COMMON + N_RANDOM,
  localparam int unsigned IDX_W   = $clog2(ENTRIES),
  localparam int unsigned SIDX_W  = $clog2(SAMPLES)
) (
  input  logic              clk,
  input  logic              rst_n,
  // refill control
  input  logic              refill_start,
  output logic              busy,
  output logic              done,
  // scan of the instruction table
  output logic [IDX_W-1:0]  scan_idx,
  input  logic              scan_valid,
  input  logic [CNT_W-1:0]  scan_misses,
  input  logic [CNT_W-1:0]  scan_calls,
  input  logic              scan_common,
  // read port for the miss classifier
  input  logic [SIDX_W-1:0] rd_idx,
  output logic              rd_valid,
  output logic [CNT_W-1:0]  rd_misses,
  output logic [CNT_W-1:0]  rd_calls
);

  typedef struct packed {
    logic             valid;
    logic [CNT_W-1:0] misses;
    logic [CNT_W-1:0] calls;
  } sample_t;

  sample_t           smp [SAMPLES];
  logic [15:0]       lfsr;
  logic [IDX_W:0]    n_common;   // common entries stored so far
  logic [IDX_W:0]    n_unc;      // uncommon entries seen so far

  // slot chosen for the scanned entry
  logic              wr;
  logic [SIDX_W-1:0] wr_slot;
  logic [16+IDX_W:0] prod;
  logic [IDX_W:0]    r_slot;     // (lfsr * (k+1)) >> 16, uniform in 0..k

  always_comb begin
    wr      = 1'b0;
    wr_slot = '0;
    prod    = (17+IDX_W)'(lfsr) * (17+IDX_W)'(n_unc + 1'b1);
    r_slot  = prod[16+IDX_W:16];
    if (busy && scan_valid) begin
      if (scan_common && n_common < (IDX_W+1)'(N_COMMON)) begin
        wr      = 1'b1;
        wr_slot = SIDX_W'(n_common);
      end else if (!scan_common) begin
        if (n_unc < (IDX_W+1)'(N_RANDOM)) begin
          wr      = 1'b1;
          wr_slot = SIDX_W'(N_COMMON) + SIDX_W'(n_unc);
        end else if (r_slot < (IDX_W+1)'(N_RANDOM)) begin
          wr      = 1'b1;
          wr_slot = SIDX_W'(N_COMMON) + SIDX_W'(r_slot);
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy     <= 1'b0;
      done     <= 1'b0;
      scan_idx <= '0;
      n_common <= '0;
      n_unc    <= '0;
      lfsr     <= 16'hACE1;
      for (int i = 0; i < SAMPLES; i++) smp[i].valid <= 1'b0;
    end else begin
      // x^16 + x^14 + x^13 + x^11 + 1, Galois form
      lfsr <= {1'b0, lfsr[15:1]} ^ (lfsr[0] ? 16'hB400 : 16'h0000);
      done <= 1'b0;
      if (!busy) begin
        if (refill_start) begin
          busy     <= 1'b1;
          scan_idx <= '0;
          n_common <= '0;
          n_unc    <= '0;
          for (int i = 0; i < SAMPLES; i++) smp[i].valid <= 1'b0;
        end
      end else begin
        if (wr) smp[wr_slot] <= '{valid: 1'b1, misses: scan_misses, calls: scan_calls};
        if (scan_valid && scan_common && n_common < (IDX_W+1)'(N_COMMON)) n_common <= n_common + 1'b1;
        if (scan_valid && !scan_common) n_unc <= n_unc + 1'b1;
        if (scan_idx == IDX_W'(ENTRIES - 1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end else begin
          scan_idx <= scan_idx + 1'b1;
        end
      end
    end
  end

  always_comb begin
    rd_valid  = smp[rd_idx].valid;
    rd_misses = smp[rd_idx].misses;
    rd_calls  = smp[rd_idx].calls;
  end

endmodule
