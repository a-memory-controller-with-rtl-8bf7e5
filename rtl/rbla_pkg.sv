// rbla_pkg: types and constants shared by the row buffer locality-aware (RBLA)
// hybrid DRAM-PCM memory controller.
//
// Numbers that come from the published design: the stats store geometry
// (16 ways, 128 sets, 5-bit row buffer miss counters, 9.25 KB in total), the
// 10-million-cycle interval used both for the periodic counter reset and for
// the dynamic threshold adaptation, and the simplified device latencies of the
// paper's worked example (row hit 200 cycles in DRAM and PCM, row miss 400
// cycles in DRAM and 700 cycles in PCM).
//
// Everything else is a choice of this implementation: the 34-bit row address
// (chosen so that one stats store entry is valid + 27-bit tag + 4-bit LRU age
// + 5-bit counter = 37 bits, and 2048 entries x 37 bits = 9.25 KB exactly),
// 32 columns of 64-bit words per row, 8 DRAM banks, 16 PCM banks (two ranks of
// eight), a 1024-frame direct-mapped DRAM cache, and the write latencies.
package rbla_pkg;

  // ---------------- address geometry ----------------
  parameter int unsigned ROW_W   = 34;   // PCM row address bits
  parameter int unsigned COL_W   = 5;    // column (word within a row) bits
  parameter int unsigned DATA_W  = 64;   // one column word

  // ---------------- stats store ----------------
  parameter int unsigned SS_WAYS  = 16;
  parameter int unsigned SS_SETS  = 128;
  parameter int unsigned SS_CNT_W = 5;

  // ---------------- intervals ----------------
  parameter int unsigned INTERVAL_CYCLES = 10_000_000;

  // ---------------- device timing (cycles) ----------------
  parameter int unsigned DRAM_T_HIT  = 200;
  parameter int unsigned DRAM_T_MISS = 400;
  parameter int unsigned PCM_T_HIT   = 200;
  parameter int unsigned PCM_T_MISS  = 700;
  // Write latencies of a row buffer miss. Only read figures are printed in
  // the paper; writes default to the same numbers.
  parameter int unsigned DRAM_T_WR_MISS = 400;
  parameter int unsigned PCM_T_WR_MISS  = 700;

  // Cycles to move one row PCM -> DRAM: read the row from PCM (one miss and
  // then row hits), then write it to DRAM (one miss and then row hits).
  parameter int unsigned T_MIGRATION =
      PCM_T_MISS  + ((1 << COL_W) - 1) * PCM_T_HIT +
      DRAM_T_MISS + ((1 << COL_W) - 1) * DRAM_T_HIT;

  // ---------------- RBLA-Dyn ----------------
  parameter int unsigned MISS_THRESH_INIT = 2;

  // Where a demand request was served.
  typedef enum logic [0:0] {SRC_PCM = 1'b0, SRC_DRAM = 1'b1} mem_src_e;

endpackage
