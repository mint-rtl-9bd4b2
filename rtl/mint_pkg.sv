// mint_pkg -- constants and types shared by the MINT rowhammer tracker.
//
// The numbers follow the DDR5 configuration the design targets: at most 73
// activations (ACTs) fit in one refresh interval tREFI (MaxACT =
// (tREFI - tRFC) / tRC = (3900 - 410) / 48), a bank has 128K rows (17-bit row
// address), the Delayed Mitigation Queue holds 4 entries because DDR5 lets the
// controller postpone up to four REFs, and the random source is 7 bits wide.
// A rank has 32 banks, each with its own tracker.
//
// The EACT_* constants serve the optional Row-Press extension (ImPress),
// which weights each activation by how long its row stayed open:
// EACT = (tON + tPRE) / tRC with 7 fractional bits. Time is counted in ticks
// of tRC/32 (1.5 ns for tRC = 48 ns), so the division is a shift by 5; the
// precharge time of 16 ns is rounded up to 11 ticks.
//
// mit_req_t is one pending mitigation: a valid bit, a level (0 = refresh the
// aggressor's direct neighbours, 1 = transitive, refresh the victims of the
// victims) and the aggressor row. With LVL_BITS = 1 it is 19 bits, the size
// of one DMQ entry.
package mint_pkg;

  localparam int unsigned MAX_ACT   = 73;
  localparam int unsigned ROW_BITS  = 17;
  localparam int unsigned NUM_ROWS  = 1 << ROW_BITS;
  localparam int unsigned DMQ_DEPTH = 4;
  localparam int unsigned RNG_BITS  = 7;
  localparam int unsigned CNT_BITS  = 7;
  localparam int unsigned LVL_BITS  = 1;
  localparam int unsigned NUM_BANKS = 32;
  localparam int unsigned BLAST_RADIUS = 1;
  localparam int unsigned EACT_FRAC_BITS = 7;
  localparam int unsigned TRC_LOG2       = 5;
  localparam int unsigned TPRE_TICKS     = 11;

  typedef logic [ROW_BITS-1:0] row_t;
  typedef logic [LVL_BITS-1:0] lvl_t;

  typedef struct packed {
    logic valid;
    lvl_t lvl;
    row_t row;
  } mit_req_t;

endpackage
