// happy_pkg: types and constants shared by the HAPPY page-closure policy unit.
//
// The default DRAM organisation is one channel, one rank, eight banks, 65,536
// rows per bank and 128 cache lines of 64 bytes per row, which gives a 32-bit
// (4 GB) physical address. HAPPY monitors every physical address bit that
// selects channel, rank, bank or row: 3 + 16 = 19 bits here, each with two
// encoding positions (bit = 0 and bit = 1).
package happy_pkg;

  // ---- DRAM organisation (defaults of the whole design) ----
  localparam int unsigned CH_BITS     = 0;   // 1 channel
  localparam int unsigned RA_BITS     = 0;   // 1 rank
  localparam int unsigned BANK_BITS   = 3;   // 8 banks
  localparam int unsigned ROW_BITS    = 16;  // 65,536 rows per bank
  localparam int unsigned COL_BITS    = 7;   // 128 cache lines per row
  localparam int unsigned OFFSET_BITS = 6;   // 64-byte cache line
  localparam int unsigned PADDR_W     = CH_BITS + RA_BITS + BANK_BITS + ROW_BITS
                                      + COL_BITS + OFFSET_BITS;           // 32
  localparam int unsigned MON_BITS    = CH_BITS + RA_BITS + BANK_BITS + ROW_BITS; // 19

  // ---- Intel-adaptive-HAPPY monitoring unit ----
  localparam int unsigned MC_W = 4;          // mistake counter width
  localparam int unsigned TR_W = 4;          // per-position timeout register width

  // Width of a timeout that is the sum of N registers of width w.
  function automatic int unsigned sum_width(int unsigned n, int unsigned w);
    return w + $clog2(n + 1);
  endfunction

  // Address interleaving schemes.
  typedef enum logic [1:0] {
    MAP_ROW_LOCALITY = 2'd0,  // Row | RA | Bank | CH | Column | Offset
    MAP_PERMUTATION  = 2'd1,  // Row | CH | RA | Bank^row | Column | Offset
    MAP_MINIMALIST   = 2'd2   // Row | CH | Column_hi | RA | Bank^row | Col_lo | Offset
  } map_e;

  // Hybrid-HAPPY decision function.
  typedef enum logic {
    DEC_MAJORITY    = 1'b0,
    DEC_AGGREGATION = 1'b1
  } decision_e;

  // Page-closure policy run by the top.
  typedef enum logic {
    POL_INTEL_HAPPY  = 1'b0,
    POL_HYBRID_HAPPY = 1'b1
  } policy_e;

  // Row-buffer outcome of an access.
  typedef enum logic [1:0] {
    PAGE_EMPTY    = 2'd0,
    PAGE_HIT      = 2'd1,
    PAGE_CONFLICT = 2'd2
  } page_class_e;

  localparam int unsigned NUM_BANKS = 1 << BANK_BITS;
  localparam int unsigned TO_W      = sum_width(MON_BITS, TR_W);  // summed timeout, 9 bits

  // What the policy unit reports for each access, one cycle after it.
  typedef struct packed {
    logic                   valid;
    logic [BANK_BITS-1:0]   bank;
    logic [ROW_BITS-1:0]    row;
    logic [COL_BITS-1:0]    col;
    page_class_e            cls;          // row-buffer outcome of the access
    logic                   need_pre;     // conflict: precharge before activate
    logic                   need_act;     // conflict or empty: activate the row
    logic                   auto_pre;     // close the row right after the access
    logic [TO_W-1:0]        timeout;      // cycles the row stays open (Intel-HAPPY)
    logic                   mistake_inc;  // empty that could have been a hit
    logic                   mistake_dec;  // conflict that could have been an empty
  } rsp_t;

endpackage
