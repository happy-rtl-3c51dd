// addr_map: physical-address to DRAM-coordinate translation, and selection of
// the address bits that the HAPPY predictors monitor.
//
// Three interleaving schemes are supported (field order, most significant
// field first):
//   MAP_ROW_LOCALITY  Row | RA | Bank | CH | Column | Block offset
//   MAP_PERMUTATION   Row | CH | RA | Bank | Column | Block offset,
//                     bank index = Bank XOR part of Row
//   MAP_MINIMALIST    Row | CH | Column_hi | RA | Bank | Col_lo | Block offset,
//                     bank index = Bank XOR part of Row
// The field orders are those of the three published schemes; the default is
// the minimalist open-page scheme, the one used for the main results. The
// field widths follow the evaluated organisation (8 banks, 65,536 rows,
// 128 lines of 64 B). Design choices not fixed by the source: the row bits
// XORed into the bank are the BANK_BITS row bits from XOR_ROW_LSB upwards, and
// the minimalist scheme keeps COL_LO_BITS = 2 column bits below the bank.
//
// mon_bits gathers the *physical* address bits (before any XOR) of the bank,
// rank, channel and row fields, in that order from bit 0 upwards. Column and
// block-offset bits never take part in row hits or conflicts, so they are not
// monitored.
//
// Purely combinational; no clock.
module addr_map
  import happy_pkg::*;
#(
  parameter map_e        MAPPING     = MAP_MINIMALIST,
  parameter int unsigned CH_W        = happy_pkg::CH_BITS,
  parameter int unsigned RA_W        = happy_pkg::RA_BITS,
  parameter int unsigned BANK_W      = happy_pkg::BANK_BITS,
  parameter int unsigned ROW_W       = happy_pkg::ROW_BITS,
  parameter int unsigned COL_W       = happy_pkg::COL_BITS,
  parameter int unsigned OFF_W       = happy_pkg::OFFSET_BITS,
  parameter int unsigned COL_LO_BITS = 2,
  parameter int unsigned XOR_ROW_LSB = 0,
  localparam int unsigned AW  = CH_W + RA_W + BANK_W + ROW_W + COL_W + OFF_W,
  localparam int unsigned NMON = CH_W + RA_W + BANK_W + ROW_W,
  localparam int unsigned CHO = (CH_W > 0) ? CH_W : 1,
  localparam int unsigned RAO = (RA_W > 0) ? RA_W : 1
) (
  input  logic [AW-1:0]     paddr,
  output logic [CHO-1:0]    channel,
  output logic [RAO-1:0]    rank,
  output logic [BANK_W-1:0] bank,
  output logic [ROW_W-1:0]  row,
  output logic [COL_W-1:0]  col,
  output logic [NMON-1:0]   mon_bits
);

  localparam int unsigned CLO = (COL_LO_BITS < COL_W) ? COL_LO_BITS : COL_W;
  localparam int unsigned CHI = COL_W - CLO;

  // Least significant bit of every field, per scheme.
  localparam int unsigned COL_LSB = OFF_W;  // low column part in the minimalist scheme
  localparam int unsigned BANK_LSB =
      (MAPPING == MAP_ROW_LOCALITY) ? OFF_W + COL_W + CH_W :
      (MAPPING == MAP_PERMUTATION)  ? OFF_W + COL_W :
                                      OFF_W + CLO;
  localparam int unsigned RA_LSB =
      (MAPPING == MAP_ROW_LOCALITY) ? BANK_LSB + BANK_W :
                                      BANK_LSB + BANK_W;
  localparam int unsigned CH_LSB =
      (MAPPING == MAP_ROW_LOCALITY) ? OFF_W + COL_W :
      (MAPPING == MAP_PERMUTATION)  ? RA_LSB + RA_W :
                                      RA_LSB + RA_W + CHI;
  localparam int unsigned COLHI_LSB = RA_LSB + RA_W;  // minimalist only
  localparam int unsigned ROW_LSB = AW - ROW_W;        // row is on top in every scheme

  // Position in paddr of monitored bit i: bank, then rank, channel, row.
  function automatic int unsigned mon_pos(int unsigned i);
    if (i < BANK_W)                     return BANK_LSB + i;
    else if (i < BANK_W + RA_W)         return RA_LSB + (i - BANK_W);
    else if (i < BANK_W + RA_W + CH_W)  return CH_LSB + (i - BANK_W - RA_W);
    else                                return ROW_LSB + (i - BANK_W - RA_W - CH_W);
  endfunction

  // Bits [lsb +: w] of a, zero extended; w may be 0.
  function automatic logic [AW-1:0] field(logic [AW-1:0] a, int unsigned lsb, int unsigned w);
    logic [AW-1:0] mask;
    mask = ~({AW{1'b1}} << w);
    return (a >> lsb) & mask;
  endfunction

  logic [AW-1:0] bank_phys, row_x, row_f, col_f;

  always_comb begin
    row_f     = field(paddr, ROW_LSB, ROW_W);
    bank_phys = field(paddr, BANK_LSB, BANK_W);
    row_x     = field(row_f, XOR_ROW_LSB, BANK_W);
    if (MAPPING == MAP_MINIMALIST)
      col_f = (field(paddr, COLHI_LSB, CHI) << CLO) | field(paddr, COL_LSB, CLO);
    else
      col_f = field(paddr, OFF_W, COL_W);

    row  = row_f[ROW_W-1:0];
    col  = col_f[COL_W-1:0];
    bank = (MAPPING == MAP_ROW_LOCALITY) ? bank_phys[BANK_W-1:0]
                                         : bank_phys[BANK_W-1:0] ^ row_x[BANK_W-1:0];
    channel = CHO'(field(paddr, CH_LSB, CH_W));
    rank    = RAO'(field(paddr, RA_LSB, RA_W));
  end

  for (genvar i = 0; i < NMON; i++) begin : g_mon
    assign mon_bits[i] = paddr[mon_pos(i)];
  end

endmodule
