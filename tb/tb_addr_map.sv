// tb_addr_map: random physical addresses through all three interleaving
// schemes at the default organisation (8 banks, 16 row bits, 7 column bits,
// 6 offset bits). Expected fields are sliced out with fixed bit positions
// written down independently of the module's position arithmetic.
module tb_addr_map;
  import happy_pkg::*;
  int checks = 0, failures = 0;

  logic [31:0] a;
  logic [0:0]  ch [3], ra [3];
  logic [2:0]  bank [3];
  logic [15:0] row [3];
  logic [6:0]  col [3];
  logic [18:0] mon [3];

  addr_map #(.MAPPING(MAP_ROW_LOCALITY)) u0 (.paddr(a), .channel(ch[0]), .rank(ra[0]),
    .bank(bank[0]), .row(row[0]), .col(col[0]), .mon_bits(mon[0]));
  addr_map #(.MAPPING(MAP_PERMUTATION))  u1 (.paddr(a), .channel(ch[1]), .rank(ra[1]),
    .bank(bank[1]), .row(row[1]), .col(col[1]), .mon_bits(mon[1]));
  addr_map #(.MAPPING(MAP_MINIMALIST))   u2 (.paddr(a), .channel(ch[2]), .rank(ra[2]),
    .bank(bank[2]), .row(row[2]), .col(col[2]), .mon_bits(mon[2]));

  task automatic expect_eq(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s addr=%h got=%h exp=%h", what, a, got, exp);
    end
  endtask

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < 3000; k++) begin
      a = (k == 0) ? 32'h000C_66EB : $urandom;
      #1;
      // Row | Bank | Column | Offset  (1 channel, 1 rank)
      expect_eq("m1 row",  32'(row[0]),  32'(a[31:16]));
      expect_eq("m1 bank", 32'(bank[0]), 32'(a[15:13]));
      expect_eq("m1 col",  32'(col[0]),  32'(a[12:6]));
      expect_eq("m1 mon",  32'(mon[0]),  32'({a[31:16], a[15:13]}));
      // permutation: bank XOR low row bits
      expect_eq("m3 row",  32'(row[1]),  32'(a[31:16]));
      expect_eq("m3 bank", 32'(bank[1]), 32'(a[15:13] ^ a[18:16]));
      expect_eq("m3 col",  32'(col[1]),  32'(a[12:6]));
      expect_eq("m3 mon",  32'(mon[1]),  32'({a[31:16], a[15:13]}));
      // minimalist: Row | Column_hi | Bank | Col_lo | Offset
      expect_eq("m4 row",  32'(row[2]),  32'(a[31:16]));
      expect_eq("m4 bank", 32'(bank[2]), 32'(a[10:8] ^ a[18:16]));
      expect_eq("m4 col",  32'(col[2]),  32'({a[15:11], a[7:6]}));
      expect_eq("m4 mon",  32'(mon[2]),  32'({a[31:16], a[10:8]}));
      for (int m = 0; m < 3; m++) begin
        expect_eq("ch", 32'(ch[m]), 0);
        expect_eq("ra", 32'(ra[m]), 0);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
