// tb_sat_counter: random inc/dec against a reference counter, for the 2-bit
// Hybrid counter and a wider 3-bit one, including both saturation ends and
// the OP/Weak OP/Weak CP/CP vote bit.
module tb_sat_counter;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic inc, dec;
  logic [1:0] c2;
  logic [2:0] c3;
  sat_counter #(.W(2), .INIT(0)) dut2 (.clk, .rst_n, .inc, .dec, .count(c2));
  sat_counter #(.W(3), .INIT(5)) dut3 (.clk, .rst_n, .inc, .dec, .count(c3));

  int m2, m3, sat_hi = 0, sat_lo = 0;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    inc = 0; dec = 0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    m2 = 0; m3 = 5;
    for (int k = 0; k < 2000; k++) begin
      @(negedge clk);
      checks += 2;
      if (c2 != 2'(m2)) begin failures++; $display("W2 mismatch %0d vs %0d", c2, m2); end
      if (c3 != 3'(m3)) begin failures++; $display("W3 mismatch %0d vs %0d", c3, m3); end
      // vote bit: values 0,1 open page, 2,3 close page
      checks++;
      if (c2[1] != (m2 >= 2)) failures++;
      // bias in phases so both ends are reached
      if ((k / 100) % 2 == 0) begin inc = ($urandom_range(0, 3) != 0); dec = ($urandom_range(0, 3) == 0); end
      else                   begin inc = ($urandom_range(0, 3) == 0); dec = ($urandom_range(0, 3) != 0); end
      if (inc && !dec) begin
        if (m2 == 3) sat_hi++;
        m2 = (m2 < 3) ? m2 + 1 : 3; m3 = (m3 < 7) ? m3 + 1 : 7;
      end else if (dec && !inc) begin
        if (m2 == 0) sat_lo++;
        m2 = (m2 > 0) ? m2 - 1 : 0; m3 = (m3 > 0) ? m3 - 1 : 0;
      end
    end
    checks++;
    if (sat_hi == 0 || sat_lo == 0) begin failures++; $display("saturation not reached"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
