// tb_monitor_unit: MC/TR monitoring unit against a reference model: random
// mistake reports and periodic checks, with phases that push MC into the high
// bracket (>= 4'b1100), the low bracket (<= 4'b0011) and the middle, so TR is
// seen to rise, fall, hold and saturate.
module tb_monitor_unit;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic mc_inc, mc_dec, check;
  logic [3:0] mc, tr;
  monitor_unit dut (.clk, .rst_n, .mc_inc, .mc_dec, .check, .mc, .tr);

  int m_mc, m_tr, n_up = 0, n_down = 0, n_hold = 0;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    mc_inc = 0; mc_dec = 0; check = 0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    m_mc = 8; m_tr = 2;
    for (int k = 0; k < 40000; k++) begin
      int phase;
      @(negedge clk);
      checks += 2;
      if (mc != 4'(m_mc)) begin failures++; $display("mc %0d exp %0d", mc, m_mc); end
      if (tr != 4'(m_tr)) begin failures++; $display("tr %0d exp %0d", tr, m_tr); end
      phase = (k / 3000) % 3;
      check  = (k % 37 == 36);
      mc_inc = (phase == 0) ? ($urandom_range(0, 3) != 0) : (phase == 1) ? ($urandom_range(0, 5) == 0) : ($urandom_range(0, 1) == 0);
      mc_dec = (phase == 1) ? ($urandom_range(0, 3) != 0) : (phase == 0) ? ($urandom_range(0, 5) == 0) : ($urandom_range(0, 1) == 0);
      @(posedge clk);
      if (check) begin
        if (m_mc >= 12)     begin if (m_tr < 15) m_tr++; n_up++;   end
        else if (m_mc <= 3) begin if (m_tr > 0)  m_tr--; n_down++; end
        else n_hold++;
        m_mc = 8;
      end else if (mc_inc && !mc_dec) m_mc = (m_mc < 15) ? m_mc + 1 : 15;
      else if (mc_dec && !mc_inc)     m_mc = (m_mc > 0) ? m_mc - 1 : 0;
    end
    checks++;
    if (n_up == 0 || n_down == 0 || n_hold == 0) begin failures++; $display("up/down/hold not all seen"); end
    $display("up=%0d down=%0d hold=%0d", n_up, n_down, n_hold);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
