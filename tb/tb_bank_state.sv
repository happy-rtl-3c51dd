// tb_bank_state: one bank's row-buffer tracker against a reference model.
// Directed part: an access with timeout 5 keeps the row open for exactly five
// idle cycles (expire rises when TC = 5); close_after closes it at once;
// with timeout_en low the row stays open. Random part: random accesses,
// rows, timeouts and modes, checking every output each cycle.
module tb_bank_state;
  localparam int RW = 16, MW = 19, TW = 9;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic acc_valid, close_after, timeout_en;
  logic [RW-1:0] acc_row;
  logic [MW-1:0] acc_mon;
  logic [TW-1:0] timeout_val;
  logic is_open, last_valid, expire;
  logic [RW-1:0] open_row, last_row;
  logic [MW-1:0] last_mon;
  logic [TW-1:0] tc;

  bank_state #(.ROW_W(RW), .MON_W(MW), .TO_W(TW)) dut (.*);

  // reference
  logic m_open, m_lv; int m_row, m_lrow, m_lmon, m_tc, m_tr;
  int n_expire = 0;

  task automatic step_and_check();
    logic e;
    #1;
    e = m_open && timeout_en && !acc_valid && (m_tc >= m_tr);
    checks += 7;
    if (expire != e)             begin failures++; $display("expire %0b exp %0b tc=%0d tr=%0d", expire, e, m_tc, m_tr); end
    if (is_open != m_open)       begin failures++; $display("is_open"); end
    if (m_open && open_row != RW'(m_row)) begin failures++; $display("open_row"); end
    if (tc != TW'(m_tc))         begin failures++; $display("tc %0d exp %0d", tc, m_tc); end
    if (last_valid != m_lv)      begin failures++; $display("last_valid"); end
    if (m_lv && last_row != RW'(m_lrow)) begin failures++; $display("last_row"); end
    if (m_lv && last_mon != MW'(m_lmon)) begin failures++; $display("last_mon"); end
    if (e) n_expire++;
    @(posedge clk);
    if (acc_valid) begin
      m_open = !close_after; m_row = acc_row; m_tc = 0; m_tr = timeout_val;
      m_lv = 1; m_lrow = acc_row; m_lmon = acc_mon;
    end else begin
      if (e) m_open = 0;
      if (m_tc < 511) m_tc++;
    end
    @(negedge clk);
  endtask

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int open_cycles;

  initial begin
    acc_valid = 0; close_after = 0; timeout_en = 1; acc_row = '0; acc_mon = '0; timeout_val = '0;
    m_open = 0; m_lv = 0; m_row = 0; m_lrow = 0; m_lmon = 0; m_tc = 0; m_tr = 0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    @(negedge clk);
    m_tc = int'(tc);  // TC is free-running from reset; align the model once
    // directed: timeout 5 -> row open for five idle cycles after the access
    acc_valid = 1; acc_row = 16'h1234; acc_mon = 19'h12345; timeout_val = 9'd5;
    step_and_check();
    acc_valid = 0;
    open_cycles = 0;
    while (is_open && open_cycles < 50) begin
      open_cycles++;
      step_and_check();
    end
    checks++;
    if (open_cycles != 6) begin failures++; $display("open for %0d cycles after access, exp 6", open_cycles); end
    // close_after: closed on the next cycle
    acc_valid = 1; close_after = 1; step_and_check();
    acc_valid = 0; close_after = 0;
    checks++; if (is_open) failures++;
    // timeout disabled: stays open
    timeout_en = 0; acc_valid = 1; timeout_val = 0; step_and_check();
    acc_valid = 0; repeat (20) step_and_check();
    checks++; if (!is_open) failures++;
    // random
    for (int k = 0; k < 30000; k++) begin
      acc_valid   = ($urandom_range(0, 9) == 0);
      acc_row     = RW'($urandom_range(0, 3));
      acc_mon     = MW'($urandom);
      close_after = ($urandom_range(0, 4) == 0);
      timeout_en  = ((k / 1000) % 4 != 3);
      timeout_val = TW'($urandom_range(0, 20));
      step_and_check();
    end
    checks++;
    if (n_expire < 10) begin failures++; $display("too few expiries"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
