// tb_happy_page_policy: end-to-end test of the page-closure policy unit at its
// default parameters (8 banks, 65,536 rows, 19 monitored bits, minimalist
// mapping, 1024-cycle check interval, T_RP = 11).
//
// A reference model written here from the policy description (address
// slicing with fixed bit positions, per-bank row-buffer state, 2 x 19 MC/TR
// pairs, 2 x 19 two-bit counters) runs beside the unit; every cycle the
// precharge requests, and every response, are compared with it.
//
// Traffic runs first under Intel-adaptive-HAPPY, then, after a reset, under
// Hybrid-HAPPY. Each run alternates phases:
//   locality phase  a few rows per bank, long idle gaps -> rows time out and
//                   are re-opened (empty that could have been a hit), TRs grow
//   random phase    random rows, gaps above T_RP -> conflicts that could have
//                   been empties, TRs shrink
// Every mechanism is counted and must occur at least once: hit, conflict,
// empty, timeout precharge, both mistake kinds, TR increase and decrease,
// the interval check, and under Hybrid-HAPPY both open and close decisions
// and both kinds of training.
module tb_happy_page_policy;
  import happy_pkg::*;
  localparam int N = 19, NB = 8, CI = 1024, TRP = 11;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  policy_e     policy;
  logic        req_valid;
  logic [31:0] req_addr;
  rsp_t        rsp;
  logic [NB-1:0] pre_req;
  logic        check_pulse;

  happy_page_policy dut (.clk, .rst_n, .policy, .req_valid, .req_addr, .rsp, .pre_req, .check_pulse);

  // ---------------- reference model ----------------
  logic m_open [NB]; int m_orow [NB]; int m_tc [NB]; int m_tr [NB];
  logic m_lv [NB];   int m_lrow [NB]; logic [N-1:0] m_lmon [NB];
  int mc [2][N], tr [2][N], hc [2][N];
  int itimer;

  // coverage
  int n_hit, n_conf, n_empty, n_pre, n_minc, n_mdec, n_tr_up, n_tr_dn, n_check;
  int n_close, n_keep, n_htrain_hit, n_htrain_conf;

  task automatic model_reset();
    for (int b = 0; b < NB; b++) begin
      m_open[b] = 0; m_orow[b] = 0; m_tc[b] = 0; m_tr[b] = 0;
      m_lv[b] = 0; m_lrow[b] = 0; m_lmon[b] = '0;
    end
    for (int j = 0; j < 2; j++) for (int i = 0; i < N; i++) begin
      mc[j][i] = 8; tr[j][i] = 2; hc[j][i] = 0;
    end
    itimer = 0;
  endtask

  // One cycle of the model: inputs are the current req_*; compares the
  // combinational outputs, then advances the state; returns the expected
  // response for the next cycle.
  rsp_t exp_rsp;

  task automatic model_cycle();
    logic        intel, chk, same, minc, mdec, cpred;
    int          bank, bphys, row, col, to, votes;
    logic [N-1:0] mon, tb_bits;
    page_class_e cls;
    logic [NB-1:0] e_pre;
    #1;  // let the unit's combinational outputs settle on the new inputs
    intel = (policy == POL_INTEL_HAPPY);
    bphys = int'(req_addr[10:8]);
    row   = int'(req_addr[31:16]);
    col   = int'({req_addr[15:11], req_addr[7:6]});
    bank  = bphys ^ int'(req_addr[18:16]);
    mon   = {req_addr[31:16], req_addr[10:8]};
    chk   = (itimer == CI - 1);
    for (int b = 0; b < NB; b++)
      e_pre[b] = m_open[b] && intel && !(req_valid && bank == b) && (m_tc[b] >= m_tr[b]);
    checks += 2;
    if (pre_req != e_pre) begin failures++; $display("%0t pre_req %b exp %b", $time, pre_req, e_pre); for (int b = 0; b < NB; b++) if (pre_req[b] != e_pre[b]) $display("  b%0d open=%0b tc=%0d tr=%0d dut_tc=%0d dut_open=%0b", b, m_open[b], m_tc[b], m_tr[b], dut.b_tc[b], dut.b_open[b]); end
    if (check_pulse != chk) begin failures++; $display("%0t check_pulse", $time); end
    for (int b = 0; b < NB; b++) if (e_pre[b]) n_pre++;

    if (!m_open[bank])            cls = PAGE_EMPTY;
    else if (m_orow[bank] == row) cls = PAGE_HIT;
    else                          cls = PAGE_CONFLICT;
    same    = m_lv[bank] && m_lrow[bank] == row;
    tb_bits = m_lmon[bank];
    mdec = req_valid && intel && cls == PAGE_CONFLICT && m_tc[bank] >= TRP;
    minc = req_valid && intel && cls == PAGE_EMPTY && same;
    to = 0; votes = 0;
    for (int i = 0; i < N; i++) begin
      to    += tr[mon[i]][i];
      votes += (hc[mon[i]][i] >= 2);
    end
    cpred = 2 * votes > N;

    exp_rsp = '0;
    exp_rsp.valid       = req_valid;
    exp_rsp.bank        = 3'(bank);
    exp_rsp.row         = 16'(row);
    exp_rsp.col         = 7'(col);
    exp_rsp.cls         = cls;
    exp_rsp.need_pre    = cls == PAGE_CONFLICT;
    exp_rsp.need_act    = cls != PAGE_HIT;
    exp_rsp.auto_pre    = !intel && cpred;
    exp_rsp.timeout     = intel ? 9'(to) : 9'd0;
    exp_rsp.mistake_inc = minc;
    exp_rsp.mistake_dec = mdec;

    if (req_valid) begin
      case (cls)
        PAGE_HIT:      n_hit++;
        PAGE_CONFLICT: n_conf++;
        default:       n_empty++;
      endcase
      if (minc) n_minc++;
      if (mdec) n_mdec++;
      if (!intel) begin
        if (cpred) n_close++; else n_keep++;
      end
    end

    // ---- state update (clock edge) ----
    if (chk) begin
      n_check++;
      for (int j = 0; j < 2; j++) for (int i = 0; i < N; i++) begin
        if (mc[j][i] >= 12) begin if (tr[j][i] < 15) begin tr[j][i]++; n_tr_up++; end end
        else if (mc[j][i] <= 3) begin if (tr[j][i] > 0) begin tr[j][i]--; n_tr_dn++; end end
        mc[j][i] = 8;
      end
    end else begin
      for (int i = 0; i < N; i++) begin
        if (minc && mc[tb_bits[i]][i] < 15) mc[tb_bits[i]][i]++;
        if (mdec && mc[tb_bits[i]][i] > 0)  mc[tb_bits[i]][i]--;
      end
    end
    if (req_valid && !intel && m_lv[bank]) begin
      if (same) n_htrain_hit++; else n_htrain_conf++;
      for (int i = 0; i < N; i++) begin
        if (same) hc[tb_bits[i]][i] = (hc[tb_bits[i]][i] > 0) ? hc[tb_bits[i]][i] - 1 : 0;
        else      hc[tb_bits[i]][i] = (hc[tb_bits[i]][i] < 3) ? hc[tb_bits[i]][i] + 1 : 3;
      end
    end
    itimer = chk ? 0 : itimer + 1;
    for (int b = 0; b < NB; b++) begin
      if (req_valid && bank == b) begin
        m_open[b] = !(!intel && cpred); m_orow[b] = row; m_tc[b] = 0; m_tr[b] = to;
        m_lv[b] = 1; m_lrow[b] = row; m_lmon[b] = mon;
      end else begin
        if (e_pre[b]) m_open[b] = 0;
        if (m_tc[b] < 511) m_tc[b]++;
      end
    end
  endtask

  // ---------------- stimulus ----------------
  logic [15:0] hot_rows [4];

  function automatic logic [31:0] make_addr(int row, int bphys);
    logic [31:0] a;
    a = $urandom;
    a[31:16] = 16'(row);
    a[10:8]  = 3'(bphys);
    return a;
  endfunction

  task automatic run(policy_e pol, int n_req);
    rst_n = 1'b0; policy = pol; req_valid = 0; req_addr = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    model_reset();
    itimer = 0;
    for (int r = 0; r < 4; r++) hot_rows[r] = 16'($urandom);
    for (int k = 0; k < n_req; k++) begin
      int gap, phase;
      phase = (k / 1500) % 2;   // 0 = locality, 1 = random
      gap = (phase == 0) ? $urandom_range(0, 80) : $urandom_range(8, 40);
      for (int g = 0; g < gap; g++) begin
        req_valid = 0;
        model_cycle();
        @(posedge clk); @(negedge clk);
        compare_rsp();
      end
      req_valid = 1;
      if (phase == 0) req_addr = make_addr(hot_rows[$urandom_range(0, 3)], $urandom_range(0, 7));
      else            req_addr = make_addr($urandom, $urandom_range(0, 7));
      model_cycle();
      @(posedge clk); @(negedge clk);
      compare_rsp();
    end
    req_valid = 0;
  endtask

  task automatic compare_rsp();
    checks++;
    if (rsp != exp_rsp) begin
      failures++;
      if (failures < 20)
        $display("%0t rsp %p\n          exp %p", $time, rsp, exp_rsp);
    end
  endtask

  initial begin : watchdog
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic need(string what, int n);
    checks++;
    $display("  %-28s %0d", what, n);
    if (n == 0) begin failures++; $display("FAIL: %s never happened", what); end
  endtask

  initial begin
    {n_hit, n_conf, n_empty, n_pre, n_minc, n_mdec, n_tr_up, n_tr_dn, n_check} = '0;
    {n_close, n_keep, n_htrain_hit, n_htrain_conf} = '0;
    policy = POL_INTEL_HAPPY; req_valid = 0; req_addr = '0;
    @(negedge clk);
    run(POL_INTEL_HAPPY, 12000);
    $display("Intel-adaptive-HAPPY:");
    need("page hit", n_hit);
    need("page conflict", n_conf);
    need("page empty", n_empty);
    need("timeout precharge", n_pre);
    need("empty could have been hit", n_minc);
    need("conflict could have been empty", n_mdec);
    need("interval check", n_check);
    need("TR increment", n_tr_up);
    need("TR decrement", n_tr_dn);
    {n_hit, n_conf, n_empty} = '0;
    run(POL_HYBRID_HAPPY, 12000);
    $display("Hybrid-HAPPY:");
    need("page hit", n_hit);
    need("page conflict", n_conf);
    need("page empty", n_empty);
    need("close-page decision", n_close);
    need("open-page decision", n_keep);
    need("hit training", n_htrain_hit);
    need("conflict training", n_htrain_conf);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
