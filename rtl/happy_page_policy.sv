// happy_page_policy: page-closure policy unit of a DRAM memory controller,
// using the HAPPY address-bit encoding for its predictors.
//
// For every access the command scheduler issues (req_valid/req_addr, at most
// one per cycle) the unit
//   1. maps the physical address to bank/row/column (addr_map) and picks out
//      the 19 monitored address bits;
//   2. classifies the access against the bank's row buffer (bank_state):
//      page hit (the row is open), conflict (another row is open) or empty
//      (no row open);
//   3. trains and queries the selected predictor:
//      POL_INTEL_HAPPY   (default) the Intel-adaptive policy in HAPPY form
//        (intel_happy). A conflict while the bank had been idle for at least
//        T_RP cycles "could have been an empty" and decrements the MCs of the
//        last accessed row's address bits; an empty to the bank's last
//        accessed row "could have been a hit" and increments them. The row is
//        then kept open for timeout = sum of the TRs selected by the address;
//        bank_state raises pre_req[b] when that time has passed.
//      POL_HYBRID_HAPPY  the Hybrid policy in HAPPY form (hybrid_happy). Each
//        access is compared with the bank's last accessed row: same row
//        trains as a hit, a different row as a conflict, on the counters of
//        the last accessed row's address bits. The majority vote over the
//        counters selected by the new address decides whether the access
//        closes its row at once (auto_pre) or leaves it open.
//   4. reports the outcome one cycle later in rsp (type rsp_t).
// policy is meant to be static (set at boot), as with the Xeon controller's
// boot-time page-policy choice; changing it at run time is harmless but the
// predictors keep their training.
//
// Design choices not fixed by the published scheme: T_RP = 11 cycles (DDR3-1600)
// as the "enough time to precharge" test, training the Hybrid counters against
// the last accessed row rather than only on real row-buffer hits/conflicts,
// and the single-issue interface without back-pressure. DRAM command timing,
// the scheduler and the DRAM itself are outside this unit.
module happy_page_policy
  import happy_pkg::*;
#(
  parameter map_e        MAPPING        = MAP_MINIMALIST,
  parameter decision_e   DECISION       = DEC_MAJORITY,
  parameter int unsigned CHECK_INTERVAL = 1024,
  parameter int unsigned T_RP           = 11
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  policy_e              policy,
  input  logic                 req_valid,
  input  logic [PADDR_W-1:0]   req_addr,
  output rsp_t                 rsp,
  output logic [NUM_BANKS-1:0] pre_req,
  output logic                 check_pulse
);

  localparam int unsigned CHO = (CH_BITS > 0) ? CH_BITS : 1;
  localparam int unsigned RAO = (RA_BITS > 0) ? RA_BITS : 1;

  // ---- address mapping ----
  logic [CHO-1:0]       a_ch;
  logic [RAO-1:0]       a_ra;
  logic [BANK_BITS-1:0] a_bank;
  logic [ROW_BITS-1:0]  a_row;
  logic [COL_BITS-1:0]  a_col;
  logic [MON_BITS-1:0]  a_mon;

  addr_map #(.MAPPING(MAPPING)) u_map (
    .paddr(req_addr), .channel(a_ch), .rank(a_ra),
    .bank(a_bank), .row(a_row), .col(a_col), .mon_bits(a_mon)
  );

  // ---- per-bank row-buffer state ----
  logic                 b_open     [NUM_BANKS];
  logic [ROW_BITS-1:0]  b_open_row [NUM_BANKS];
  logic [TO_W-1:0]      b_tc       [NUM_BANKS];
  logic                 b_lvalid   [NUM_BANKS];
  logic [ROW_BITS-1:0]  b_lrow     [NUM_BANKS];
  logic [MON_BITS-1:0]  b_lmon     [NUM_BANKS];

  logic            close_pred;
  logic [TO_W-1:0] timeout;
  logic            is_intel;
  assign is_intel = (policy == POL_INTEL_HAPPY);

  for (genvar b = 0; b < NUM_BANKS; b++) begin : g_bank
    bank_state #(.ROW_W(ROW_BITS), .MON_W(MON_BITS), .TO_W(TO_W)) u_bank (
      .clk, .rst_n,
      .acc_valid  (req_valid && a_bank == BANK_BITS'(b)),
      .acc_row    (a_row),
      .acc_mon    (a_mon),
      .close_after(!is_intel && close_pred),
      .timeout_en (is_intel),
      .timeout_val(timeout),
      .is_open    (b_open[b]),
      .open_row   (b_open_row[b]),
      .tc         (b_tc[b]),
      .last_valid (b_lvalid[b]),
      .last_row   (b_lrow[b]),
      .last_mon   (b_lmon[b]),
      .expire     (pre_req[b])
    );
  end

  // ---- classification of the current access ----
  page_class_e         cls;
  logic                same_as_last;
  logic [MON_BITS-1:0] train_bits;
  logic                mis_inc, mis_dec;

  always_comb begin
    if (!b_open[a_bank])                   cls = PAGE_EMPTY;
    else if (b_open_row[a_bank] == a_row)  cls = PAGE_HIT;
    else                                   cls = PAGE_CONFLICT;
    same_as_last = b_lvalid[a_bank] && (b_lrow[a_bank] == a_row);
    train_bits   = b_lmon[a_bank];
    mis_dec = req_valid && is_intel && cls == PAGE_CONFLICT && 32'(b_tc[a_bank]) >= T_RP;
    mis_inc = req_valid && is_intel && cls == PAGE_EMPTY && same_as_last;
  end

  // ---- predictors ----
  intel_happy #(.N(MON_BITS), .MC_W(MC_W), .TR_W(TR_W),
                .CHECK_INTERVAL(CHECK_INTERVAL)) u_intel (
    .clk, .rst_n,
    .q_bits    (a_mon),
    .timeout   (timeout),
    .train_bits(train_bits),
    .mc_inc    (mis_inc),
    .mc_dec    (mis_dec),
    .check     (check_pulse)
  );

  logic [$clog2(MON_BITS+1)-1:0] close_votes;

  hybrid_happy #(.N(MON_BITS), .CW(2), .DECISION(DECISION)) u_hybrid (
    .clk, .rst_n,
    .q_bits        (a_mon),
    .close_pred    (close_pred),
    .close_votes   (close_votes),
    .train_valid   (req_valid && !is_intel && b_lvalid[a_bank]),
    .train_bits    (train_bits),
    .train_conflict(!same_as_last)
  );

  // ---- response register ----
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rsp <= '0;
    end else begin
      rsp.valid       <= req_valid;
      rsp.bank        <= a_bank;
      rsp.row         <= a_row;
      rsp.col         <= a_col;
      rsp.cls         <= cls;
      rsp.need_pre    <= cls == PAGE_CONFLICT;
      rsp.need_act    <= cls != PAGE_HIT;
      rsp.auto_pre    <= !is_intel && close_pred;
      rsp.timeout     <= is_intel ? timeout : '0;
      rsp.mistake_inc <= mis_inc;
      rsp.mistake_dec <= mis_dec;
    end
  end

  // ---- rules of the response ----
  // A conflict needs both a precharge and an activate; a hit needs neither.
  a_pre_implies_act: assert property (@(posedge clk) disable iff (!rst_n)
    rsp.valid && rsp.need_pre |-> rsp.need_act);
  a_hit_no_act: assert property (@(posedge clk) disable iff (!rst_n)
    rsp.valid && rsp.cls == PAGE_HIT |-> !rsp.need_act && !rsp.need_pre);
  // The two mistake kinds exclude each other and exist only under Intel-HAPPY.
  a_mistakes_exclusive: assert property (@(posedge clk) disable iff (!rst_n)
    !(mis_inc && mis_dec));
  // Only Hybrid-HAPPY closes a row right after its access, only Intel-HAPPY
  // closes rows on a timeout.
  a_policy_actions: assert property (@(posedge clk) disable iff (!rst_n)
    !(is_intel ? (rsp.valid && rsp.auto_pre) : (|pre_req)));

endmodule
