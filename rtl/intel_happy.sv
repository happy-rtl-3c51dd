// intel_happy: the HAPPY encoding of the time-based Intel-adaptive open-page
// policy.
//
// Instead of one Mistake Counter / Timeout Register pair per bank, there is a
// monitor_unit per encoding position: mu0[i] for physical address bit i = 0
// and mu1[i] for bit i = 1, 2*N units in all.
//   Timeout: the time a row is kept open after an access is the sum of the N
//            TRs selected by the accessed address (q_bits), so each
//            combination of address bits gets its own timeout.
//   Training: a mistake (mc_inc or mc_dec) updates the N MCs selected by
//            train_bits, the address of the bank's last accessed row, whose
//            timeout was the wrong one.
//   Check:   an interval timer raises check for one cycle every
//            CHECK_INTERVAL cycles; every unit then moves its TR by one step
//            according to its MC.
// The per-bit units and the summed timeout follow the published scheme.
// CHECK_INTERVAL = 1024 and training with the last accessed row's address are
// choices of this design.
//
// Timing: timeout is combinational from q_bits and the registered TRs.
// Training and checks take effect on the next rising edge. The timer starts
// at reset, so the first check comes CHECK_INTERVAL cycles after reset.
module intel_happy #(
  parameter int unsigned N              = happy_pkg::MON_BITS,
  parameter int unsigned MC_W           = happy_pkg::MC_W,
  parameter int unsigned TR_W           = happy_pkg::TR_W,
  parameter int unsigned CHECK_INTERVAL = 1024,
  localparam int unsigned TO_W = TR_W + $clog2(N + 1)
) (
  input  logic            clk,
  input  logic            rst_n,
  // timeout of the access being issued
  input  logic [N-1:0]    q_bits,
  output logic [TO_W-1:0] timeout,
  // mistake reports
  input  logic [N-1:0]    train_bits,
  input  logic            mc_inc,
  input  logic            mc_dec,
  // interval check pulse (also drives the units)
  output logic            check
);

  localparam int unsigned IW = $clog2(CHECK_INTERVAL + 1);

  logic [TR_W-1:0] tr0 [N];
  logic [TR_W-1:0] tr1 [N];
  logic [MC_W-1:0] mc0 [N];
  logic [MC_W-1:0] mc1 [N];

  // Interval timer.
  logic [IW-1:0] itimer;
  always_ff @(posedge clk) begin
    if (!rst_n)
      itimer <= '0;
    else if (check)
      itimer <= '0;
    else
      itimer <= itimer + 1'b1;
  end
  assign check = (32'(itimer) == CHECK_INTERVAL - 1);

  for (genvar i = 0; i < N; i++) begin : g_bit
    monitor_unit #(.MC_W(MC_W), .TR_W(TR_W)) u_mu0 (
      .clk, .rst_n,
      .mc_inc(mc_inc && !train_bits[i]),
      .mc_dec(mc_dec && !train_bits[i]),
      .check,
      .mc(mc0[i]), .tr(tr0[i])
    );
    monitor_unit #(.MC_W(MC_W), .TR_W(TR_W)) u_mu1 (
      .clk, .rst_n,
      .mc_inc(mc_inc && train_bits[i]),
      .mc_dec(mc_dec && train_bits[i]),
      .check,
      .mc(mc1[i]), .tr(tr1[i])
    );
  end

  always_comb begin
    timeout = '0;
    for (int i = 0; i < N; i++)
      timeout = timeout + TO_W'(q_bits[i] ? tr1[i] : tr0[i]);
  end

endmodule
