// monitor_unit: one Intel-adaptive monitoring unit, i.e. a Mistake Counter
// (MC) and a Timeout Register (TR), as kept per encoding position by
// Intel-adaptive-HAPPY.
//
// MC counts mistakes of the timeout decision: mc_inc when a page-empty could
// have been a page-hit (the row was closed too early), mc_dec when a page
// conflict could have been a page-empty (the row was kept open too long). MC
// saturates at 0 and 2^MC_W-1. On a check pulse MC is compared with the two
// thresholds: MC >= HIGH_TH adds one to TR (keep rows open longer),
// MC <= LOW_TH subtracts one (close sooner); TR saturates. The 4-bit MC, the
// threshold brackets 1100..1111 and 0000..0011 and the one-step TR update
// follow the published scheme. TR_W = 4, the reset values (MC mid-range 8,
// TR 2) and reloading MC with MC_INIT after every check are choices of this
// design. A check in the same cycle as an MC update wins and the update is
// dropped.
//
// Timing: all state updates on the rising clock edge; synchronous, active-low
// reset; outputs are the registers.
module monitor_unit #(
  parameter int unsigned MC_W    = 4,
  parameter int unsigned TR_W    = 4,
  parameter int unsigned HIGH_TH = 12,
  parameter int unsigned LOW_TH  = 3,
  parameter int unsigned MC_INIT = 8,
  parameter int unsigned TR_INIT = 2
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            mc_inc,
  input  logic            mc_dec,
  input  logic            check,
  output logic [MC_W-1:0] mc,
  output logic [TR_W-1:0] tr
);

  localparam logic [MC_W-1:0] MC_MAX = '1;
  localparam logic [TR_W-1:0] TR_MAX = '1;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      mc <= MC_W'(MC_INIT);
      tr <= TR_W'(TR_INIT);
    end else if (check) begin
      if (32'(mc) >= HIGH_TH && tr != TR_MAX)
        tr <= tr + 1'b1;
      else if (32'(mc) <= LOW_TH && tr != '0)
        tr <= tr - 1'b1;
      mc <= MC_W'(MC_INIT);
    end else if (mc_inc && !mc_dec && mc != MC_MAX) begin
      mc <= mc + 1'b1;
    end else if (mc_dec && !mc_inc && mc != '0) begin
      mc <= mc - 1'b1;
    end
  end

endmodule
