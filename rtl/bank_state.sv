// bank_state: row-buffer state of one DRAM bank as seen by the page-closure
// policy, with the bank's Timeout Counter (TC) and timeout comparator.
//
// An access (acc_valid) leaves the accessed row open, or closes it at once
// when close_after is set (Hybrid-HAPPY predicted close page: the access is
// issued with auto-precharge). It also records the row as the bank's last
// accessed row, clears TC and latches timeout_val as the bank's timeout.
// While the row is open and timeout_en is set, TC counts clock cycles; when
// TC reaches the latched timeout the comparator raises expire, a precharge
// request, and the row is marked closed on the same edge. With timeout_en low
// (Hybrid-HAPPY) an open row stays open until a conflicting access.
// The TC / timeout register / comparator arrangement follows the published
// Intel-adaptive structure; counting in controller clock cycles and marking
// the row closed in the cycle the precharge is requested (DRAM timing is left
// to the command scheduler) are this design's choices.
//
// Interface: tc, is_open, open_row, last_valid, last_row and last_mon are the
// registered state before the current edge, so the top can classify an access
// in the same cycle it is presented. An access overrides an expiry in the same
// cycle.
module bank_state #(
  parameter int unsigned ROW_W = happy_pkg::ROW_BITS,
  parameter int unsigned MON_W = happy_pkg::MON_BITS,
  parameter int unsigned TO_W  = 9
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             acc_valid,
  input  logic [ROW_W-1:0] acc_row,
  input  logic [MON_W-1:0] acc_mon,
  input  logic             close_after,
  input  logic             timeout_en,
  input  logic [TO_W-1:0]  timeout_val,
  output logic             is_open,
  output logic [ROW_W-1:0] open_row,
  output logic [TO_W-1:0]  tc,
  output logic             last_valid,
  output logic [ROW_W-1:0] last_row,
  output logic [MON_W-1:0] last_mon,
  output logic             expire
);

  logic [TO_W-1:0] tr_lat;
  localparam logic [TO_W-1:0] TC_MAX = '1;

  // The open row, when there is one, is always the last accessed row.
  assign open_row = last_row;

  assign expire = is_open && timeout_en && !acc_valid && (tc >= tr_lat);

  // A precharge is only requested for an open row.
  a_expire_open: assert property (@(posedge clk) disable iff (!rst_n) expire |-> is_open);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      is_open    <= 1'b0;
      tc         <= '0;
      tr_lat     <= '0;
      last_valid <= 1'b0;
      last_row   <= '0;
      last_mon   <= '0;
    end else if (acc_valid) begin
      is_open    <= !close_after;
      tc         <= '0;
      tr_lat     <= timeout_val;
      last_valid <= 1'b1;
      last_row   <= acc_row;
      last_mon   <= acc_mon;
    end else begin
      if (expire)
        is_open <= 1'b0;
      if (tc != TC_MAX)
        tc <= tc + 1'b1;
    end
  end

endmodule
