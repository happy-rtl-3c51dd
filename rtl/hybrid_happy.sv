// hybrid_happy: the HAPPY encoding of the access-based Hybrid page policy.
//
// Instead of one saturating counter per DRAM row, there are two CW-bit
// saturating counters per monitored physical address bit: cnt0[i] follows
// accesses whose bit i is 0 and cnt1[i] those whose bit i is 1. Training: for
// a reported page conflict every counter selected by the reported address is
// incremented, for a page hit every selected counter is decremented.
//
// Prediction for a request: each selected counter votes close page when its
// most significant bit is 1 and open page otherwise.
//   DEC_MAJORITY     close when close votes outnumber open votes (a tie, only
//                    possible for even N, keeps the page open)
//   DEC_AGGREGATION  close unless sum(selected counters) < N*(2^CW-1)/2,
//                    evaluated as 2*sum < N*(2^CW-1)
// Majority vote is the default, as in the published evaluation. The tie rule
// and reading "CounterValue" in the threshold as the counter maximum are this
// design's choices.
//
// Timing: close_pred/close_votes are combinational from q_bits and the
// registered counters; training changes the counters on the next rising edge.
module hybrid_happy
  import happy_pkg::*;
#(
  parameter int unsigned N        = happy_pkg::MON_BITS,
  parameter int unsigned CW       = 2,
  parameter decision_e   DECISION = DEC_MAJORITY,
  localparam int unsigned VW = $clog2(N + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  // prediction
  input  logic [N-1:0]  q_bits,
  output logic          close_pred,
  output logic [VW-1:0] close_votes,
  // training
  input  logic          train_valid,
  input  logic [N-1:0]  train_bits,
  input  logic          train_conflict
);

  localparam int unsigned SW = CW + $clog2(N + 1);

  logic [CW-1:0] cnt0 [N];
  logic [CW-1:0] cnt1 [N];

  for (genvar i = 0; i < N; i++) begin : g_bit
    sat_counter #(.W(CW), .INIT(0)) u_c0 (
      .clk, .rst_n,
      .inc  (train_valid &&  train_conflict && !train_bits[i]),
      .dec  (train_valid && !train_conflict && !train_bits[i]),
      .count(cnt0[i])
    );
    sat_counter #(.W(CW), .INIT(0)) u_c1 (
      .clk, .rst_n,
      .inc  (train_valid &&  train_conflict &&  train_bits[i]),
      .dec  (train_valid && !train_conflict &&  train_bits[i]),
      .count(cnt1[i])
    );
  end

  logic [SW-1:0] sum;

  always_comb begin
    logic [CW-1:0] sel;
    close_votes = '0;
    sum         = '0;
    for (int i = 0; i < N; i++) begin
      sel         = q_bits[i] ? cnt1[i] : cnt0[i];
      close_votes = close_votes + VW'(sel[CW-1]);
      sum         = sum + SW'(sel);
    end
    if (DECISION == DEC_MAJORITY)
      close_pred = (32'(close_votes) * 2) > N;
    else
      close_pred = !((32'(sum) * 2) < N * ((1 << CW) - 1));
  end

endmodule
