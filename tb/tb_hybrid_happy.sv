// tb_hybrid_happy: Hybrid-HAPPY encoding counters and decision against a
// reference model (arrays of 2-bit counters, majority vote and aggregation
// worked out here). A majority-vote instance and an aggregation instance are
// trained with the same random hit/conflict reports and queried with random
// addresses. A directed part first checks the fig.-6 style example: with all
// counters at 0 every bit votes open; after conflicts on one address all the
// counters it selects vote close while the complementary address still sees
// open page.
module tb_hybrid_happy;
  import happy_pkg::*;
  localparam int N = 19;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [N-1:0] q_bits, train_bits;
  logic train_valid, train_conflict;
  logic close_m, close_a;
  logic [4:0] votes_m, votes_a;

  hybrid_happy #(.N(N), .CW(2), .DECISION(DEC_MAJORITY)) dut_m (
    .clk, .rst_n, .q_bits, .close_pred(close_m), .close_votes(votes_m),
    .train_valid, .train_bits, .train_conflict);
  hybrid_happy #(.N(N), .CW(2), .DECISION(DEC_AGGREGATION)) dut_a (
    .clk, .rst_n, .q_bits, .close_pred(close_a), .close_votes(votes_a),
    .train_valid, .train_bits, .train_conflict);

  int cnt [2][N];
  int n_close = 0, n_open = 0;

  task automatic check_query();
    int v, s;
    logic em, ea;
    v = 0; s = 0;
    for (int i = 0; i < N; i++) begin
      v += (cnt[q_bits[i]][i] >= 2);
      s += cnt[q_bits[i]][i];
    end
    em = (2 * v > N);
    ea = !(2 * s < N * 3);
    checks += 3;
    if (votes_m != 5'(v)) begin failures++; $display("votes %0d exp %0d", votes_m, v); end
    if (close_m != em)    begin failures++; $display("majority %0b exp %0b", close_m, em); end
    if (close_a != ea)    begin failures++; $display("aggregation %0b exp %0b (sum %0d)", close_a, ea, s); end
    if (em) n_close++; else n_open++;
  endtask

  task automatic model_train();
    if (train_valid)
      for (int i = 0; i < N; i++) begin
        if (train_conflict) cnt[train_bits[i]][i] = (cnt[train_bits[i]][i] < 3) ? cnt[train_bits[i]][i] + 1 : 3;
        else                cnt[train_bits[i]][i] = (cnt[train_bits[i]][i] > 0) ? cnt[train_bits[i]][i] - 1 : 0;
      end
  endtask

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [N-1:0] pool [4];
  logic [N-1:0] fig_q;
  int fig_v [N];

  initial begin
    train_valid = 0; train_bits = '0; train_conflict = 0; q_bits = '0;
    for (int j = 0; j < 2; j++) for (int i = 0; i < N; i++) cnt[j][i] = 0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    // directed: the printed majority-vote example. Address bits (MSB first)
    // 1100110011011101011; the counters they select hold
    // 3 2 1 3 0 1 0 2 2 2 0 0 1 1 3 0 3 0 3 -> 9 close votes, 10 open votes,
    // final decision open page (aggregation: sum 27 < 28.5, also open).
    // Each counter is raised to its value by k conflict rounds; in rounds
    // beyond its value the other counter of the pair is trained instead.
    fig_q = 19'b1100110011011101011;
    fig_v = '{3, 2, 1, 3, 0, 1, 0, 2, 2, 2, 0, 0, 1, 1, 3, 0, 3, 0, 3};
    for (int k = 1; k <= 3; k++) begin
      @(negedge clk);
      for (int p = 0; p < N; p++)
        train_bits[N-1-p] = (fig_v[p] >= k) ? fig_q[N-1-p] : !fig_q[N-1-p];
      train_valid = 1; train_conflict = 1;
      @(posedge clk);
    end
    @(negedge clk);
    train_valid = 0; q_bits = fig_q; #1;
    checks += 3;
    if (votes_m != 5'd9)  begin failures++; $display("example: %0d close votes, exp 9", votes_m); end
    if (close_m !== 1'b0) begin failures++; $display("example: majority says close"); end
    if (close_a !== 1'b0) begin failures++; $display("example: aggregation says close"); end
    // back to reset for the rest
    rst_n = 1'b0;
    @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    // directed: two conflicts on 0x4C66E (19 monitored bits) -> its counters at 2
    @(negedge clk);
    q_bits = 19'h4C66E; #1;
    checks++; if (close_m !== 1'b0 || votes_m != 0) failures++;
    train_valid = 1; train_bits = 19'h4C66E; train_conflict = 1;
    @(posedge clk); model_train(); @(negedge clk);
    @(posedge clk); model_train(); @(negedge clk);
    train_valid = 0; #1;
    checks += 2;
    if (close_m !== 1'b1 || votes_m != 5'd19) failures++;
    q_bits = ~19'h4C66E; #1;
    if (close_m !== 1'b0 || votes_m != 5'd0) failures++;
    // random phase: a few recurring addresses so counters move both ways
    for (int p = 0; p < 4; p++) pool[p] = N'($urandom);
    for (int k = 0; k < 20000; k++) begin
      @(negedge clk);
      q_bits = ($urandom_range(0, 1) == 1) ? pool[$urandom_range(0, 3)] : N'($urandom);
      #1 check_query();
      train_valid    = ($urandom_range(0, 2) != 0);
      train_bits     = ($urandom_range(0, 3) != 0) ? pool[$urandom_range(0, 3)] : N'($urandom);
      train_conflict = ((k / 500) % 2 == 0) ? ($urandom_range(0, 3) != 0) : ($urandom_range(0, 3) == 0);
      @(posedge clk);
      model_train();
    end
    checks++;
    if (n_close == 0 || n_open == 0) begin failures++; $display("both decisions not seen"); end
    $display("close=%0d open=%0d", n_close, n_open);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
