// tb_workload_adaptation: synthetic access streams that stand in for the two
// kinds of workload the page policy must serve, run through the full unit at
// its default parameters.
//   streaming  one hot row per bank, each bank revisited every ~70 cycles
//              (high row locality, like a streaming benchmark)
//   random     a new random row on every access, banks revisited every
//              ~15-30 cycles (low locality)
// Checks, each on the unit's own responses:
//   Intel-adaptive-HAPPY, streaming: the reported timeout grows past the
//     revisit gap and the hit rate of the last quarter beats the first.
//   Intel-adaptive-HAPPY, random: the timeout shrinks below its reset value
//     (38 cycles) and conflicts in the last quarter are fewer than in the first.
//   Hybrid-HAPPY: streaming ends with open-page decisions, random with
//     close-page decisions.
// The first quarter/last quarter comparisons follow from the adaptation rules
// alone; exact numbers are not checked here (the end-to-end test does that).
module tb_workload_adaptation;
  import happy_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  policy_e     policy;
  logic        req_valid;
  logic [31:0] req_addr;
  rsp_t        rsp;
  logic [7:0]  pre_req;
  logic        check_pulse;

  happy_page_policy dut (.clk, .rst_n, .policy, .req_valid, .req_addr, .rsp, .pre_req, .check_pulse);

  localparam int NREQ = 16000;
  int hits [4], confs [4], closes [4], to_first, to_last;
  logic [15:0] hot [8];

  task automatic expect_true(string what, logic cond);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
    else $display("ok:   %s", what);
  endtask

  // Addresses are built so that the mapped bank is b: bank field = b ^ row[2:0].
  function automatic logic [31:0] addr_for(logic [15:0] row, int b);
    logic [31:0] a;
    a = $urandom;
    a[31:16] = row;
    a[10:8]  = 3'(b) ^ row[2:0];
    return a;
  endfunction

  task automatic run(policy_e pol, bit streaming);
    rst_n = 0; policy = pol; req_valid = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int q = 0; q < 4; q++) begin hits[q] = 0; confs[q] = 0; closes[q] = 0; end
    for (int b = 0; b < 8; b++) hot[b] = 16'($urandom);
    for (int k = 0; k < NREQ; k++) begin
      int gap, b, q;
      q = k * 4 / NREQ;
      b = streaming ? (k % 8) : $urandom_range(0, 7);
      gap = streaming ? $urandom_range(7, 10) : $urandom_range(1, 3);
      req_valid = 0;
      repeat (gap) @(negedge clk);
      req_valid = 1;
      req_addr  = streaming ? addr_for(hot[b], b) : addr_for(16'($urandom), b);
      @(negedge clk);
      req_valid = 0;
      // rsp now describes the access
      if (rsp.cls == PAGE_HIT)      hits[q]++;
      if (rsp.cls == PAGE_CONFLICT) confs[q]++;
      if (rsp.auto_pre)             closes[q]++;
      if (k == 0)        to_first = int'(rsp.timeout);
      if (k == NREQ - 1) to_last  = int'(rsp.timeout);
    end
    $display("%s %s: hits %0d/%0d/%0d/%0d conflicts %0d/%0d/%0d/%0d closes %0d/%0d/%0d/%0d timeout %0d -> %0d",
      pol.name(), streaming ? "streaming" : "random",
      hits[0], hits[1], hits[2], hits[3], confs[0], confs[1], confs[2], confs[3],
      closes[0], closes[1], closes[2], closes[3], to_first, to_last);
  endtask

  initial begin : watchdog
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    policy = POL_INTEL_HAPPY; req_valid = 0; req_addr = '0;
    run(POL_INTEL_HAPPY, 1'b1);
    expect_true("Intel-HAPPY streaming: timeout grows beyond the ~70-cycle revisit gap", to_last > 70 && to_last > to_first);
    expect_true("Intel-HAPPY streaming: more hits at the end than at the start", hits[3] > hits[0]);
    run(POL_INTEL_HAPPY, 1'b0);
    expect_true("Intel-HAPPY random: timeout shrinks below its reset value", to_last < 38);
    expect_true("Intel-HAPPY random: fewer conflicts at the end than at the start", confs[3] < confs[0]);
    run(POL_HYBRID_HAPPY, 1'b1);
    expect_true("Hybrid-HAPPY streaming: open page at the end", closes[3] == 0 && hits[3] > NREQ / 8);
    run(POL_HYBRID_HAPPY, 1'b0);
    expect_true("Hybrid-HAPPY random: close page at the end", closes[3] > (NREQ / 4) * 9 / 10);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
