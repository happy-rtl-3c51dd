// tb_intel_happy: Intel-adaptive-HAPPY against a reference model holding
// 2 x 19 MC/TR pairs. Random mistake reports train the MCs selected by
// train_bits; a short check interval (64 cycles) makes the TRs move; the
// summed timeout for random and recurring addresses, and the period of the
// check pulse, are compared every cycle.
module tb_intel_happy;
  localparam int N = 19, CI = 64;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [N-1:0] q_bits, train_bits;
  logic mc_inc, mc_dec, check;
  logic [8:0] timeout;

  intel_happy #(.N(N), .CHECK_INTERVAL(CI)) dut (
    .clk, .rst_n, .q_bits, .timeout, .train_bits, .mc_inc, .mc_dec, .check);

  int mc [2][N], tr [2][N];
  int cyc, n_checks = 0, to_min = 1000, to_max = 0;
  logic [N-1:0] pool [4];

  initial begin : watchdog
    repeat (60000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    q_bits = '0; train_bits = '0; mc_inc = 0; mc_dec = 0;
    for (int j = 0; j < 2; j++) for (int i = 0; i < N; i++) begin mc[j][i] = 8; tr[j][i] = 2; end
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int p = 0; p < 4; p++) pool[p] = N'($urandom);
    cyc = 1;  // one clock edge has passed since reset was released
    for (int k = 0; k < 40000; k++) begin
      int s, phase;
      logic exp_check;
      @(negedge clk);
      q_bits = ($urandom_range(0, 1) == 1) ? pool[$urandom_range(0, 3)] : N'($urandom);
      phase = (k / 2000) % 2;
      train_bits = ($urandom_range(0, 3) != 0) ? pool[$urandom_range(0, 3)] : N'($urandom);
      mc_inc = (phase == 0) ? ($urandom_range(0, 1) == 0) : 1'b0;
      mc_dec = (phase == 1) ? ($urandom_range(0, 1) == 0) : 1'b0;
      #1;
      s = 0;
      for (int i = 0; i < N; i++) s += tr[q_bits[i]][i];
      exp_check = (cyc % CI == CI - 1);
      checks += 2;
      if (timeout != 9'(s))     begin failures++; $display("timeout %0d exp %0d", timeout, s); end
      if (check != exp_check)   begin failures++; $display("check at cycle %0d", cyc); end
      if (s < to_min) to_min = s;
      if (s > to_max) to_max = s;
      @(posedge clk);
      cyc++;
      if (exp_check) begin
        n_checks++;
        for (int j = 0; j < 2; j++) for (int i = 0; i < N; i++) begin
          if (mc[j][i] >= 12 && tr[j][i] < 15) tr[j][i]++;
          else if (mc[j][i] <= 3 && tr[j][i] > 0) tr[j][i]--;
          mc[j][i] = 8;
        end
      end else begin
        for (int i = 0; i < N; i++) begin
          if (mc_inc && !mc_dec && mc[train_bits[i]][i] < 15) mc[train_bits[i]][i]++;
          if (mc_dec && !mc_inc && mc[train_bits[i]][i] > 0)  mc[train_bits[i]][i]--;
        end
      end
    end
    checks++;
    if (n_checks != (40000 + 1) / CI || to_max <= 38 || to_min >= 38) begin
      failures++; $display("checks=%0d timeout range %0d..%0d", n_checks, to_min, to_max);
    end
    $display("timeout range %0d..%0d", to_min, to_max);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
