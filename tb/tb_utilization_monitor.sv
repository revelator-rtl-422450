// tb_utilization_monitor: random allocation reports against a counting model.
// Checks the per-tier counters, the total, the keep/drop verdict (share >= 26/256) and,
// with 6-bit counters, the halving of all counters when one saturates. Also replays the
// ratio example of the filter figure: 0.6 / 0.2 / 0.05 -> kept, kept, dropped.
//
// How: one report every other cycle, tiers drawn with skewed probabilities that change
// halfway so that tier 3 crosses the threshold; after every report the outputs are compared
// with the model. The keep/drop rule follows the paper; the threshold value, the fallback counter
// and the halving are this design's choices. A cycle-count watchdog ends the run with a
// failure if it stalls.
module tb_utilization_monitor;
  localparam int N = 3, CW = 6;
  logic clk = 0, rst_n = 0;
  logic alloc_valid;
  logic [1:0] alloc_tier;
  logic [N-1:0] tier_ok;
  logic [N:0][CW-1:0] counts;
  logic [CW+3:0] total;
  int checks = 0, failures = 0;
  int m[N+1];

  utilization_monitor #(.N_TIERS(N), .CNT_W(CW), .THRESH_Q8(26)) dut (.*);

  always #5 clk = ~clk;

  // watchdog
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_state(string tag);
    int tot = 0;
    for (int i = 0; i <= N; i++) begin
      tot += m[i];
      checks++;
      if (int'(counts[i]) != m[i]) begin failures++; $display("%s cnt[%0d] %0d != %0d", tag, i, counts[i], m[i]); end
    end
    checks++;
    if (int'(total) != tot) begin failures++; $display("%s total %0d != %0d", tag, total, tot); end
    for (int i = 0; i < N; i++) begin
      automatic bit exp = (tot == 0) ? 1'b1 : (real'(m[i+1]) / real'(tot) >= 26.0 / 256.0);
      checks++;
      if (tier_ok[i] != exp) begin failures++; $display("%s ok[%0d] %0b != %0b", tag, i, tier_ok[i], exp); end
    end
  endtask

  task automatic report(int t);
    @(negedge clk);
    alloc_valid = 1; alloc_tier = 2'(t);
    if (m[t] == (1 << CW) - 1) for (int i = 0; i <= N; i++) m[i] = m[i] / 2;
    m[t]++;
    @(negedge clk);
    alloc_valid = 0;
  endtask

  initial begin
    alloc_valid = 0; alloc_tier = 0;
    for (int i = 0; i <= N; i++) m[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check_state("reset");
    // figure example: 12 H1, 4 H2, 1 H3, 3 fallback (0.6 / 0.2 / 0.05)
    repeat (12) report(1);
    repeat (4) report(2);
    report(3);
    repeat (3) report(0);
    check_state("figure");
    checks++;
    if (tier_ok != 3'b011) begin failures++; $display("figure verdict %b", tier_ok); end
    // random reports, biased toward the early tiers, through several saturations
    for (int n = 0; n < 600; n++) begin
      automatic int r = $urandom_range(0, 99);
      // tier 3 is rare in the first half and common in the second, so it crosses the threshold
      if (n < 300) report(r < 50 ? 1 : r < 70 ? 2 : r < 76 ? 3 : 0);
      else         report(r < 40 ? 1 : r < 55 ? 2 : r < 80 ? 3 : 0);
      check_state("random");
    end
    checks++;
    if (n_drop3 == 0 || n_keep3 == 0) begin failures++; $display("tier 3 never crossed the threshold"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int n_drop3 = 0, n_keep3 = 0;
  always @(posedge clk) if (rst_n && alloc_valid) begin
    if (tier_ok[2]) n_keep3++; else n_drop3++;
  end
endmodule
