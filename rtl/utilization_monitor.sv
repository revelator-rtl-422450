// utilization_monitor: per-tier allocation counters of the speculation degree filter.
//
// The OS reports every page allocation it performs (alloc_valid) together with the tier
// that placed the page: 1..N_TIERS for hash tier H_i, 0 for the conventional fallback.
// The monitor keeps one saturating counter per tier plus one for fallbacks and a running
// total. A tier is kept (tier_ok[i] = 1) while its share of all allocations is at least
// THRESH_Q8/256; tiers below the threshold are dropped from speculation. The comparison is
// count_i * 256 >= THRESH_Q8 * total, so no divider is needed.
// Per-tier counters, the threshold test and the OS as their source follow the paper.
// This design's own choices: the threshold value (0.1), 16-bit counters, halving every
// counter when the total would overflow (so the ratios follow recent behaviour), and
// keeping all tiers while nothing has been counted yet.
//
// Timing: a report updates the counters at the next clock edge; tier_ok is combinational
// from the counters and so reflects a report one cycle after it.
module utilization_monitor #(
  parameter int          N_TIERS   = 3,
  parameter int          CNT_W     = 16,
  parameter int unsigned THRESH_Q8 = 26     // ~0.1 of all allocations
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         alloc_valid,
  input  logic [$clog2(N_TIERS+1)-1:0] alloc_tier,   // 0 = fallback, 1..N = tier
  output logic [N_TIERS-1:0]           tier_ok,
  output logic [N_TIERS:0][CNT_W-1:0]  counts,       // [0] = fallback, [i] = tier i
  output logic [CNT_W+3:0]             total
);

  localparam int TOT_W = CNT_W + 4;

  logic [N_TIERS:0][CNT_W-1:0] cnt_q, cnt_d;
  logic [TOT_W-1:0]            tot_q, tot_d;
  logic                        sat;

  always_comb begin
    cnt_d = cnt_q;
    tot_d = tot_q;
    sat   = 1'b0;
    if (alloc_valid && (int'(alloc_tier) <= N_TIERS)) begin
      sat = (cnt_q[alloc_tier] == {CNT_W{1'b1}});
      if (sat) begin
        tot_d = '0;
        for (int i = 0; i <= N_TIERS; i++) begin
          cnt_d[i] = cnt_q[i] >> 1;
          tot_d    = tot_d + TOT_W'(cnt_d[i]);
        end
      end
      cnt_d[alloc_tier] = cnt_d[alloc_tier] + 1'b1;
      tot_d             = tot_d + 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt_q <= '0;
      tot_q <= '0;
    end else begin
      cnt_q <= cnt_d;
      tot_q <= tot_d;
    end
  end

  always_comb begin
    for (int i = 0; i < N_TIERS; i++) begin
      if (tot_q == '0)
        tier_ok[i] = 1'b1;
      else
        tier_ok[i] = ((TOT_W + 8)'({cnt_q[i+1], 8'd0}) >= (TOT_W + 8)'(THRESH_Q8) * (TOT_W + 8)'(tot_q));
    end
  end

  assign counts = cnt_q;
  assign total  = tot_q;

endmodule
