// degree_filter: the speculation degree filter.
//
// Decides which of the N_TIERS hash candidates of a TLB miss become speculative fetches.
// It holds the two monitors of the paper's filter: the utilization monitor drops tiers that
// have placed too small a share of all pages, and the bandwidth monitor sets how many
// candidates the memory system can currently absorb. The filtering result keeps the
// surviving tiers in tier order (H_1 first, the most likely one) and cuts the list after
// allowed_degree entries, e.g. with H_1 and H_2 surviving and degree 1 only H_1 is fetched.
// Keeping the first surviving tiers in tier order is this design's reading of the paper's
// figure and its rule of issuing the most likely candidate first.
//
// Interface: alloc_valid/alloc_tier come from the OS (one report per page allocation,
// tier 0 = fallback); mem_busy comes from the memory controller. issue_mask is
// combinational from the monitors' registered state.
module degree_filter #(
  parameter int          N_TIERS   = 3,
  parameter int          MAX_DEG   = 4,
  parameter int          CNT_W     = 16,
  parameter int unsigned THRESH_Q8 = 26,
  parameter int          EPOCH     = 1024
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         alloc_valid,
  input  logic [$clog2(N_TIERS+1)-1:0] alloc_tier,
  input  logic                         mem_busy,
  output logic [N_TIERS-1:0]           issue_mask,
  output logic [N_TIERS-1:0]           tier_ok,
  output logic [$clog2(MAX_DEG+1)-1:0] allowed_degree
);

  localparam int DW = $clog2(MAX_DEG + 1);

  logic [N_TIERS:0][CNT_W-1:0] counts;
  logic [CNT_W+3:0]            total;
  logic                        epoch_end;

  utilization_monitor #(
    .N_TIERS  (N_TIERS),
    .CNT_W    (CNT_W),
    .THRESH_Q8(THRESH_Q8)
  ) u_util (
    .clk        (clk),
    .rst_n      (rst_n),
    .alloc_valid(alloc_valid),
    .alloc_tier (alloc_tier),
    .tier_ok    (tier_ok),
    .counts     (counts),
    .total      (total)
  );

  bandwidth_monitor #(
    .EPOCH  (EPOCH),
    .MAX_DEG(MAX_DEG)
  ) u_bw (
    .clk           (clk),
    .rst_n         (rst_n),
    .mem_busy      (mem_busy),
    .allowed_degree(allowed_degree),
    .epoch_end     (epoch_end)
  );

  // Keep the first allowed_degree surviving tiers, in tier order.
  always_comb begin
    logic [DW:0] taken;
    taken      = '0;
    issue_mask = '0;
    for (int i = 0; i < N_TIERS; i++) begin
      if (tier_ok[i] && (taken < {1'b0, allowed_degree})) begin
        issue_mask[i] = 1'b1;
        taken         = taken + 1'b1;
      end
    end
  end

endmodule
