// bandwidth_monitor: memory-bandwidth side of the speculation degree filter.
//
// The memory controller raises mem_busy in every cycle in which the memory channel is
// contended (for example, its request queue is above a high-water mark). The monitor counts
// busy cycles over a fixed epoch of EPOCH cycles. At the end of each epoch it turns the busy
// fraction into a contention level in 0..MAX_DEG using equal bands of 1/(MAX_DEG+1) and
// publishes allowed_degree = MAX_DEG - level: an idle channel allows the largest degree,
// a saturated one allows none.
// The five degree levels 0..4 follow the paper's figure of the filter. The busy-cycle
// measure, the epoch length and the equal bands are this design's own choices. After reset
// the full degree is allowed.
//
// Timing: allowed_degree changes only at epoch boundaries, one cycle after the last
// cycle of the epoch.
module bandwidth_monitor #(
  parameter int EPOCH   = 1024,
  parameter int MAX_DEG = 4
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         mem_busy,
  output logic [$clog2(MAX_DEG+1)-1:0] allowed_degree,
  output logic                         epoch_end
);

  localparam int CW = $clog2(EPOCH + 1);
  localparam int DW = $clog2(MAX_DEG + 1);
  localparam int PW = CW + DW + 1;

  logic [CW-1:0] cyc_q, busy_q;
  logic [CW-1:0] busy_now;
  logic [PW-1:0] scaled;
  logic [PW-1:0] level;

  assign epoch_end = (cyc_q == CW'(EPOCH - 1));
  assign busy_now  = busy_q + CW'(mem_busy);

  // level = floor(busy * (MAX_DEG+1) / EPOCH), clipped to MAX_DEG
  always_comb begin
    scaled = PW'(busy_now) * PW'(MAX_DEG + 1);
    level  = scaled / PW'(EPOCH);
    if (level > PW'(MAX_DEG)) level = PW'(MAX_DEG);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cyc_q          <= '0;
      busy_q         <= '0;
      allowed_degree <= DW'(MAX_DEG);
    end else if (epoch_end) begin
      cyc_q          <= '0;
      busy_q         <= '0;
      allowed_degree <= DW'(MAX_DEG) - DW'(level);
    end else begin
      cyc_q  <= cyc_q + 1'b1;
      busy_q <= busy_now;
    end
  end

endmodule
