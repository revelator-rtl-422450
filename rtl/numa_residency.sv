// numa_residency: per-NUMA-node residency counters and dominant-node selection.
//
// Every resolved translation increments the counter C_n of the node n that holds the data
// (upd_valid/upd_node). The counters form an empirical distribution p_n = C_n / sum C_i.
// dom_node is the node with the largest counter (lowest index on a tie) and dom_strong
// says whether p_dominant >= T_dom, tested without a divider as
// C_dom * T_DEN >= T_NUM * sum (T_dom = T_NUM/T_DEN = 4/5 = 0.8).
// When dom_strong is high the engine speculates only inside the dominant node; otherwise
// it also launches a hint walk. The counters, the argmax and T_dom = 0.8 follow the paper.
// This design's own choices: 16-bit counters, halving all counters when one would
// overflow, and, before any translation has been counted, treating node 0 (the local node)
// as a strong dominant node.
//
// Timing: an update lands at the next clock edge; the outputs are combinational from the
// counters.
module numa_residency #(
  parameter int          NUM_NODES = 8,
  parameter int          CNT_W     = 16,
  parameter int unsigned T_NUM     = 4,
  parameter int unsigned T_DEN     = 5
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              upd_valid,
  input  logic [$clog2(NUM_NODES)-1:0]      upd_node,
  output logic [$clog2(NUM_NODES)-1:0]      dom_node,
  output logic                              dom_strong,
  output logic [NUM_NODES-1:0][CNT_W-1:0]   counts
);

  localparam int NW = $clog2(NUM_NODES);
  localparam int SW = CNT_W + NW + 4;

  logic [NUM_NODES-1:0][CNT_W-1:0] c_q, c_d;
  logic [SW-1:0]                   sum;
  logic [CNT_W-1:0]                c_max;

  always_comb begin
    c_d = c_q;
    if (upd_valid) begin
      if (c_q[upd_node] == {CNT_W{1'b1}})
        for (int n = 0; n < NUM_NODES; n++) c_d[n] = c_q[n] >> 1;
      c_d[upd_node] = c_d[upd_node] + 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) c_q <= '0;
    else        c_q <= c_d;
  end

  always_comb begin
    sum      = '0;
    c_max    = c_q[0];
    dom_node = '0;
    for (int n = 0; n < NUM_NODES; n++) begin
      sum = sum + SW'(c_q[n]);
      if (c_q[n] > c_max) begin
        c_max    = c_q[n];
        dom_node = n[NW-1:0];
      end
    end
    if (sum == '0) dom_strong = 1'b1;
    else           dom_strong = (SW'(c_max) * SW'(T_DEN)) >= (sum * SW'(T_NUM));
  end

  assign counts = c_q;

endmodule
