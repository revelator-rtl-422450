// hint_walker: NUMA hint walk over the OS-managed Bloom-filter table.
//
// When no NUMA node clearly dominates, the engine asks this walker whether the missing page
// may live in a node other than the dominant one. The hint table is laid out as in the
// paper's NUMA figure: a 4 KB frame of 512 eight-byte entries indexed by 9 bits of the VPN,
// each pointing to 512-bit Bloom filters that are tested with 14 bits of the VPN.
// This design fixes what the figure leaves open:
//   * the 9 index bits are VPN[22:14] and the 14 key bits VPN[13:0], so one filter covers a
//     64 MB region and one frame covers 32 GB; higher VPN bits alias (a hint may be wrong,
//     which only costs one useless fetch, since the page-table walk stays authoritative);
//   * an entry holds a valid bit (bit 63) and, in its low PA_W bits, the 64-byte aligned
//     address of a group of NUM_NODES filters, the filter of node n at group + 64*n;
//   * a filter is tested with two bit indices h_j = (key * C_j)[21:13], with
//     C_0 = 0x9E37 and C_1 = 0x7A5B; a key is present when both bits are set;
//   * the non-dominant nodes are tested in increasing order and the first hit is returned.
// Each filter is exactly one cache line, so a walk costs one read for the entry plus at most
// NUM_NODES-1 reads for filters.
//
// Interface: start_valid/start_ready launch a walk for start_vpn, excluding start_dom;
// root is the physical address of the hint frame. Reads go out on rd_valid/rd_ready with a
// 64-byte aligned rd_addr, one at a time; the response returns on rd_resp_valid with the
// whole line. done pulses for one cycle with done_hit and done_node.
module hint_walker
  import revelator_pkg::*;
#(
  parameter int NUM_NODES = 8
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         start_valid,
  output logic                         start_ready,
  input  logic [VPN_W-1:0]             start_vpn,
  input  logic [$clog2(NUM_NODES)-1:0] start_dom,
  input  logic [PA_W-1:0]              root,
  output logic                         rd_valid,
  input  logic                         rd_ready,
  output logic [PA_W-1:0]              rd_addr,
  input  logic                         rd_resp_valid,
  input  logic [BF_BITS-1:0]           rd_resp_data,
  output logic                         done,
  output logic                         done_hit,
  output logic [$clog2(NUM_NODES)-1:0] done_node
);

  localparam int NW = $clog2(NUM_NODES);
  localparam logic [15:0] BF_C0 = 16'h9E37;
  localparam logic [15:0] BF_C1 = 16'h7A5B;

  typedef enum logic [2:0] {H_IDLE, H_RD_ENTRY, H_WAIT_ENTRY, H_RD_BF, H_WAIT_BF, H_DONE}
    hstate_e;

  hstate_e                state_q;
  logic [VPN_W-1:0]       vpn_q;
  logic [NW-1:0]          dom_q, node_q;
  logic [PA_W-1:0]        group_q;
  logic                   hit_q;
  logic [HINT_IDX_W-1:0]  idx;
  logic [BF_KEY_W-1:0]    key;
  logic [29:0]            p0, p1;
  logic [8:0]             h0, h1;
  logic [63:0]            entry;
  logic                   bf_hit;

  assign idx   = vpn_q[BF_KEY_W +: HINT_IDX_W];
  assign key   = vpn_q[BF_KEY_W-1:0];
  assign p0    = 30'(key) * 30'(BF_C0);
  assign p1    = 30'(key) * 30'(BF_C1);
  assign h0    = p0[21:13];
  assign h1    = p1[21:13];
  assign entry = rd_resp_data[idx[2:0]*64 +: 64];
  assign bf_hit = rd_resp_data[h0] && rd_resp_data[h1];

  // next node to test after 'n', skipping the dominant one; returns NUM_NODES when done
  function automatic int next_node(input int n, input logic [NW-1:0] dom);
    int m;
    m = n + 1;
    if (m < NUM_NODES && m == int'(dom)) m = m + 1;
    return m;
  endfunction

  assign start_ready = (state_q == H_IDLE);
  assign rd_valid    = (state_q == H_RD_ENTRY) || (state_q == H_RD_BF);
  assign rd_addr     = (state_q == H_RD_ENTRY)
                     ? {root[PA_W-1:PG_OFF_W], idx[8:3], 6'b0}
                     : group_q + (PA_W'(node_q) << LINE_OFF_W);
  assign done        = (state_q == H_DONE);
  assign done_hit    = hit_q;
  assign done_node   = node_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= H_IDLE;
      vpn_q   <= '0;
      dom_q   <= '0;
      node_q  <= '0;
      group_q <= '0;
      hit_q   <= 1'b0;
    end else begin
      unique case (state_q)
        H_IDLE: if (start_valid) begin
          vpn_q   <= start_vpn;
          dom_q   <= start_dom;
          hit_q   <= 1'b0;
          state_q <= H_RD_ENTRY;
        end
        H_RD_ENTRY: if (rd_ready) state_q <= H_WAIT_ENTRY;
        H_WAIT_ENTRY: if (rd_resp_valid) begin
          if (!entry[63]) begin
            state_q <= H_DONE;
          end else begin
            group_q <= {entry[PA_W-1:LINE_OFF_W], 6'b0};
            if (next_node(-1, dom_q) >= NUM_NODES) begin
              state_q <= H_DONE;
            end else begin
              node_q  <= NW'(next_node(-1, dom_q));
              state_q <= H_RD_BF;
            end
          end
        end
        H_RD_BF: if (rd_ready) state_q <= H_WAIT_BF;
        H_WAIT_BF: if (rd_resp_valid) begin
          if (bf_hit) begin
            hit_q   <= 1'b1;
            state_q <= H_DONE;
          end else if (next_node(int'(node_q), dom_q) >= NUM_NODES) begin
            state_q <= H_DONE;
          end else begin
            node_q  <= NW'(next_node(int'(node_q), dom_q));
            state_q <= H_RD_BF;
          end
        end
        H_DONE: state_q <= H_IDLE;
        default: state_q <= H_IDLE;
      endcase
    end
  end

endmodule
