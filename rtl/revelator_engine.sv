// revelator_engine: the hash-based speculative address translation engine (top level).
//
// The OS places each data page at the first free frame among N_TIERS hash candidates
// PPN_i = CityHash(VPN, key, seed_i), and each last-level page-table frame at
// CityHash(VPN>>9, key, seed_1). This engine sits in the MMU beside the page-table walkers
// and turns that placement into early memory accesses. On an L2 TLB miss it:
//   1. recomputes, in parallel hash units (2 cycles), the N_TIERS data candidates and the
//      page-table-frame candidate for the missing VPN;
//   2. asks the speculation degree filter which tier candidates to fetch (tiers that place
//      too few pages are dropped, and the remaining list is cut to what the memory
//      bandwidth allows);
//   3. issues the candidate PTE line, then the kept data candidates in tier order, on the
//      speculative request port (data fills go only to the private L2);
//   4. records every issued data candidate in the walker's log; when the walker resolves
//      the translation, wrong candidates are invalidated and a correct one is counted.
// NUMA: candidates are formed inside the dominant node given by the residency counters.
// When no node reaches 80% of the resolved translations, a hint walk over the OS Bloom-filter
// table runs in parallel and, if it names another node, one extra data fetch is issued for
// the tier-1 candidate inside that node.
// Virtualization: a MISS_NESTED request carries the gPA of a guest page-table entry reached
// by the nested walk; its candidates are hashed from the guest PPN with the hypervisor key
// (horizontal speculation) and fetched as nested-PTE lines. Diagonal speculation needs no
// extra hardware: the hypervisor loads its own key into cfg_proc_key and the engine hashes
// the guest virtual address on a data miss.
//
// Paper: the tiered candidates, the single-hash PT-frame candidate, the degree filter with its
// two monitors, tier-order issue, the per-walker log with cleanup, the residency counters
// with T_dom = 0.8 and the hint walk. This design's own choices: one request in flight in
// the engine at a time, PTE line issued before the data lines, the node bits being the top
// bits of the PPN (equal-size nodes), reducing a hash to its low bits, seed_i = i, the
// port protocols, and the extra hint fetch using the tier-1 candidate.
//
// Timing: a request is accepted in IDLE when its walker's log is free; the hash results are
// ready 2 cycles later; the first speculative request is presented in the cycle after
// that (3 cycles after acceptance) and one more follows in each cycle sreq_ready is high.
// The engine accepts its next request in the cycle after its last request is handed over.
//
// Lint note: the protocol assertions at the end sample rst_n on the clock (disable iff)
// while the flip-flops use it as an asynchronous reset; the resulting "flopped as both
// synchronous and async" warning concerns only those checkers, not the synthesized logic.
module revelator_engine
  import revelator_pkg::*;
#(
  parameter int          N_TIERS   = 3,     // number of hash tiers (paper: 3 hashes)
  parameter int          NUM_PTW   = 4,     // page-table walkers
  parameter int          NUM_NODES = 8,     // NUMA nodes (paper's NUMA system: 8)
  parameter int          MAX_DEG   = 4,     // largest speculation degree (paper figure: 0..4)
  parameter int          CNT_W     = 16,
  parameter int unsigned THRESH_Q8 = 26,    // tier drop threshold, x/256
  parameter int          EPOCH     = 1024   // bandwidth-monitor epoch in cycles
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // configuration written by the OS / hypervisor
  input  logic                         cfg_spec_en,
  input  logic                         cfg_pte_en,
  input  logic                         cfg_hint_en,
  input  logic [63:0]                  cfg_proc_key,
  input  logic [63:0]                  cfg_hyp_key,
  input  logic [PA_W-1:0]              cfg_hint_root,
  // OS allocation report: tier that placed a page (0 = fallback)
  input  logic                         os_alloc_valid,
  input  logic [$clog2(N_TIERS+1)-1:0] os_alloc_tier,
  // memory-channel contention
  input  logic                         mem_busy,
  // translation requests (L2 TLB miss or nested-walk step)
  input  logic                         miss_valid,
  output logic                         miss_ready,
  input  miss_kind_e                   miss_kind,
  input  logic [VA_W-1:0]              miss_addr,
  input  logic [PTW_ID_W-1:0]          miss_ptw,
  // walk resolution
  input  logic                         res_valid,
  input  logic [PTW_ID_W-1:0]          res_ptw,
  input  logic [PPN_W-1:0]             res_ppn,
  // speculative requests to the memory hierarchy
  output logic                         sreq_valid,
  input  logic                         sreq_ready,
  output spec_req_t                    sreq,
  // invalidation of wrong speculative lines
  output logic                         inv_valid,
  input  logic                         inv_ready,
  output logic [LINE_W-1:0]            inv_line,
  // hint-table reads
  output logic                         hrd_valid,
  input  logic                         hrd_ready,
  output logic [PA_W-1:0]              hrd_addr,
  input  logic                         hrd_resp_valid,
  input  logic [BF_BITS-1:0]           hrd_resp_data,
  // statistics
  output engine_stats_t                stats
);

  localparam int NW      = $clog2(NUM_NODES);
  localparam int INTRA_W = PPN_W - NW;
  localparam int NC      = N_TIERS + 1;       // candidate slots: [0] = PTE, [i] = tier i
  localparam int DW      = $clog2(MAX_DEG + 1);
  localparam int PW      = $clog2(NUM_PTW);

  typedef enum logic [1:0] {E_IDLE, E_HASH, E_ISSUE} estate_e;

  // ---------------------------------------------------------------- request state
  estate_e             state_q;
  miss_kind_e          kind_q;
  logic [VA_W-1:0]     addr_q;
  logic [PTW_ID_W-1:0] ptw_q;
  logic [N_TIERS-1:0]  mask_q;
  logic [NW-1:0]       node_q;
  logic [NC-1:0]       slot_v_q;
  logic [NC-1:0][LINE_W-1:0] slot_line_q;

  logic [VPN_W-1:0]    vpn;
  logic [PG_OFF_W-1:0] pg_off;
  logic                accept;
  logic [NUM_PTW-1:0]  log_busy;

  assign vpn    = addr_q[VA_W-1:PG_OFF_W];
  assign pg_off = addr_q[PG_OFF_W-1:0];

  // ---------------------------------------------------------------- degree filter
  logic [N_TIERS-1:0] issue_mask, tier_ok;
  logic [DW-1:0]      allowed_degree;

  degree_filter #(
    .N_TIERS  (N_TIERS),
    .MAX_DEG  (MAX_DEG),
    .CNT_W    (CNT_W),
    .THRESH_Q8(THRESH_Q8),
    .EPOCH    (EPOCH)
  ) u_filter (
    .clk           (clk),
    .rst_n         (rst_n),
    .alloc_valid   (os_alloc_valid),
    .alloc_tier    (os_alloc_tier),
    .mem_busy      (mem_busy),
    .issue_mask    (issue_mask),
    .tier_ok       (tier_ok),
    .allowed_degree(allowed_degree)
  );

  // ---------------------------------------------------------------- NUMA residency
  logic [NW-1:0]                  dom_node;
  logic                           dom_strong;
  logic [NUM_NODES-1:0][CNT_W-1:0] node_counts;

  numa_residency #(
    .NUM_NODES(NUM_NODES),
    .CNT_W    (CNT_W)
  ) u_numa (
    .clk       (clk),
    .rst_n     (rst_n),
    .upd_valid (res_valid),
    .upd_node  (res_ppn[PPN_W-1 -: NW]),
    .dom_node  (dom_node),
    .dom_strong(dom_strong),
    .counts    (node_counts)
  );

  // ---------------------------------------------------------------- hash units
  logic [NC-1:0]        h_out_v;
  logic [NC-1:0][63:0]  h_out;
  logic [VA_W-1:0]      in_addr;
  logic [63:0]          in_page;     // page number hashed for the data/nested candidates

  assign in_addr = miss_addr;
  assign in_page = 64'(in_addr[VA_W-1:PG_OFF_W]);

  for (genvar g = 0; g < NC; g++) begin : g_hash
    logic [63:0] w0, w1, w2;
    if (g == 0) begin : g_pt
      // last-level page-table frame: H_1(VPN >> 9)
      assign w0 = in_page >> PTE_IDX_W;
      assign w1 = cfg_proc_key;
      assign w2 = 64'd1;
    end else begin : g_tier
      assign w0 = in_page;
      assign w1 = (miss_kind == MISS_NESTED) ? cfg_hyp_key : cfg_proc_key;
      assign w2 = 64'(g);
    end
    city_hash u_hash (
      .clk      (clk),
      .rst_n    (rst_n),
      .in_valid (accept),
      .word0    (w0),
      .word1    (w1),
      .word2    (w2),
      .out_valid(h_out_v[g]),
      .hash     (h_out[g])
    );
  end

  // ---------------------------------------------------------------- hint walk
  logic          hw_start, hw_ready, hw_done, hw_hit;
  logic [NW-1:0] hw_node;
  logic          hctx_v_q, hctx_cand_q, hx_pend_q;
  logic [PTW_ID_W-1:0] hctx_ptw_q;
  logic [PG_OFF_W-1:0] hctx_off_q;
  logic [INTRA_W-1:0]  hctx_intra_q;
  logic [LINE_W-1:0]   hx_line_q;
  logic                hx_fire;

  assign hw_start = accept && (miss_kind == MISS_DATA) && cfg_spec_en && cfg_hint_en &&
                    !dom_strong && hw_ready && !hctx_v_q;

  hint_walker #(
    .NUM_NODES(NUM_NODES)
  ) u_hint (
    .clk          (clk),
    .rst_n        (rst_n),
    .start_valid  (hw_start),
    .start_ready  (hw_ready),
    .start_vpn    (in_addr[VA_W-1:PG_OFF_W]),
    .start_dom    (dom_node),
    .root         (cfg_hint_root),
    .rd_valid     (hrd_valid),
    .rd_ready     (hrd_ready),
    .rd_addr      (hrd_addr),
    .rd_resp_valid(hrd_resp_valid),
    .rd_resp_data (hrd_resp_data),
    .done         (hw_done),
    .done_hit     (hw_hit),
    .done_node    (hw_node)
  );

  // ---------------------------------------------------------------- speculative fetch log
  logic rec_valid, lg_hit, lg_spec;
  logic open_valid;

  assign open_valid = accept && (miss_kind == MISS_DATA);

  spec_log #(
    .NUM_PTW(NUM_PTW),
    .SLOTS  (N_TIERS + 1)
  ) u_log (
    .clk       (clk),
    .rst_n     (rst_n),
    .open_valid(open_valid),
    .open_ptw  (miss_ptw),
    .rec_valid (rec_valid),
    .rec_ptw   (sreq.ptw),
    .rec_line  (sreq.line),
    .res_valid (res_valid),
    .res_ptw   (res_ptw),
    .res_ppn   (res_ppn),
    .res_hit   (lg_hit),
    .res_spec  (lg_spec),
    .inv_valid (inv_valid),
    .inv_ready (inv_ready),
    .inv_line  (inv_line),
    .busy      (log_busy)
  );

  // ---------------------------------------------------------------- request acceptance
  logic walker_free;
  always_comb begin
    walker_free = 1'b1;
    if (miss_kind == MISS_DATA)
      walker_free = !log_busy[miss_ptw[PW-1:0]] && !(hctx_v_q && (hctx_ptw_q == miss_ptw));
  end
  assign miss_ready = (state_q == E_IDLE) && walker_free;
  assign accept     = miss_valid && miss_ready;

  // ---------------------------------------------------------------- candidate lines
  logic [NC-1:0][LINE_W-1:0] cand_line;
  logic [NC-1:0]             cand_v;
  always_comb begin
    logic [PA_W-1:0] pa;
    for (int c = 0; c < NC; c++) begin
      if (c == 0) begin
        pa     = {node_q, h_out[c][INTRA_W-1:0], vpn[PTE_IDX_W-1:0], 3'b000};
        cand_v[c] = (kind_q == MISS_DATA) && cfg_pte_en;
      end else begin
        pa     = {node_q, h_out[c][INTRA_W-1:0], pg_off};
        cand_v[c] = mask_q[c-1];
      end
      cand_line[c] = pa[PA_W-1:LINE_OFF_W];
    end
  end

  // ---------------------------------------------------------------- request issue
  logic          slot_found;
  logic [$clog2(NC)-1:0] slot_sel;
  always_comb begin
    slot_found = 1'b0;
    slot_sel   = '0;
    for (int c = 0; c < NC; c++)
      if (!slot_found && slot_v_q[c]) begin
        slot_found = 1'b1;
        slot_sel   = c[$clog2(NC)-1:0];
      end
  end

  logic main_req;
  logic hx_held_q;      // the hint fetch was presented and not yet taken: keep it
  assign main_req = (state_q == E_ISSUE) && slot_found;

  always_comb begin
    sreq_valid = 1'b0;
    sreq       = '0;
    hx_fire    = 1'b0;
    if (main_req && !hx_held_q) begin
      sreq_valid = 1'b1;
      sreq.line  = slot_line_q[slot_sel];
      sreq.ptw   = ptw_q;
      if (kind_q == MISS_NESTED) sreq.kind = SPEC_NESTED_PTE;
      else if (slot_sel == '0)   sreq.kind = SPEC_PTE;
      else                       sreq.kind = SPEC_DATA;
    end else if (hx_pend_q) begin
      sreq_valid = 1'b1;
      sreq.line  = hx_line_q;
      sreq.ptw   = hctx_ptw_q;
      sreq.kind  = SPEC_HINT_DATA;
      hx_fire    = sreq_ready;
    end
  end

  // data and hint candidates are logged for cleanup; PTE lines are page-table data
  assign rec_valid = sreq_valid && sreq_ready &&
                     ((sreq.kind == SPEC_DATA) || (sreq.kind == SPEC_HINT_DATA));

  // ---------------------------------------------------------------- state machine
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q     <= E_IDLE;
      kind_q      <= MISS_DATA;
      addr_q      <= '0;
      ptw_q       <= '0;
      mask_q      <= '0;
      node_q      <= '0;
      slot_v_q    <= '0;
      slot_line_q <= '0;
    end else begin
      unique case (state_q)
        E_IDLE: if (accept) begin
          kind_q  <= miss_kind;
          addr_q  <= miss_addr;
          ptw_q   <= miss_ptw;
          mask_q  <= cfg_spec_en ? issue_mask : '0;
          node_q  <= dom_node;
          state_q <= E_HASH;
        end
        E_HASH: if (h_out_v[0]) begin
          slot_line_q <= cand_line;
          slot_v_q    <= cand_v & {NC{cfg_spec_en}};
          state_q     <= E_ISSUE;
        end
        E_ISSUE: begin
          if (!slot_found) state_q <= E_IDLE;
          else if (sreq_ready) begin
            slot_v_q[slot_sel] <= 1'b0;
            if (slot_v_q == (NC'(1) << slot_sel)) state_q <= E_IDLE;
          end
        end
        default: state_q <= E_IDLE;
      endcase
    end
  end

  // ---------------------------------------------------------------- hint context
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hctx_v_q     <= 1'b0;
      hctx_cand_q  <= 1'b0;
      hctx_ptw_q   <= '0;
      hctx_off_q   <= '0;
      hctx_intra_q <= '0;
      hx_pend_q    <= 1'b0;
      hx_line_q    <= '0;
      hx_held_q    <= 1'b0;
    end else begin
      hx_held_q <= hx_pend_q && sreq_valid && (sreq.kind == SPEC_HINT_DATA) && !sreq_ready;
      if (hw_start) begin
        hctx_v_q    <= 1'b1;
        hctx_cand_q <= 1'b0;
        hctx_ptw_q  <= miss_ptw;
        hctx_off_q  <= miss_addr[PG_OFF_W-1:0];
      end
      // the tier-1 candidate is ready two cycles after the walk started
      if (hctx_v_q && !hctx_cand_q && h_out_v[1]) begin
        hctx_cand_q  <= 1'b1;
        hctx_intra_q <= h_out[1][INTRA_W-1:0];
      end
      if (hw_done) begin
        if (hctx_v_q && hw_hit) begin
          hx_pend_q <= 1'b1;
          hx_line_q <= LINE_W'({hw_node, hctx_intra_q, hctx_off_q} >> LINE_OFF_W);
        end else begin
          hctx_v_q <= 1'b0;
        end
      end
      if (hx_fire) begin
        hx_pend_q <= 1'b0;
        hctx_v_q  <= 1'b0;
      end
      // the walk resolved first: the hint is no longer useful, unless its fetch is
      // already on the request port, in which case it goes out and the log checks it
      if (res_valid && hctx_v_q && (res_ptw == hctx_ptw_q) &&
          !(sreq_valid && (sreq.kind == SPEC_HINT_DATA))) begin
        hx_pend_q <= 1'b0;
        hctx_v_q  <= 1'b0;
      end
    end
  end

  // ---------------------------------------------------------------- statistics
  logic [$clog2(N_TIERS+1)-1:0] n_ok, n_issue;
  always_comb begin
    n_ok    = '0;
    n_issue = '0;
    for (int i = 0; i < N_TIERS; i++) begin
      n_ok    = n_ok + tier_ok[i];
      n_issue = n_issue + issue_mask[i];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      stats <= '0;
    end else begin
      if (accept && miss_kind == MISS_DATA)   stats.data_misses <= stats.data_misses + 1;
      if (accept && miss_kind == MISS_NESTED) stats.nested_reqs <= stats.nested_reqs + 1;
      if (miss_valid && !miss_ready)          stats.miss_stalls <= stats.miss_stalls + 1;
      if (accept && cfg_spec_en && (n_ok != N_TIERS[$clog2(N_TIERS+1)-1:0]))
        stats.tier_drops <= stats.tier_drops + 1;
      if (accept && cfg_spec_en && (n_issue != n_ok))
        stats.degree_cuts <= stats.degree_cuts + 1;
      if (sreq_valid && sreq_ready) begin
        unique case (sreq.kind)
          SPEC_DATA:       stats.spec_data    <= stats.spec_data + 1;
          SPEC_PTE:        stats.spec_pte     <= stats.spec_pte + 1;
          SPEC_NESTED_PTE: stats.spec_nested  <= stats.spec_nested + 1;
          SPEC_HINT_DATA:  stats.hint_fetches <= stats.hint_fetches + 1;
          default: ;
        endcase
      end
      if (hw_start)              stats.hint_walks    <= stats.hint_walks + 1;
      if (lg_spec)               stats.walks_spec    <= stats.walks_spec + 1;
      if (lg_hit)                stats.walks_correct <= stats.walks_correct + 1;
      if (inv_valid && inv_ready) stats.invalidations <= stats.invalidations + 1;
    end
  end

  // ---------------------------------------------------------------- protocol checks
  // A speculative request, once presented, stays stable until it is taken.
  assert property (@(posedge clk) disable iff (!rst_n)
                   sreq_valid && !sreq_ready |=> sreq_valid && $stable(sreq))
    else $error("revelator_engine: speculative request changed before it was taken");
  assert property (@(posedge clk) disable iff (!rst_n)
                   miss_valid |-> int'(miss_ptw) < NUM_PTW)
    else $error("revelator_engine: walker id out of range");

endmodule
