// tb_numa_spillover: the NUMA spill-over study, run on the whole engine at its default
// parameters (3 tiers, 4 walkers, 8 nodes, 1024-cycle epochs), with hints off and on.
//
// On a multi-node machine the OS places most of a process's pages in its home node, but
// under memory pressure a share of them spills into other nodes. Candidates are formed only
// inside the dominant node, so a spilled page is missed unless the OS hint table says where
// it went. For each spill share s in {0, 10, 30, 50}% this testbench resets the engine and a
// model OS places 800 fresh pages. A page stays in home node 2 with probability 1-s;
// otherwise it goes to one of the other seven nodes, chosen at random. Memory is otherwise
// empty, so every page takes its tier-1 frame. Each placement also sets the page's two
// Bloom-filter bits in the hint table, which a memory model serves with 1-6 cycles of
// latency. The page walks take 40-100 cycles.
//
// Checks, per level and hint setting:
//   * exact: the engine's count of walks with a correct speculation equals the count the
//     testbench finds itself. It does so by matching every speculative request taken before
//     or in the cycle of a walk's resolution against the true frame;
//   * every data fetch is a hash candidate of its page, and every hint fetch is the tier-1
//     candidate in a node other than that of the walk's data fetches;
//   * with hints off, no hint walk starts, and the fraction of correct walks is within 0.05
//     of 1-s;
//   * with hints on:
//     - a home share of at least 0.8 (s = 0 or 10%) keeps the dominant node strong, so hint
//       walks start on at most 5% of the misses, during warm-up only;
//     - below that share (s = 30 or 50%) hint walks start on at least half the misses;
//     - coverage rises by at least half the spilled share over hints off.
// Only one hint walk runs at a time and a hint fetch can arrive after its walk has
// resolved, so hints do not recover every spilled page. The printed table shows how many
// they do.
// The spill shares and the 0.8 dominance threshold come from the paper's NUMA study. The
// home node, the uniform choice of the spill node, the page count and the latencies are
// this testbench's own. A cycle-count watchdog ends the run with a failure if it stalls.
module tb_numa_spillover;
  import revelator_pkg::*;
  import city_ref_pkg::*;

  localparam int N = 3, NP = 4, NN = 8, NW = 3, IW = PPN_W - NW;
  localparam int PAGES = 800, HOME = 2;
  localparam logic [PA_W-1:0] ROOT  = 37'h00_0010_0000;
  localparam logic [PA_W-1:0] GBASE = 37'h00_0020_0000;

  logic clk = 0, rst_n = 0;
  logic cfg_spec_en, cfg_pte_en, cfg_hint_en;
  logic [63:0] cfg_proc_key, cfg_hyp_key;
  logic [PA_W-1:0] cfg_hint_root;
  logic os_alloc_valid;
  logic [1:0] os_alloc_tier;
  logic mem_busy;
  logic miss_valid, miss_ready;
  miss_kind_e miss_kind;
  logic [VA_W-1:0] miss_addr;
  logic [PTW_ID_W-1:0] miss_ptw;
  logic res_valid;
  logic [PTW_ID_W-1:0] res_ptw;
  logic [PPN_W-1:0] res_ppn;
  logic sreq_valid, sreq_ready;
  spec_req_t sreq;
  logic inv_valid, inv_ready;
  logic [LINE_W-1:0] inv_line;
  logic hrd_valid, hrd_ready, hrd_resp_valid;
  logic [PA_W-1:0] hrd_addr;
  logic [BF_BITS-1:0] hrd_resp_data;
  engine_stats_t stats;

  revelator_engine dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cyc = 0;
  int s_pct = 0;

  task automatic fail(string msg);
    failures++;
    if (failures < 20) $display("FAIL s=%0d%% hints=%0d: %s", s_pct, cfg_hint_en, msg);
  endtask

  // watchdog
  initial begin
    repeat (2000000) @(posedge clk);
    fail("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------------ OS model
  int pt[longint];
  logic [BF_BITS-1:0] hmem[int];        // hint table lines, by line address
  int alloc_q[$];

  function automatic int cand(longint unsigned page, longint unsigned key, int seed, int node);
    longint unsigned h = city24(page, key, longint'(seed));
    return (node << IW) | int'(h[IW-1:0]);
  endfunction

  function automatic int bfi(int key, int c);
    return ((key * c) / 8192) % 512;
  endfunction

  task automatic os_place(longint vpn, int node);
    int idx = int'(vpn[22:14]), key = int'(vpn[13:0]);
    int el = int'(ROOT >> 6) + idx / 8;
    int gl = int'((GBASE + PA_W'(idx * NN * 64) + PA_W'(node * 64)) >> 6);
    pt[vpn] = cand(longint'(vpn), cfg_proc_key, 1, node);   // empty memory: tier 1 is free
    alloc_q.push_back(1);
    if (!hmem.exists(el)) hmem[el] = '0;
    hmem[el][(idx % 8) * 64 +: 64] = {1'b1, 26'd0, GBASE + PA_W'(idx * NN * 64)};
    if (!hmem.exists(gl)) hmem[gl] = '0;
    hmem[gl][bfi(key, 32'h9E37)] = 1'b1;
    hmem[gl][bfi(key, 32'h7A5B)] = 1'b1;
  endtask

  always @(negedge clk) begin
    os_alloc_valid = 0;
    if (rst_n && alloc_q.size() > 0) begin
      os_alloc_valid = 1;
      os_alloc_tier  = 2'(alloc_q.pop_front());
    end
  end

  // ------------------------------------------------------------------ walkers
  bit     w_busy[NP];
  longint w_vpn[NP];
  int     w_due[NP];
  bit     w_hit[NP];
  int     w_dnode[NP];                  // node of the walk's data fetches (-1: none yet)
  int     n_correct = 0, n_hint_fetch = 0;

  always @(posedge clk) if (rst_n) begin
    cyc <= cyc + 1;
    // requests first: one taken in the cycle of its walk's resolution still counts
    if (sreq_valid && sreq_ready && sreq.kind inside {SPEC_DATA, SPEC_HINT_DATA}) begin
      automatic int w = int'(sreq.ptw);
      automatic logic [PPN_W-1:0] pg = sreq.line[LINE_W-1 -: PPN_W];
      automatic int nd = int'(pg[PPN_W-1 -: NW]);
      automatic logic [IW-1:0] ix = pg[IW-1:0];
      checks++;
      if (sreq.kind == SPEC_DATA) begin
        automatic bit ok = 0;
        for (int i = 1; i <= N; i++)
          if (ix == IW'(cand(longint'(w_vpn[w]), cfg_proc_key, i, 0))) ok = 1;
        if (!ok || !w_busy[w]) fail($sformatf("bad data fetch %h", sreq.line));
        w_dnode[w] = nd;
      end else begin
        n_hint_fetch++;
        if (ix != IW'(cand(longint'(w_vpn[w]), cfg_proc_key, 1, 0)) || nd == w_dnode[w])
          fail($sformatf("bad hint fetch %h", sreq.line));
      end
      if (w_busy[w] && int'(pg) == pt[w_vpn[w]]) w_hit[w] = 1;
    end
    if (miss_valid && miss_ready) begin
      automatic int w = int'(miss_ptw);
      w_busy[w] = 1;
      w_vpn[w]  = longint'(miss_addr[VA_W-1:PG_OFF_W]);
      w_due[w]  = cyc + $urandom_range(40, 100);
      w_hit[w]  = 0;
      w_dnode[w] = -1;
    end
    if (res_valid) begin
      if (w_hit[int'(res_ptw)]) n_correct++;
      w_busy[int'(res_ptw)] = 0;
    end
  end

  always @(negedge clk) begin
    res_valid = 0;
    if (rst_n)
      for (int w = 0; w < NP; w++)
        if (!res_valid && w_busy[w] && cyc >= w_due[w]) begin
          res_valid = 1; res_ptw = PTW_ID_W'(w); res_ppn = PPN_W'(pt[w_vpn[w]]);
        end
  end

  // ------------------------------------------------------------------ memory
  assign sreq_ready = 1'b1;
  assign inv_ready  = 1'b1;
  assign mem_busy   = 1'b0;

  logic hpend = 0;
  int   hlat;
  logic [PA_W-1:0] haddr;
  always @(posedge clk) begin
    hrd_resp_valid <= 0;
    if (hpend) begin
      if (hlat == 0) begin
        hrd_resp_valid <= 1;
        hrd_resp_data  <= hmem.exists(int'(haddr >> 6)) ? hmem[int'(haddr >> 6)] : '0;
        hpend <= 0;
      end else hlat <= hlat - 1;
    end else if (hrd_valid && hrd_ready) begin
      hpend <= 1; haddr <= hrd_addr; hlat <= $urandom_range(1, 6);
    end
  end
  always @(negedge clk) hrd_ready = !hpend;

  // ------------------------------------------------------------------ one level
  real cov_off[int];

  task automatic run_level(int s, bit hints);
    longint region = longint'({$urandom, $urandom}) & 64'hF_FFFF_0000;
    int w = 0;
    real cov, hw_rate;
    s_pct = s;
    cfg_hint_en = hints;
    pt.delete(); hmem.delete(); alloc_q.delete();
    for (int i = 0; i < NP; i++) w_busy[i] = 0;
    n_correct = 0; n_hint_fetch = 0;
    @(negedge clk) rst_n = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int p = 0; p < PAGES; p++) begin
      automatic longint vpn = region + longint'(p) * 64'd37;   // spread over hint indices
      automatic int node = HOME;
      if ($urandom_range(0, 99) < s) node = (HOME + $urandom_range(1, NN - 1)) % NN;
      os_place(vpn, node);
      while (w_busy[w]) begin
        w = (w + 1) % NP;
        if (w == 0) @(negedge clk);
      end
      miss_valid = 1;
      miss_kind  = MISS_DATA;
      miss_addr  = {36'(vpn), 12'($urandom_range(0, 4095))};
      miss_ptw   = PTW_ID_W'(w);
      @(negedge clk);
      while (!miss_ready) @(negedge clk);
      miss_valid = 0;
      w = (w + 1) % NP;
    end
    while (w_busy[0] || w_busy[1] || w_busy[2] || w_busy[3]) @(negedge clk);
    repeat (20) @(negedge clk);

    cov = real'(stats.walks_correct) / real'(PAGES);
    hw_rate = real'(stats.hint_walks) / real'(PAGES);
    $display("spill %2d%% hints %s: coverage %0.3f, hint walks per miss %0.2f, hint fetches %0d",
             s, hints ? "on " : "off", cov, hw_rate, stats.hint_fetches);
    checks++;
    if (stats.walks_correct != n_correct)
      fail($sformatf("correct walks %0d, found %0d", stats.walks_correct, n_correct));
    checks++;
    if (stats.data_misses != PAGES) fail($sformatf("misses %0d", stats.data_misses));
    checks++;
    if (stats.hint_fetches != n_hint_fetch)
      fail($sformatf("hint fetches %0d, seen %0d", stats.hint_fetches, n_hint_fetch));
    if (!hints) begin
      cov_off[s] = cov;
      checks++;
      if (stats.hint_walks != 0) fail("hint walk with hints off");
      checks++;
      if (cov < 1.0 - s / 100.0 - 0.05 || cov > 1.0 - s / 100.0 + 0.05)
        fail($sformatf("coverage %0.3f far from %0.3f", cov, 1.0 - s / 100.0));
    end else begin
      checks++;
      if (s <= 10 && hw_rate > 0.05) fail($sformatf("strong node, yet %0.2f hint walks per miss", hw_rate));
      if (s > 20) begin
        checks++;
        if (hw_rate < 0.5) fail($sformatf("weak node, only %0.2f hint walks per miss", hw_rate));
        checks++;
        if (cov < cov_off[s] + s / 200.0)
          fail($sformatf("hints raise coverage only from %0.3f to %0.3f", cov_off[s], cov));
      end
    end
  endtask

  initial begin
    cfg_spec_en = 1; cfg_pte_en = 1; cfg_hint_en = 0;
    cfg_proc_key = 64'h0fed_cba9_8765_4321; cfg_hyp_key = 64'h0;
    cfg_hint_root = ROOT;
    miss_valid = 0; miss_kind = MISS_DATA; miss_addr = 0; miss_ptw = 0;
    os_alloc_tier = 0; hrd_resp_data = '0;
    repeat (3) @(negedge clk);
    run_level( 0, 0); run_level( 0, 1);
    run_level(10, 0); run_level(10, 1);
    run_level(30, 0); run_level(30, 1);
    run_level(50, 0); run_level(50, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
