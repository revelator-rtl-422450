// tb_revelator_engine: end-to-end test of the speculation engine at its default parameters.
//
// The testbench plays the rest of the system:
//   * an OS model that places every new data page with tiered hash placement (3 tiers,
//     CityHash of VPN, key and seed, node-scoped), falls back to a random frame when all
//     candidates are taken, places last-level page-table frames with the tier-1 hash of
//     VPN>>9, reports each data placement to the engine, and keeps a Bloom-filter hint table;
//     frames are taken with a per-phase probability u (memory utilization);
//   * four page-table walkers that resolve a miss 40..100 cycles after it is accepted;
//   * a memory hierarchy that takes speculative requests, invalidations and hint reads
//     with random back-pressure and answers hint reads from the table;
//   * a contention source (mem_busy) with a per-phase busy rate.
// Its own models of the degree filter, the residency counters and the hash predict, for
// every accepted request, the exact list of speculative lines and their order. It checks
// that list, the 3-cycle request latency, the walker log's verdicts (correct speculations
// and invalidated lines) against the lines actually issued, and that every mechanism
// happened: tier drop, degree cut, degree zero, stall, PTE fetch, correct and wrong
// speculation, fallback placement, weak dominance, hint walk and hint fetch, nested
// (horizontal) speculation and speculation switched off.
module tb_revelator_engine;
  import revelator_pkg::*;
  import city_ref_pkg::*;

  localparam int N = 3, NP = 4, NN = 8, EP = 1024, NW = 3, IW = PPN_W - NW;
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

  task automatic fail(string msg);
    failures++;
    if (failures < 20) $display("FAIL @%0d: %s", cyc, msg);
    // a broken engine fails on every cycle; stop once the verdict is clear
    if (failures >= 200) begin
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    fail("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------------ OS model
  real util_u = 0.2;
  bit  frame_used[int];                 // PPN -> taken (lazily drawn with probability u)
  int  pt[longint];                     // VPN -> PPN
  int  pt_tier[longint];                // VPN -> tier that placed it (0 = fallback)
  logic [BF_BITS-1:0] hmem[int];        // hint table lines, by line address
  int  alloc_q[$];                      // tier reports still to send

  function automatic bit frame_taken(int ppn);
    if (!frame_used.exists(ppn)) frame_used[ppn] = ($urandom_range(0, 9999) < int'(util_u * 10000.0));
    return frame_used[ppn];
  endfunction

  function automatic int cand(longint unsigned page, longint unsigned key, int seed, int node);
    longint unsigned h = city24(page, key, longint'(seed));
    return (node << IW) | int'(h[IW-1:0]);
  endfunction

  function automatic int bfi(int key, int c);
    return ((key * c) / 8192) % 512;
  endfunction

  task automatic hint_set(longint vpn, int node);
    int idx = int'(vpn[22:14]), key = int'(vpn[13:0]);
    int el = int'(ROOT >> 6) + idx / 8;
    int gl = int'((GBASE + PA_W'(idx * NN * 64) + PA_W'(node * 64)) >> 6);
    if (!hmem.exists(el)) hmem[el] = '0;
    hmem[el][(idx % 8) * 64 +: 64] = {1'b1, 26'd0, GBASE + PA_W'(idx * NN * 64)};
    if (!hmem.exists(gl)) hmem[gl] = '0;
    hmem[gl][bfi(key, 32'h9E37)] = 1'b1;
    hmem[gl][bfi(key, 32'h7A5B)] = 1'b1;
  endtask

  int n_fallback = 0;
  task automatic os_place(longint vpn, int node);
    int t = 0, ppn = -1;
    for (int i = 1; i <= N && ppn < 0; i++) begin
      int c = cand(longint'(vpn), cfg_proc_key, i, node);
      if (!frame_taken(c)) begin ppn = c; t = i; end
    end
    while (ppn < 0) begin
      int c = (node << IW) | int'($urandom_range(0, (1 << IW) - 1));
      if (!frame_taken(c)) ppn = c;
    end
    frame_used[ppn] = 1;
    pt[vpn] = ppn;
    pt_tier[vpn] = t;
    if (t == 0) n_fallback++;
    alloc_q.push_back(t);
    hint_set(vpn, node);
  endtask

  // allocation reports go out one per cycle
  always @(negedge clk) begin
    os_alloc_valid = 0;
    if (rst_n && alloc_q.size() > 0) begin
      os_alloc_valid = 1;
      os_alloc_tier  = 2'(alloc_q.pop_front());
    end
  end

  // ------------------------------------------------------------------ filter / NUMA models
  int um[N+1];            // allocation counts by tier
  int busy_cnt = 0, ep_cyc = 0, deg_m = 4;
  int nc[NN];             // residency counts
  real busy_rate = 0.0;

  function automatic logic [N-1:0] model_mask();
    int tot = 0, taken = 0;
    logic [N-1:0] r = '0;
    for (int i = 0; i <= N; i++) tot += um[i];
    for (int i = 0; i < N; i++)
      if (((tot == 0) || (um[i+1] * 256 >= 26 * tot)) && taken < deg_m) begin r[i] = 1; taken++; end
    return r;
  endfunction

  function automatic logic [N-1:0] model_ok();
    int tot = 0;
    logic [N-1:0] r = '0;
    for (int i = 0; i <= N; i++) tot += um[i];
    for (int i = 0; i < N; i++) r[i] = (tot == 0) || (um[i+1] * 256 >= 26 * tot);
    return r;
  endfunction

  function automatic int model_dom(output bit is_strong);
    int best = 0, sum = 0;
    for (int n = 0; n < NN; n++) begin sum += nc[n]; if (nc[n] > nc[best]) best = n; end
    is_strong = (sum == 0) || (nc[best] * 5 >= 4 * sum);
    return best;
  endfunction

  always @(negedge clk) mem_busy = rst_n && ($urandom_range(0, 9999) < int'(busy_rate * 10000.0));

  // ------------------------------------------------------------------ expectations
  typedef struct {
    logic [LINE_W-1:0] line;
    spec_kind_e        kind;
  } exp_t;
  exp_t exp_q[$];                 // lines of the request in the engine, in issue order
  int   acc_cyc = -1;             // cycle of the last acceptance
  bit   first_seen = 1;

  // per walker: what it is resolving and what was issued for it
  bit          w_busy[NP];
  longint      w_vpn[NP];
  int          w_dom[NP];
  int          w_due[NP];
  logic [LINE_W-1:0] w_lines[NP][$];
  logic [LINE_W-1:0] inv_exp[$];

  int exp_correct = 0, exp_spec = 0;
  int n_deg0 = 0, n_weak = 0, n_strong = 0, n_off = 0, n_wrong = 0, n_lat = 0;
  int n_hint_ok = 0, n_late = 0;

  always @(posedge clk) if (rst_n) begin
    cyc <= cyc + 1;
    // ---- speculative requests (checked before this edge's acceptance and resolution)
    if (sreq_valid && !first_seen && acc_cyc >= 0 && sreq.kind != SPEC_HINT_DATA) begin
      first_seen = 1;
      checks++;
      if (cyc - acc_cyc != 3) fail($sformatf("first request %0d cycles after acceptance", cyc - acc_cyc));
      else n_lat++;
    end
    if (sreq_valid && sreq_ready) begin
      automatic int w = int'(sreq.ptw);
      checks++;
      if (sreq.kind == SPEC_HINT_DATA) begin
        // tier-1 candidate of the walker's page inside a non-dominant node
        automatic int c1 = cand(longint'(w_vpn[w]), cfg_proc_key, 1, 0);
        automatic logic [LINE_W-1:0] l = sreq.line;
        if (int'(l[LINE_W-1 -: NW]) == w_dom[w] || l[LINE_W-NW-1 -: IW] != IW'(c1))
          fail($sformatf("bad hint fetch %h", l));
        else n_hint_ok++;
        if (w_busy[w]) w_lines[w].push_back(l);
        else begin
          // late hint fetch: its walk already resolved, so it is checked at once
          n_late++;
          if (l[LINE_W-1 -: PPN_W] != PPN_W'(pt[w_vpn[w]])) begin
            inv_exp.push_back(l); n_wrong++;
          end
        end
      end else if (exp_q.size() == 0) begin
        fail("unexpected speculative request");
      end else begin
        automatic exp_t e = exp_q.pop_front();
        if (e.line != sreq.line || e.kind != sreq.kind)
          fail($sformatf("request %h/%s expected %h/%s", sreq.line, sreq.kind.name(), e.line, e.kind.name()));
        if (sreq.kind == SPEC_DATA) w_lines[w].push_back(sreq.line);
      end
    end
    // ---- acceptance: predict the requests
    if (miss_valid && miss_ready) begin
      automatic bit is_strong;
      automatic int dom = model_dom(is_strong);
      automatic logic [N-1:0] m = model_mask();
      automatic logic [N-1:0] ok = model_ok();
      checks++;
      if (exp_q.size() != 0) fail("previous request not finished");
      exp_q.delete();
      acc_cyc = cyc; first_seen = 0;
      if (!cfg_spec_en) begin n_off++; first_seen = 1; end
      else begin
        if (m == '0) begin n_deg0++; first_seen = (miss_kind == MISS_DATA && cfg_pte_en) ? 0 : 1; end
        if (miss_kind == MISS_DATA) begin
          automatic longint vpn = longint'(miss_addr[VA_W-1:PG_OFF_W]);
          automatic int off = int'(miss_addr[11:0]);
          if (is_strong) n_strong++; else n_weak++;
          if (cfg_pte_en) begin
            automatic int p = cand(longint'(vpn >> 9), cfg_proc_key, 1, dom);
            automatic logic [PA_W-1:0] pa = {PPN_W'(p), 9'(vpn), 3'b0};
            exp_q.push_back('{pa[PA_W-1:6], SPEC_PTE});
          end
          for (int i = 0; i < N; i++) if (m[i]) begin
            automatic int p = cand(longint'(vpn), cfg_proc_key, i + 1, dom);
            automatic logic [PA_W-1:0] pa = {PPN_W'(p), 12'(off)};
            exp_q.push_back('{pa[PA_W-1:6], SPEC_DATA});
          end
        end else begin
          automatic longint gppn = longint'(miss_addr[VA_W-1:PG_OFF_W]);
          automatic int off = int'(miss_addr[11:0]);
          for (int i = 0; i < N; i++) if (m[i]) begin
            automatic int p = cand(longint'(gppn), cfg_hyp_key, i + 1, dom);
            automatic logic [PA_W-1:0] pa = {PPN_W'(p), 12'(off)};
            exp_q.push_back('{pa[PA_W-1:6], SPEC_NESTED_PTE});
          end
        end
      end
      if (miss_kind == MISS_DATA) begin
        automatic int w = int'(miss_ptw);
        automatic bit s2;
        w_busy[w] = 1;
        w_vpn[w]  = longint'(miss_addr[VA_W-1:PG_OFF_W]);
        w_dom[w]  = model_dom(s2);
        w_due[w]  = cyc + $urandom_range(40, 100);
        w_lines[w].delete();
      end
    end
    // ---- resolution: which logged lines were right or wrong
    if (res_valid) begin
      automatic int w = int'(res_ptw);
      automatic bit hit = 0;
      checks++;
      if (!w_busy[w]) fail("resolution of an idle walker");
      foreach (w_lines[w][i]) begin
        if (w_lines[w][i][LINE_W-1 -: PPN_W] == res_ppn) hit = 1;
        else begin inv_exp.push_back(w_lines[w][i]); n_wrong++; end
      end
      if (w_lines[w].size() > 0) exp_spec++;
      if (hit) exp_correct++;
      w_lines[w].delete();
      w_busy[w] = 0;
      nc[int'(res_ppn[PPN_W-1 -: NW])]++;
    end
    // ---- invalidations
    if (inv_valid && inv_ready) begin
      automatic int k = -1;
      foreach (inv_exp[i]) if (k < 0 && inv_exp[i] == inv_line) k = i;
      checks++;
      if (k < 0) fail($sformatf("unexpected invalidation %h", inv_line));
      else inv_exp.delete(k);
    end
    // ---- models advance with this edge
    if (os_alloc_valid) um[os_alloc_tier]++;
    busy_cnt += mem_busy;
    if (ep_cyc == EP - 1) begin
      automatic int lvl = busy_cnt * 5 / EP;
      deg_m = 4 - (lvl > 4 ? 4 : lvl);
      ep_cyc = 0; busy_cnt = 0;
    end else ep_cyc++;
  end

  // ------------------------------------------------------------------ walker resolution
  always @(negedge clk) begin
    res_valid = 0;
    if (rst_n)
      for (int w = 0; w < NP; w++)
        if (!res_valid && w_busy[w] && cyc >= w_due[w]) begin
          res_valid = 1; res_ptw = PTW_ID_W'(w); res_ppn = PPN_W'(pt[w_vpn[w]]);
        end
  end

  // ------------------------------------------------------------------ memory hierarchy
  bit inv_hold = 0;
  always @(negedge clk) begin
    sreq_ready = ($urandom_range(0, 3) != 0);
    inv_ready  = inv_hold ? ($urandom_range(0, 39) == 0) : ($urandom_range(0, 1) != 0);
  end

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

  // ------------------------------------------------------------------ request driver
  longint region;
  int     home = 0;
  real    spill = 0.0;
  int     nested_pct = 0;

  task automatic issue_one();
    int w;
    longint vpn;
    bit nested = ($urandom_range(0, 99) < nested_pct);
    // a walker the testbench considers idle (the engine may still hold it busy)
    do begin
      w = $urandom_range(0, NP - 1);
      if (w_busy[w]) @(negedge clk);
    end while (w_busy[w]);
    vpn = region + longint'($urandom_range(0, 8191));
    if (!nested && !pt.exists(vpn))
      os_place(vpn, ($urandom_range(0, 999) < int'(spill * 1000.0)) ? $urandom_range(0, NN - 1) : home);
    miss_valid = 1;
    miss_kind  = nested ? MISS_NESTED : MISS_DATA;
    miss_addr  = {36'(vpn), 12'($urandom_range(0, 4095))};
    miss_ptw   = PTW_ID_W'(w);
    @(negedge clk);
    while (!miss_ready) @(negedge clk);
    // accepted at the edge just passed
    miss_valid = 0;
    repeat ($urandom_range(0, 3)) @(negedge clk);
  endtask

  task automatic phase(string name, int n, real u, real br, int h, real sp, int np);
    util_u = u; busy_rate = br; home = h; spill = sp; nested_pct = np;
    region = longint'({$urandom, $urandom}) & 64'hF_FFFF_0000 | 64'h4000;
    $display("phase %s", name);
    repeat (n) issue_one();
  endtask

  initial begin
    cfg_spec_en = 1; cfg_pte_en = 1; cfg_hint_en = 1;
    cfg_proc_key = 64'h5eed_1234_abcd_0042; cfg_hyp_key = 64'h0dd_c0ffee_7777;
    cfg_hint_root = ROOT;
    miss_valid = 0; miss_kind = MISS_DATA; miss_addr = 0; miss_ptw = 0;
    os_alloc_tier = 0; hrd_resp_data = '0;
    for (int i = 0; i <= N; i++) um[i] = 0;
    for (int n = 0; n < NN; n++) nc[n] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // nearly empty memory: tiers 2 and 3 place few pages and are dropped
    phase("low-utilization", 250, 0.03, 0.0, 0, 0.0, 0);
    // fuller memory: later tiers and fallbacks become common
    phase("high-utilization", 300, 0.6, 0.0, 0, 0.0, 0);
    // memory contention: the degree is cut, then to zero
    phase("contention", 200, 0.6, 0.65, 0, 0.0, 0);
    phase("saturated", 150, 0.6, 1.0, 0, 0.0, 0);
    // back-pressure on invalidations: walkers stay busy, requests stall
    inv_hold = 1;
    phase("held-invalidations", 60, 0.6, 0.0, 0, 0.0, 0);
    inv_hold = 0;
    // NUMA spill-over: another home node and 45% of pages elsewhere -> hint walks
    phase("numa-spill", 500, 0.3, 0.0, 5, 0.45, 0);
    // virtualized: nested-walk (horizontal) requests mixed in
    phase("nested", 200, 0.3, 0.0, 5, 0.1, 40);
    // speculation switched off
    cfg_spec_en = 0;
    phase("disabled", 40, 0.3, 0.0, 5, 0.1, 0);
    cfg_spec_en = 1;
    // drain
    while (w_busy[0] || w_busy[1] || w_busy[2] || w_busy[3]) @(negedge clk);
    repeat (200) @(negedge clk);

    checks++;
    if (exp_q.size() != 0) fail($sformatf("%0d requests never issued", exp_q.size()));
    checks++;
    if (inv_exp.size() != 0) fail($sformatf("%0d invalidations missing", inv_exp.size()));
    checks++;
    if (stats.walks_correct != exp_correct || stats.walks_spec != exp_spec)
      fail($sformatf("correct %0d/%0d, walks with speculation %0d/%0d",
                     stats.walks_correct, exp_correct, stats.walks_spec, exp_spec));
    checks++;
    if (stats.invalidations != n_wrong) fail($sformatf("invalidations %0d/%0d", stats.invalidations, n_wrong));

    $display("misses %0d nested %0d stalls %0d tier_drops %0d degree_cuts %0d degree0 %0d",
             stats.data_misses, stats.nested_reqs, stats.miss_stalls, stats.tier_drops,
             stats.degree_cuts, n_deg0);
    $display("spec data %0d pte %0d nested %0d hint walks %0d hint fetches %0d",
             stats.spec_data, stats.spec_pte, stats.spec_nested, stats.hint_walks, stats.hint_fetches);
    $display("hint fetches after resolution %0d", n_late);
    $display("walks with speculation %0d correct %0d invalidations %0d fallbacks %0d strong %0d weak %0d off %0d",
             stats.walks_spec, stats.walks_correct, stats.invalidations, n_fallback, n_strong, n_weak, n_off);
    // every mechanism must have happened
    begin
      int ev[string];
      ev["tier drop"] = stats.tier_drops;        ev["degree cut"] = stats.degree_cuts;
      ev["degree zero"] = n_deg0;                ev["stall"] = stats.miss_stalls;
      ev["pte fetch"] = stats.spec_pte;          ev["correct speculation"] = stats.walks_correct;
      ev["invalidation"] = stats.invalidations;  ev["fallback placement"] = n_fallback;
      ev["strong dominance"] = n_strong;         ev["weak dominance"] = n_weak;
      ev["hint walk"] = stats.hint_walks;        ev["hint fetch"] = n_hint_ok;
      ev["nested speculation"] = stats.spec_nested; ev["speculation off"] = n_off;
      ev["3-cycle latency"] = n_lat;
      foreach (ev[k]) begin
        checks++;
        if (ev[k] == 0) fail($sformatf("mechanism never happened: %s", k));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
