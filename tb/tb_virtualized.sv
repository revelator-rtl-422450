// tb_virtualized: the virtualized-system study, run on the whole engine at its default
// parameters (3 tiers, 4 walkers, 8 nodes, 1024-cycle epochs), in the four configurations
// that are compared: plain nested paging (speculation off), Horizontal, Diagonal and Full.
//
// A guest translation is a two-dimensional walk. The guest page-table pages of levels 4..1
// sit at guest-physical pages, and the hypervisor must translate each of them to a host
// frame before the guest walk can go on.
//   * Horizontal: the hypervisor places guest pages in host memory by the tiered hash of
//     the guest-physical page number, with its own key. For each guest page-table step the
//     memory unit sends a MISS_NESTED request with the gPA of the guest PTE, and the engine
//     fetches that PTE's line at each candidate host frame.
//   * Diagonal: the hypervisor places each guest data page by the hash of the guest virtual
//     page number, and loads its key into the process key register. The L2 TLB miss on the
//     guest virtual address then fetches the data line straight away.
//   * Full: both at once.
// A model hypervisor places every page that is touched, at a host utilization of 20%, and
// reports each placement's tier to the engine. Per configuration, 400 guest misses to fresh
// pages are run. Each miss makes four nested requests (Horizontal and Full), one data
// miss, or both. The data miss resolves 40-100 cycles later. Guest page-table pages are
// shared by neighbouring pages, as in a radix table.
//
// Checks, per configuration:
//   * exact: the engine's data and nested fetch counts equal the sums of the masks the
//     testbench's own filter model predicts, and its count of correct data walks equals the
//     count the testbench finds by matching each fetch against the true host frame;
//   * every nested fetch is the guest PTE's line in a hash candidate of its guest page, and
//     every data fetch is a hash candidate of its guest virtual page;
//   * with speculation off, nothing is fetched;
//   * exact: a nested step's true host line is fetched exactly when the tier that placed
//     its table page is among the tiers the filter model keeps at that moment;
//   * the fraction of data misses whose true host line was fetched is within 0.06 of the
//     analytic coverage of the tiers kept (0.96 at 20%).
// Neighbouring guest pages share their table pages, so the 1600 nested steps touch only a
// handful of distinct table pages. Their coverage is therefore set by the tiers those few
// pages landed in, and is often 1.0. No analytic bound is checked for them.
// The four configurations and the two kinds of speculation come from the paper's
// virtualization section. The host utilization, the miss count and the choice to turn off
// the page-table-line candidate are this testbench's own. In these configurations that
// candidate would be a guest table page, which the hypervisor does not place by hash. A
// cycle-count watchdog ends the run with a failure if it stalls.
module tb_virtualized;
  import revelator_pkg::*;
  import city_ref_pkg::*;

  localparam int N = 3, NP = 4, NW = 3, IW = PPN_W - NW;
  localparam int MISSES = 400, U_PCT = 20;
  localparam longint unsigned HYP_KEY = 64'h5eed_0f_a11_c0ffee;

  typedef enum int {CFG_NP, CFG_HORIZONTAL, CFG_DIAGONAL, CFG_FULL} vcfg_e;

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
  vcfg_e vcfg = CFG_NP;

  task automatic fail(string msg);
    failures++;
    if (failures < 20) $display("FAIL %s: %s", vcfg.name(), msg);
  endtask

  // watchdog
  initial begin
    repeat (2000000) @(posedge clk);
    fail("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------------ hypervisor model
  bit  frame_used[int];
  int  host[longint];                   // hashed page number -> host PPN
  int  host_tier[longint];              // ... and the tier that placed it (0 = fallback)
  int  alloc_q[$];

  function automatic bit frame_taken(int ppn);
    if (!frame_used.exists(ppn)) frame_used[ppn] = ($urandom_range(0, 99) < U_PCT);
    return frame_used[ppn];
  endfunction

  function automatic int cand(longint unsigned page, int seed);
    longint unsigned h = city24(page, HYP_KEY, longint'(seed));
    return int'(h[IW-1:0]);     // node 0
  endfunction

  // place a page (a gPPN or, for diagonal placement, a gVPN) by the tiered hash
  task automatic hv_place(longint pg);
    int t = 0, ppn = -1;
    if (host.exists(pg)) return;
    for (int i = 1; i <= N && ppn < 0; i++) begin
      int c = cand(longint'(pg), i);
      if (!frame_taken(c)) begin ppn = c; t = i; end
    end
    while (ppn < 0) begin
      int c = int'($urandom_range(0, (1 << IW) - 1));
      if (!frame_taken(c)) ppn = c;
    end
    frame_used[ppn] = 1;
    host[pg] = ppn;
    host_tier[pg] = t;
    alloc_q.push_back(t);
  endtask

  always @(negedge clk) begin
    os_alloc_valid = 0;
    if (rst_n && alloc_q.size() > 0) begin
      os_alloc_valid = 1;
      os_alloc_tier  = 2'(alloc_q.pop_front());
    end
  end

  // ------------------------------------------------------------------ filter model
  int um[N+1];

  function automatic logic [N-1:0] model_ok();
    int tot = 0;
    logic [N-1:0] r = '0;
    for (int i = 0; i <= N; i++) tot += um[i];
    for (int i = 0; i < N; i++) r[i] = (tot == 0) || (um[i+1] * 256 >= 26 * tot);
    return r;
  endfunction

  // ------------------------------------------------------------------ monitor
  bit     w_busy[NP];
  longint w_vpn[NP];
  int     w_due[NP];
  bit     w_hit[NP];
  int     exp_data = 0, exp_nested = 0, n_correct = 0;
  int     n_nested = 0, n_nested_hit = 0, exp_nested_hit = 0;
  longint cur_gppn;                     // page of the nested request being served
  logic [LINE_W-1:0] cur_true;          // its true host line
  bit     cur_hit, cur_open = 0;
  real    cov_exp_sum = 0.0;            // analytic coverage summed over requests
  real    share[N] = '{0.8, 0.16, 0.032};

  function automatic real kept_share(logic [N-1:0] m);
    real r = 0.0;
    for (int i = 0; i < N; i++) if (m[i]) r += share[i];
    return r;
  endfunction

  always @(posedge clk) if (rst_n) begin
    cyc <= cyc + 1;
    if (sreq_valid && sreq_ready) begin
      automatic int w = int'(sreq.ptw);
      automatic logic [PPN_W-1:0] pg = sreq.line[LINE_W-1 -: PPN_W];
      automatic bit ok = 0;
      checks++;
      if (sreq.kind == SPEC_NESTED_PTE) begin
        for (int i = 1; i <= N; i++) if (pg == PPN_W'(cand(longint'(cur_gppn), i))) ok = 1;
        if (!ok || !cur_open || sreq.line[5:0] != cur_true[5:0])
          fail($sformatf("bad nested fetch %h", sreq.line));
        if (sreq.line == cur_true) cur_hit = 1;
      end else if (sreq.kind == SPEC_DATA) begin
        for (int i = 1; i <= N; i++) if (pg == PPN_W'(cand(longint'(w_vpn[w]), i))) ok = 1;
        if (!ok || !w_busy[w]) fail($sformatf("bad data fetch %h", sreq.line));
        if (w_busy[w] && int'(pg) == host[w_vpn[w]]) w_hit[w] = 1;
      end else fail($sformatf("unexpected %s fetch", sreq.kind.name()));
    end
    if (miss_valid && miss_ready) begin
      automatic logic [N-1:0] m = cfg_spec_en ? model_ok() : '0;
      if (miss_kind == MISS_NESTED) begin
        if (cur_open) begin n_nested++; if (cur_hit) n_nested_hit++; end
        exp_nested += $countones(m);
        cur_gppn = longint'(miss_addr[VA_W-1:PG_OFF_W]);
        cur_true = {PPN_W'(host[cur_gppn]), miss_addr[PG_OFF_W-1:6]};
        cur_hit  = 0;
        cur_open = 1;
        if (host_tier[cur_gppn] > 0 && m[host_tier[cur_gppn] - 1]) exp_nested_hit++;
      end else begin
        automatic int w = int'(miss_ptw);
        exp_data += $countones(m);
        w_busy[w] = 1;
        w_vpn[w]  = longint'(miss_addr[VA_W-1:PG_OFF_W]);
        w_due[w]  = cyc + $urandom_range(40, 100);
        w_hit[w]  = 0;
        cov_exp_sum += kept_share(m);
      end
    end
    if (res_valid) begin
      if (w_hit[int'(res_ptw)]) n_correct++;
      w_busy[int'(res_ptw)] = 0;
    end
    if (os_alloc_valid) um[os_alloc_tier]++;
  end

  always @(negedge clk) begin
    res_valid = 0;
    if (rst_n)
      for (int w = 0; w < NP; w++)
        if (!res_valid && w_busy[w] && cyc >= w_due[w]) begin
          res_valid = 1; res_ptw = PTW_ID_W'(w); res_ppn = PPN_W'(host[w_vpn[w]]);
        end
  end

  assign sreq_ready = 1'b1;
  assign inv_ready  = 1'b1;
  assign hrd_ready  = 1'b1;
  assign hrd_resp_valid = 1'b0;
  assign hrd_resp_data  = '0;
  assign mem_busy   = 1'b0;

  // ------------------------------------------------------------------ driver
  longint gpt[4][longint];              // level -> (gVPN >> 9*level) -> gPPN of that table

  task automatic send(miss_kind_e k, logic [VA_W-1:0] a, int w);
    miss_valid = 1;
    miss_kind  = k;
    miss_addr  = a;
    miss_ptw   = PTW_ID_W'(w);
    @(negedge clk);
    while (!miss_ready) @(negedge clk);
    miss_valid = 0;
  endtask

  task automatic run_cfg(vcfg_e c);
    longint gregion = longint'({$urandom, $urandom}) & 64'hF_FFFF_0000;
    longint gpa_next = longint'({$urandom, $urandom}) & 64'h0_FFFF_0000;
    bit horiz = (c == CFG_HORIZONTAL || c == CFG_FULL || c == CFG_NP);
    bit diag  = (c == CFG_DIAGONAL || c == CFG_FULL || c == CFG_NP);
    int w = 0, n_data = 0, n_steps = 0;
    real cov_n, cov_d, cov_exp;
    vcfg = c;
    cfg_spec_en = (c != CFG_NP);
    frame_used.delete(); host.delete(); host_tier.delete(); alloc_q.delete();
    for (int l = 0; l < 4; l++) gpt[l].delete();
    for (int i = 0; i <= N; i++) um[i] = 0;
    for (int i = 0; i < NP; i++) w_busy[i] = 0;
    exp_data = 0; exp_nested = 0; n_correct = 0; n_nested = 0; n_nested_hit = 0; exp_nested_hit = 0;
    cur_open = 0; cov_exp_sum = 0.0;
    @(negedge clk) rst_n = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int p = 0; p < MISSES; p++) begin
      automatic longint gvpn = gregion + longint'(p) * 64'd3;
      while (w_busy[w]) begin
        w = (w + 1) % NP;
        if (w == 0) @(negedge clk);
      end
      if (horiz) begin
        // guest levels 4..1: the table page holding this gVPN's entry at that level
        for (int l = 3; l >= 0; l--) begin
          automatic longint key = gvpn >> (9 * (l + 1));
          automatic int idx = int'((gvpn >> (9 * l)) & 511);
          if (!gpt[l].exists(key)) begin gpt[l][key] = gpa_next; gpa_next++; end
          hv_place(gpt[l][key]);
          repeat (2) @(negedge clk);       // let the placement report reach the engine
          send(MISS_NESTED, {36'(gpt[l][key]), 12'(idx * 8)}, w);
          n_steps++;
        end
      end
      if (diag) begin
        hv_place(gvpn);
        repeat (2) @(negedge clk);
        send(MISS_DATA, {36'(gvpn), 12'($urandom_range(0, 4095))}, w);
        n_data++;
      end
      w = (w + 1) % NP;
    end
    while (w_busy[0] || w_busy[1] || w_busy[2] || w_busy[3]) @(negedge clk);
    repeat (20) @(negedge clk);
    if (cur_open) begin n_nested++; if (cur_hit) n_nested_hit++; end

    cov_exp = cov_exp_sum / real'(n_data > 0 ? n_data : 1);
    cov_n = real'(n_nested_hit) / real'(n_steps > 0 ? n_steps : 1);
    cov_d = real'(stats.walks_correct) / real'(n_data > 0 ? n_data : 1);
    $display("%-14s: nested steps %0d covered %0.3f, data misses %0d covered %0.3f, fetches per guest miss %0.2f",
             c.name(), n_steps, cov_n, n_data, cov_d,
             real'(stats.spec_data + stats.spec_nested) / real'(MISSES));
    checks++;
    if (stats.spec_data != exp_data) fail($sformatf("data fetches %0d, predicted %0d", stats.spec_data, exp_data));
    checks++;
    if (stats.spec_nested != exp_nested)
      fail($sformatf("nested fetches %0d, predicted %0d", stats.spec_nested, exp_nested));
    checks++;
    if (stats.walks_correct != n_correct)
      fail($sformatf("correct walks %0d, found %0d", stats.walks_correct, n_correct));
    checks++;
    if (stats.nested_reqs != n_steps || stats.data_misses != n_data)
      fail($sformatf("requests %0d/%0d, sent %0d/%0d", stats.nested_reqs, stats.data_misses, n_steps, n_data));
    checks++;
    if (stats.spec_pte != 0) fail("page-table-line candidate with it disabled");
    if (c == CFG_NP) begin
      checks++;
      if (stats.spec_data + stats.spec_nested != 0) fail("speculation with it disabled");
    end else begin
      if (horiz) begin
        checks++;
        if (n_nested_hit != exp_nested_hit)
          fail($sformatf("nested steps covered %0d, predicted %0d", n_nested_hit, exp_nested_hit));
      end
      if (diag) begin
        checks++;
        if (cov_d < cov_exp - 0.06 || cov_d > cov_exp + 0.06)
          fail($sformatf("data coverage %0.3f far from %0.3f", cov_d, cov_exp));
      end
    end
  endtask

  initial begin
    cfg_spec_en = 0; cfg_pte_en = 0; cfg_hint_en = 0;
    cfg_proc_key = HYP_KEY;             // diagonal: the hypervisor's key
    cfg_hyp_key  = HYP_KEY;
    cfg_hint_root = '0;
    miss_valid = 0; miss_kind = MISS_DATA; miss_addr = 0; miss_ptw = 0;
    os_alloc_tier = 0;
    repeat (3) @(negedge clk);
    run_cfg(CFG_NP);
    run_cfg(CFG_HORIZONTAL);
    run_cfg(CFG_DIAGONAL);
    run_cfg(CFG_FULL);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
