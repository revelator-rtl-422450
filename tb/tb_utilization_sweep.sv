// tb_utilization_sweep: the memory-utilization sweep, run on the whole engine at its
// default parameters (3 tiers, 4 walkers, 8 nodes, 1024-cycle epochs).
//
// The sensitivity study of hash-based placement varies how full memory is, from empty to
// 80% occupied, and shows that the useful number of speculative fetches follows how many
// tiers still succeed. This testbench reproduces that sweep for the hardware side. For each
// utilization u in {0, 20, 40, 60, 80}%, the engine is reset and a model OS places 1200
// fresh pages (a random-access stream: every miss is to a page never seen before), each
// frame being occupied independently with probability u. A page then lands in tier 1 with
// probability (1-u), tier 2 with u(1-u), tier 3 with u^2(1-u), and in the normal allocator
// with u^3.
//
// Checks, per level:
//   * exact: the engine's count of walks with a correct speculation equals the count the
//     testbench predicts from its own filter model and the tier each page was placed in,
//     and the number of data fetches equals the sum of the predicted masks;
//   * statistical: the final tier verdicts match those the analytic shares give (tiers
//     below 26/256 are dropped: at 20% tier 3 holds 3.2%; at 40% its 9.6% is within
//     sampling noise of the threshold and is not checked; with an empty memory tiers 2 and
//     3 never place a page, but the monitor keeps every tier until the first report), and
//     the fraction of walks with a correct speculation is within 0.06 of the analytic
//     coverage, the sum of the shares of the tiers kept (1.00, 0.96, 0.84, 0.784, 0.488).
// There is no contention and hints are off, so the degree filter acts through the
// utilization monitor alone. Fetches per miss are printed next to the fixed 3 that
// unfiltered speculation would issue. The sweep points come from the paper's sensitivity
// study; the independent-occupancy model of a full memory is this testbench's own.
// A cycle-count watchdog ends the run with a failure if it stalls.
module tb_utilization_sweep;
  import revelator_pkg::*;
  import city_ref_pkg::*;

  localparam int N = 3, NP = 4, NW = 3, IW = PPN_W - NW;
  localparam int PAGES = 1200;

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
    if (failures < 20) $display("FAIL u=%0d%%: %s", u_pct, msg);
  endtask

  // watchdog
  initial begin
    repeat (2000000) @(posedge clk);
    fail("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------------ OS model
  int  u_pct = 0;
  bit  frame_used[int];
  int  pt[longint];
  int  pt_tier[longint];
  int  alloc_q[$];

  function automatic bit frame_taken(int ppn);
    if (!frame_used.exists(ppn)) frame_used[ppn] = ($urandom_range(0, 99) < u_pct);
    return frame_used[ppn];
  endfunction

  function automatic int cand(longint unsigned page, longint unsigned key, int seed);
    longint unsigned h = city24(page, key, longint'(seed));
    return int'(h[IW-1:0]);     // node 0
  endfunction

  task automatic os_place(longint vpn);
    int t = 0, ppn = -1;
    for (int i = 1; i <= N && ppn < 0; i++) begin
      int c = cand(longint'(vpn), cfg_proc_key, i);
      if (!frame_taken(c)) begin ppn = c; t = i; end
    end
    while (ppn < 0) begin
      int c = int'($urandom_range(0, (1 << IW) - 1));
      if (!frame_taken(c)) ppn = c;
    end
    frame_used[ppn] = 1;
    pt[vpn] = ppn;
    pt_tier[vpn] = t;
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

  // ------------------------------------------------------------------ walkers and memory
  bit     w_busy[NP];
  longint w_vpn[NP];
  int     w_due[NP];
  int     exp_correct = 0, exp_fetch = 0;

  always @(posedge clk) if (rst_n) begin
    cyc <= cyc + 1;
    if (miss_valid && miss_ready) begin
      automatic longint vpn = longint'(miss_addr[VA_W-1:PG_OFF_W]);
      automatic logic [N-1:0] m = model_ok();   // degree stays 4: no contention
      automatic int t = pt_tier[vpn];
      exp_fetch += $countones(m);
      if (t > 0 && m[t-1]) exp_correct++;
      w_busy[int'(miss_ptw)] = 1;
      w_vpn[int'(miss_ptw)]  = vpn;
      w_due[int'(miss_ptw)]  = cyc + $urandom_range(40, 100);
    end
    if (res_valid) w_busy[int'(res_ptw)] = 0;
    if (os_alloc_valid) um[os_alloc_tier]++;
  end

  always @(negedge clk) begin
    res_valid = 0;
    if (rst_n)
      for (int w = 0; w < NP; w++)
        if (!res_valid && w_busy[w] && cyc >= w_due[w]) begin
          res_valid = 1; res_ptw = PTW_ID_W'(w); res_ppn = PPN_W'(pt[w_vpn[w]]);
        end
  end

  assign sreq_ready = 1'b1;
  assign inv_ready  = 1'b1;
  assign hrd_ready  = 1'b1;
  assign hrd_resp_valid = 1'b0;
  assign hrd_resp_data  = '0;
  assign mem_busy   = 1'b0;

  // ------------------------------------------------------------------ one utilization level
  // care: tiers whose verdict is checked (a share within sampling noise of the threshold
  // is not); the coverage expected is that of the tiers the model itself kept
  task automatic run_level(int u, real share[N], logic [N-1:0] ok_exp, logic [N-1:0] care);
    longint region = longint'({$urandom, $urandom}) & 64'hF_FFFF_0000;
    int w = 0;
    real cov, fpm, cov_exp;
    logic [N-1:0] ok_fin;
    u_pct = u;
    frame_used.delete(); pt.delete(); pt_tier.delete(); alloc_q.delete();
    for (int i = 0; i <= N; i++) um[i] = 0;
    for (int i = 0; i < NP; i++) w_busy[i] = 0;
    exp_correct = 0; exp_fetch = 0;
    @(negedge clk) rst_n = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int p = 0; p < PAGES; p++) begin
      automatic longint vpn = region + longint'(p);
      os_place(vpn);
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

    ok_fin = model_ok();
    cov_exp = 0.0;
    for (int i = 0; i < N; i++) if (ok_fin[i]) cov_exp += share[i];
    cov = real'(stats.walks_correct) / real'(PAGES);
    fpm   = real'(stats.spec_data) / real'(PAGES);
    $display("u=%0d%%: coverage %0.3f (analytic %0.3f), data fetches per miss %0.2f (unfiltered 3), tiers kept %b",
             u, cov, cov_exp, fpm, ok_fin);
    checks++;
    if (stats.walks_correct != exp_correct)
      fail($sformatf("correct walks %0d, predicted %0d", stats.walks_correct, exp_correct));
    checks++;
    if (stats.spec_data != exp_fetch)
      fail($sformatf("data fetches %0d, predicted %0d", stats.spec_data, exp_fetch));
    checks++;
    if (stats.data_misses != PAGES) fail($sformatf("misses %0d", stats.data_misses));
    checks++;
    if ((ok_fin & care) != (ok_exp & care)) fail($sformatf("tiers kept %b, analytic %b", ok_fin, ok_exp));
    checks++;
    if (cov < cov_exp - 0.06 || cov > cov_exp + 0.06)
      fail($sformatf("coverage %0.3f far from %0.3f", cov, cov_exp));
  endtask

  initial begin
    cfg_spec_en = 1; cfg_pte_en = 1; cfg_hint_en = 0;
    cfg_proc_key = 64'h0123_4567_89ab_cdef; cfg_hyp_key = 64'h0;
    cfg_hint_root = '0;
    miss_valid = 0; miss_kind = MISS_DATA; miss_addr = 0; miss_ptw = 0;
    os_alloc_tier = 0;
    repeat (3) @(negedge clk);
    //         u   tier shares (1-u)u^(i-1)     kept     checked (tier 3 is bit 2)
    run_level( 0, '{1.0, 0.0,   0.0},            3'b001, 3'b111);
    run_level(20, '{0.8, 0.16,  0.032},          3'b011, 3'b111);
    run_level(40, '{0.6, 0.24,  0.096},          3'b011, 3'b011);
    run_level(60, '{0.4, 0.24,  0.144},          3'b111, 3'b111);
    run_level(80, '{0.2, 0.16,  0.128},          3'b111, 3'b111);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
