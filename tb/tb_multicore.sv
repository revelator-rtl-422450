// tb_multicore: the multicore study, with 4, 8 and 16 cores. Each core has its own engine
// at default parameters (3 tiers, 4 walkers, 8 nodes, 1024-cycle epochs), and all cores
// share one memory channel.
//
// Each core runs its own process with its own hash key and address region. A shared model
// OS places each core's pages in one physical memory at 30% utilization. Every core
// streams misses to fresh pages, which its walkers resolve 40-100 cycles later. All
// speculative fetches, plus one demand line per miss, go into a single channel queue that
// serves one line every 2 cycles. The channel's busy signal (queue not empty) goes to
// every engine's bandwidth monitor. Adding cores raises the load, so the monitors cut the
// speculation degree and fewer fetches are issued per miss.
//
// Checks, per core count:
//   * exact, per core: the engine's count of walks with a correct speculation equals the
//     count the testbench finds by matching that core's fetches against the true frame,
//     and every data fetch is a hash candidate of its page under that core's key;
//   * every active core finished its misses;
//   * speculation accuracy (correct walks over walks that speculated) stays at least 0.65
//     at every core count. Tier 1 is always fetched first, so even at degree 1 a walk is
//     right whenever its page took tier 1, which is 1-u = 0.7 of pages; 0.05 is left for
//     sampling noise;
//   * with 16 cores the degree is cut on some misses.
// The core counts and the accuracy measure come from the paper's multicore study. The
// channel model, the demand traffic, the utilization and the miss counts are this
// testbench's own. A cycle-count watchdog ends the run with a failure if it stalls.
module tb_multicore;
  import revelator_pkg::*;
  import city_ref_pkg::*;

  localparam int MAXC = 16, N = 3, NP = 4, NW = 3, IW = PPN_W - NW;
  localparam int MISSES = 150, U_PCT = 30, SVC = 2;

  logic clk = 0, rst_n = 0;
  logic mem_busy;

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cyc = 0;
  int n_cores = 0;

  task automatic fail(string msg);
    failures++;
    if (failures < 20) $display("FAIL cores=%0d: %s", n_cores, msg);
  endtask

  // watchdog
  initial begin
    repeat (2000000) @(posedge clk);
    fail("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------------ shared OS model
  bit frame_used[int];
  int pt[longint];                      // {core, VPN} -> PPN

  function automatic bit frame_taken(int ppn);
    if (!frame_used.exists(ppn)) frame_used[ppn] = ($urandom_range(0, 99) < U_PCT);
    return frame_used[ppn];
  endfunction

  function automatic longint unsigned core_key(int c);
    return 64'h3c6e_f372_fe94_f82b ^ (longint'(c) << 8);
  endfunction

  function automatic int cand(longint unsigned page, int c, int seed);
    longint unsigned h = city24(page, core_key(c), longint'(seed));
    return int'(h[IW-1:0]);     // node 0
  endfunction

  // ------------------------------------------------------------------ shared channel
  int chan_q = 0;                       // lines waiting in the channel
  int chan_add[MAXC];                   // lines each core adds this cycle
  always @(posedge clk) begin
    automatic int add = 0;
    for (int c = 0; c < MAXC; c++) add += chan_add[c];
    if (!rst_n) chan_q <= 0;
    else chan_q <= chan_q + add - (((cyc % SVC) == 0 && chan_q > 0) ? 1 : 0);
    if (rst_n) cyc <= cyc + 1;
  end
  always @(negedge clk) mem_busy = (chan_q > 0);

  // ------------------------------------------------------------------ per-core results
  event go;
  bit   done[MAXC];
  int   r_correct[MAXC], r_found[MAXC], r_spec[MAXC], r_fetch[MAXC], r_cuts[MAXC];

  for (genvar g = 0; g < MAXC; g++) begin : g_core
    logic cfg_spec_en, cfg_pte_en, cfg_hint_en;
    logic [63:0] cfg_proc_key, cfg_hyp_key;
    logic [PA_W-1:0] cfg_hint_root;
    logic os_alloc_valid;
    logic [1:0] os_alloc_tier;
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

    revelator_engine u_eng (.*);

    assign cfg_spec_en = 1'b1;
    assign cfg_pte_en  = 1'b1;
    assign cfg_hint_en = 1'b0;
    assign cfg_proc_key = core_key(g);
    assign cfg_hyp_key  = '0;
    assign cfg_hint_root = '0;
    assign sreq_ready = 1'b1;
    assign inv_ready  = 1'b1;
    assign hrd_ready  = 1'b1;
    assign hrd_resp_valid = 1'b0;
    assign hrd_resp_data  = '0;

    int     alloc_q[$];
    bit     w_busy[NP];
    longint w_vpn[NP];
    int     w_due[NP];
    bit     w_hit[NP];
    int     found;

    always @(negedge clk) begin
      os_alloc_valid = 0;
      if (rst_n && alloc_q.size() > 0) begin
        os_alloc_valid = 1;
        os_alloc_tier  = 2'(alloc_q.pop_front());
      end
    end

    always @(posedge clk) begin
      chan_add[g] <= (sreq_valid && sreq_ready ? 1 : 0) + (miss_valid && miss_ready ? 1 : 0);
      if (rst_n) begin
        if (sreq_valid && sreq_ready && sreq.kind == SPEC_DATA) begin
          automatic int w = int'(sreq.ptw);
          automatic logic [PPN_W-1:0] pg = sreq.line[LINE_W-1 -: PPN_W];
          automatic bit ok = 0;
          checks++;
          for (int i = 1; i <= N; i++) if (pg == PPN_W'(cand(longint'(w_vpn[w]), g, i))) ok = 1;
          if (!ok || !w_busy[w]) fail($sformatf("core %0d: bad data fetch %h", g, sreq.line));
          if (w_busy[w] && int'(pg) == pt[(longint'(g) << 40) | w_vpn[w]]) w_hit[w] = 1;
        end
        if (miss_valid && miss_ready) begin
          automatic int w = int'(miss_ptw);
          w_busy[w] = 1;
          w_vpn[w]  = longint'(miss_addr[VA_W-1:PG_OFF_W]);
          w_due[w]  = cyc + $urandom_range(40, 100);
          w_hit[w]  = 0;
        end
        if (res_valid) begin
          if (w_hit[int'(res_ptw)]) found++;
          w_busy[int'(res_ptw)] = 0;
        end
      end
    end

    always @(negedge clk) begin
      res_valid = 0;
      if (rst_n)
        for (int w = 0; w < NP; w++)
          if (!res_valid && w_busy[w] && cyc >= w_due[w]) begin
            res_valid = 1; res_ptw = PTW_ID_W'(w);
            res_ppn = PPN_W'(pt[(longint'(g) << 40) | w_vpn[w]]);
          end
    end

    task automatic place(longint vpn);
      int t = 0, ppn = -1;
      for (int i = 1; i <= N && ppn < 0; i++) begin
        int c = cand(longint'(vpn), g, i);
        if (!frame_taken(c)) begin ppn = c; t = i; end
      end
      while (ppn < 0) begin
        int c = int'($urandom_range(0, (1 << IW) - 1));
        if (!frame_taken(c)) ppn = c;
      end
      frame_used[ppn] = 1;
      pt[(longint'(g) << 40) | vpn] = ppn;
      alloc_q.push_back(t);
    endtask

    initial begin
      miss_valid = 0; miss_kind = MISS_DATA; miss_addr = 0; miss_ptw = 0;
      os_alloc_tier = 0;
      forever begin
        @go;
        found = 0;
        alloc_q.delete();
        for (int i = 0; i < NP; i++) w_busy[i] = 0;
        if (g < n_cores) begin
          automatic longint region = (longint'({$urandom, $urandom}) & 64'hF_FFFF_0000);
          automatic int w = 0;
          for (int p = 0; p < MISSES; p++) begin
            automatic longint vpn = region + longint'(p);
            place(vpn);
            while (w_busy[w]) begin
              w = (w + 1) % NP;
              if (w == 0) @(negedge clk);
            end
            miss_valid = 1;
            miss_addr  = {36'(vpn), 12'($urandom_range(0, 4095))};
            miss_ptw   = PTW_ID_W'(w);
            @(negedge clk);
            while (!miss_ready) @(negedge clk);
            miss_valid = 0;
            w = (w + 1) % NP;
            repeat ($urandom_range(0, 8)) @(negedge clk);
          end
          while (w_busy[0] || w_busy[1] || w_busy[2] || w_busy[3]) @(negedge clk);
          repeat (20) @(negedge clk);
        end
        r_correct[g] = int'(stats.walks_correct);
        r_spec[g]    = int'(stats.walks_spec);
        r_fetch[g]   = int'(stats.spec_data);
        r_cuts[g]    = int'(stats.degree_cuts);
        r_found[g]   = found;
        if (g < n_cores) begin
          checks++;
          if (stats.data_misses != MISSES) fail($sformatf("core %0d: %0d misses", g, stats.data_misses));
        end
        done[g] = 1;
      end
    end
  end

  // ------------------------------------------------------------------ one core count
  task automatic run(int c);
    int cor = 0, spc = 0, fet = 0, cuts = 0;
    real acc;
    n_cores = c;
    frame_used.delete(); pt.delete();
    for (int i = 0; i < MAXC; i++) done[i] = 0;
    @(negedge clk) rst_n = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    ->go;
    for (int i = 0; i < MAXC; i++) wait (done[i]);
    for (int i = 0; i < c; i++) begin
      checks++;
      if (r_correct[i] != r_found[i])
        fail($sformatf("core %0d: correct walks %0d, found %0d", i, r_correct[i], r_found[i]));
      cor += r_correct[i]; spc += r_spec[i]; fet += r_fetch[i]; cuts += r_cuts[i];
    end
    acc = real'(cor) / real'(spc > 0 ? spc : 1);
    $display("%2d cores: accuracy %0.3f, data fetches per miss %0.2f, misses with the degree cut %0d of %0d",
             c, acc, real'(fet) / real'(c * MISSES), cuts, c * MISSES);
    checks++;
    if (acc < 0.65) fail($sformatf("accuracy %0.3f", acc));
    if (c == MAXC) begin
      checks++;
      if (cuts == 0) fail("the shared channel never cut the degree");
    end
  endtask

  initial begin
    for (int i = 0; i < MAXC; i++) chan_add[i] = 0;
    repeat (3) @(negedge clk);
    run(4);
    run(8);
    run(16);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
