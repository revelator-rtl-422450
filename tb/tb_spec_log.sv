// tb_spec_log: random walks on four walkers against a model of the log.
// Opens walks, records speculative lines (some on the real page), resolves walks and
// drains invalidations with a random ready. Checks that exactly the wrong lines are
// invalidated, that res_hit/res_spec report each resolution, that records after a
// resolution are checked against the page the walk resolved to, and that busy covers
// active walkers and pending invalidations.
//
// Timing: res_hit and res_spec are registered, so they are compared one edge after the
// resolution; invalidations are matched in any order against the expected set. Logging per
// walker and invalidating the wrong lines follow the paper; the valid/ready invalidation
// port and the late-record rule are this design's choices. A cycle-count watchdog ends the
// run with a failure if it stalls.
module tb_spec_log;
  import revelator_pkg::*;
  localparam int NP = 4, NS = 4;
  logic clk = 0, rst_n = 0;
  logic open_valid, rec_valid, res_valid, inv_ready;
  logic [PTW_ID_W-1:0] open_ptw, rec_ptw, res_ptw;
  logic [LINE_W-1:0] rec_line, inv_line;
  logic [PPN_W-1:0] res_ppn;
  logic res_hit, res_spec, inv_valid;
  logic [NP-1:0] busy;
  int checks = 0, failures = 0;

  spec_log dut (.*);   // default sizes: 4 walkers, 4 slots

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // model
  bit                active[NP];
  logic [PPN_W-1:0]  last_ppn[NP] = '{default: '0};
  logic [LINE_W-1:0] lines[NP][$];
  logic [LINE_W-1:0] pend[$];
  int                pend_w[$];
  bit                exp_hit, exp_spec, exp_valid;
  int                n_inv = 0, n_hit = 0, n_drop = 0;

  function automatic int pend_count(int w);
    int c = 0;
    foreach (pend_w[i]) if (pend_w[i] == w) c++;
    return c;
  endfunction

  function automatic bit model_busy(int w);
    if (active[w]) return 1;
    foreach (pend_w[i]) if (pend_w[i] == w) return 1;
    return 0;
  endfunction

  // invalidation scoreboard
  // res_hit/res_spec are registered: compare one edge after the resolution
  bit ev_q, eh_q, es_q;
  always @(posedge clk) if (rst_n) begin
    if (ev_q) begin
      checks++;
      if (res_hit != eh_q || res_spec != es_q) begin
        failures++; $display("resolution flags hit %b/%b spec %b/%b", res_hit, eh_q, res_spec, es_q);
      end
    end
    ev_q <= exp_valid; eh_q <= exp_hit; es_q <= exp_spec;
    if (inv_valid && inv_ready) begin
      automatic int k = -1;
      foreach (pend[i]) if (k < 0 && pend[i] == inv_line) k = i;
      checks++;
      if (k < 0) begin failures++; $display("unexpected invalidation %h", inv_line); end
      else begin pend.delete(k); pend_w.delete(k); n_inv++; end
    end
  end

  initial begin
    open_valid = 0; rec_valid = 0; res_valid = 0; inv_ready = 0;
    open_ptw = 0; rec_ptw = 0; res_ptw = 0; rec_line = 0; res_ppn = 0;
    exp_valid = 0; exp_hit = 0; exp_spec = 0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      automatic int w = $urandom_range(0, NP - 1);
      automatic int act = $urandom_range(0, 9);
      @(negedge clk);
      // busy must match the model (state after the previous edge)
      for (int i = 0; i < NP; i++) begin
        checks++;
        if (busy[i] != model_busy(i)) begin failures++; $display("busy[%0d]=%b model %b", i, busy[i], model_busy(i)); end
      end
      open_valid = 0; rec_valid = 0; res_valid = 0; exp_valid = 0;
      inv_ready = ($urandom_range(0, 2) != 0);
      open_ptw = PTW_ID_W'(w); rec_ptw = PTW_ID_W'(w); res_ptw = PTW_ID_W'(w);
      if (act < 2 && !model_busy(w)) begin
        open_valid = 1;
        active[w] = 1;
        lines[w].delete();
      end else if (act < 7 && lines[w].size() < NS && (active[w] || pend_count(w) < NS - 1)) begin
        rec_valid = 1;
        rec_line = LINE_W'({$urandom, $urandom});
        if (n % 5 == 0) rec_line[LINE_W-1 -: PPN_W] = last_ppn[w];
        if (active[w]) lines[w].push_back(rec_line);
        else begin
          // late record: wrong pages are invalidated at once, if a slot is free
          n_drop++;
          if (rec_line[LINE_W-1 -: PPN_W] != last_ppn[w]) begin
            pend.push_back(rec_line); pend_w.push_back(w);
          end
        end
      end else if (act >= 7 && active[w]) begin
        res_valid = 1;
        // half of the time the real page is one of the logged ones
        if (lines[w].size() > 0 && ($urandom_range(0, 1) != 0))
          res_ppn = lines[w][$urandom_range(0, lines[w].size() - 1)][LINE_W-1 -: PPN_W];
        else
          res_ppn = PPN_W'($urandom);
        exp_valid = 1;
        exp_spec = (lines[w].size() > 0);
        exp_hit = 0;
        foreach (lines[w][i]) begin
          if (lines[w][i][LINE_W-1 -: PPN_W] == res_ppn) exp_hit = 1;
          else begin pend.push_back(lines[w][i]); pend_w.push_back(w); end
        end
        if (exp_hit) n_hit++;
        lines[w].delete();
        active[w] = 0;
        last_ppn[w] = res_ppn;
      end
      // the invalidation handed over at the next edge was removed from the model by the
      // scoreboard only after this point, so the busy check above sees the pre-edge state
    end
    @(negedge clk);
    open_valid = 0; rec_valid = 0; res_valid = 0; inv_ready = 1;
    repeat (40) @(negedge clk);
    exp_valid = 0;
    checks++;
    if (pend.size() != 0 || inv_valid) begin failures++; $display("undrained: %0d", pend.size()); end
    checks++;
    if (n_inv < 100 || n_hit < 50 || n_drop < 10) begin
      failures++; $display("too few events: inv %0d hit %0d drop %0d", n_inv, n_hit, n_drop);
    end
    $display("invalidations %0d hits %0d late records %0d", n_inv, n_hit, n_drop);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
