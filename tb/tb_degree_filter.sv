// tb_degree_filter: sets the tier shares through allocation reports and the allowed
// degree through epochs of memory contention, then checks the issue mask against the rule
// "first allowed_degree kept tiers in tier order", including the filter figure's example
// (H1 and H2 kept, H3 dropped, degree 1 -> only H1).
//
// How: the testbench keeps its own count of allocations per tier and its own copy of the
// epoch position (the monitor starts counting at the first edge after reset), fills each
// epoch with a chosen number of busy cycles and checks allowed_degree and issue_mask after
// the epoch closes. Epochs are shortened to 40 cycles. The drop-then-cut order follows the
// paper; keeping the first tiers in tier order is this design's reading of it. A
// cycle-count watchdog ends the run with a failure if it stalls.
module tb_degree_filter;
  localparam int N = 3, EP = 40;
  logic clk = 0, rst_n = 0;
  logic alloc_valid, mem_busy;
  logic [1:0] alloc_tier;
  logic [N-1:0] issue_mask, tier_ok;
  logic [2:0] allowed_degree;
  int checks = 0, failures = 0;
  int m[N+1];

  degree_filter #(.N_TIERS(N), .MAX_DEG(4), .CNT_W(16), .THRESH_Q8(26), .EPOCH(EP)) dut (.*);

  always #5 clk = ~clk;

  // watchdog
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // the testbench's own copy of the epoch position: the monitor starts counting at the
  // first rising edge after reset and closes an epoch every EP cycles
  int tcyc = 0;
  always @(posedge clk) if (rst_n) tcyc <= (tcyc == EP - 1) ? 0 : tcyc + 1;
  wire ep_last = (tcyc == EP - 1);

  task automatic report(int t);
    @(negedge clk);
    alloc_valid = 1; alloc_tier = 2'(t); m[t]++;
    @(negedge clk);
    alloc_valid = 0;
  endtask

  // one epoch with b busy cycles
  task automatic epoch(int b);
    // align: the next rising edge is the first cycle of an epoch
    while (!ep_last) @(negedge clk);
    @(negedge clk);
    for (int c = 0; c < EP; c++) begin
      mem_busy = (c < b);
      @(negedge clk);
    end
    mem_busy = 0;
  endtask

  function automatic logic [N-1:0] model_mask(int deg);
    int tot = 0, taken = 0;
    logic [N-1:0] r = '0;
    for (int i = 0; i <= N; i++) tot += m[i];
    for (int i = 0; i < N; i++) begin
      automatic bit ok = (tot == 0) || (m[i+1] * 256 >= 26 * tot);
      if (ok && taken < deg) begin r[i] = 1; taken++; end
    end
    return r;
  endfunction

  task automatic check(string tag, int deg);
    checks++;
    if (allowed_degree != 3'(deg)) begin failures++; $display("%s degree %0d exp %0d", tag, allowed_degree, deg); end
    checks++;
    if (issue_mask != model_mask(deg)) begin
      failures++; $display("%s mask %b exp %b (ok %b)", tag, issue_mask, model_mask(deg), tier_ok);
    end
  endtask

  initial begin
    alloc_valid = 0; alloc_tier = 0; mem_busy = 0;
    for (int i = 0; i <= N; i++) m[i] = 0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    @(negedge clk);
    check("reset", 4);
    checks++;
    if (issue_mask != 3'b111) begin failures++; $display("reset mask %b", issue_mask); end
    // figure: 0.6 / 0.2 / 0.05 with degree 1 -> H1 only
    repeat (12) report(1);
    repeat (4) report(2);
    report(3);
    repeat (3) report(0);
    epoch(24);            // 60% busy -> level 3 -> degree 1
    repeat (EP / 2) @(negedge clk);   // the following idle epoch is not finished yet
    check("figure", 1);
    checks++;
    if (issue_mask != 3'b001) begin failures++; $display("figure mask %b", issue_mask); end
    // random mixes
    for (int n = 0; n < 60; n++) begin
      automatic int b = $urandom_range(0, EP);
      automatic int d;
      repeat ($urandom_range(0, 6)) report($urandom_range(0, 3));
      epoch(b);
      d = 4 - ((b * 5 / EP) > 4 ? 4 : (b * 5 / EP));
      check("random", d);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
