// tb_numa_residency: random node updates against a counter model (8-bit counters so that
// halving happens). Checks the counters, the argmax (lowest index on ties) and the
// p_dominant >= 0.8 test, computed with real arithmetic; also the figure's 59% / 41% case,
// which must not count as dominant.
//
// How: updates arrive in phases, each sending most updates to a random home node and a
// random 0..50% share elsewhere (the spill-over range the NUMA evaluation sweeps), so both
// the strong and the weak case occur; after every update the outputs are compared with the
// model. The 0.8
// threshold and the argmax follow the paper; tie-breaking and halving are this design's
// choices and are checked as such. Counters are 8 bits here to reach saturation quickly.
// A cycle-count watchdog ends the run with a failure if it stalls.
module tb_numa_residency;
  localparam int NN = 8, CW = 8;
  logic clk = 0, rst_n = 0;
  logic upd_valid;
  logic [2:0] upd_node, dom_node;
  logic dom_strong;
  logic [NN-1:0][CW-1:0] counts;
  int checks = 0, failures = 0;
  int m[NN];
  int n_strong = 0, n_weak = 0;

  numa_residency #(.NUM_NODES(NN), .CNT_W(CW)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check();
    int sum = 0, best = 0;
    bit is_strong;
    for (int n = 0; n < NN; n++) begin
      sum += m[n];
      if (m[n] > m[best]) best = n;
      checks++;
      if (counts[n] != CW'(m[n])) begin failures++; $display("C[%0d] %0d != %0d", n, counts[n], m[n]); end
    end
    is_strong = (sum == 0) || (real'(m[best]) / real'(sum) >= 0.8);
    if (is_strong) n_strong++; else n_weak++;
    checks++;
    if (dom_node != 3'(best) || dom_strong != is_strong) begin
      failures++; $display("dom %0d/%0d strong %b/%b", dom_node, best, dom_strong, is_strong);
    end
  endtask

  task automatic upd(int n);
    @(negedge clk);
    upd_valid = 1; upd_node = 3'(n);
    if (m[n] == (1 << CW) - 1) for (int i = 0; i < NN; i++) m[i] = m[i] / 2;
    m[n]++;
    @(negedge clk);
    upd_valid = 0;
    check();
  endtask

  initial begin
    upd_valid = 0; upd_node = 0;
    for (int i = 0; i < NN; i++) m[i] = 0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    check();
    // figure: local 59%, remote node 1 41% -> no dominant node above 0.8
    repeat (59) upd(0);
    repeat (41) upd(1);
    checks++;
    if (dom_strong || dom_node != 0) begin failures++; $display("figure case wrong"); end
    // phases with different spill-over rates
    for (int ph = 0; ph < 6; ph++) begin
      automatic int home = $urandom_range(0, NN - 1);
      automatic int spill = $urandom_range(0, 50);
      repeat (300) upd(($urandom_range(0, 99) < spill) ? $urandom_range(0, NN - 1) : home);
    end
    checks++;
    if (n_strong < 50 || n_weak < 50) begin failures++; $display("coverage strong %0d weak %0d", n_strong, n_weak); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
