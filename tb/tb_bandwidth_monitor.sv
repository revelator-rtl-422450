// tb_bandwidth_monitor: drives epochs with known busy fractions and checks the published
// degree (4 - min(4, floor(busy*5/EPOCH))) and that it changes exactly at epoch ends.
//
// How: fixed epochs at both sides of each band edge (0, 19/20, 39/40, 59/60, 79/80, 100%
// busy, spread evenly), then epochs with a random number of busy cycles at random places. A short epoch of 100 cycles keeps
// the run small; the rule is the same at the default 1024. Timing checked: the degree stays
// constant inside an epoch and takes its new value one cycle after epoch_end. The five
// levels 0..4 follow the filter figure; the equal-width bands are this design's choice.
// A cycle-count watchdog ends the run with a failure if it stalls.
module tb_bandwidth_monitor;
  localparam int EP = 100;
  logic clk = 0, rst_n = 0;
  logic mem_busy;
  logic [2:0] allowed_degree;
  logic epoch_end;
  int checks = 0, failures = 0;

  bandwidth_monitor #(.EPOCH(EP), .MAX_DEG(4)) dut (.*);

  always #5 clk = ~clk;

  // watchdog
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int busy_pat[$] = '{0, 19, 20, 39, 40, 59, 60, 79, 80, 100, 35, 5};
    int exp_prev = 4;
    bit pat[EP];
    for (int k = 0; k < 12; k++) busy_pat.push_back($urandom_range(0, EP));
    mem_busy = 0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    checks++;
    if (allowed_degree != 4) begin failures++; $display("reset degree %0d", allowed_degree); end
    foreach (busy_pat[k]) begin
      automatic int b = busy_pat[k];
      automatic int e = 4 - ((b * 5 / EP) > 4 ? 4 : (b * 5 / EP));
      // EP cycles, b of them busy: spread out for the fixed cases, shuffled for the random ones
      for (int c = 0; c < EP; c++) pat[c] = (c * b / EP) != ((c + 1) * b / EP);
      if (k >= 12) pat.shuffle();
      for (int c = 0; c < EP; c++) begin
        mem_busy = pat[c];
        checks++;
        if (allowed_degree != 3'(exp_prev)) begin
          failures++; $display("epoch %0d cycle %0d: degree %0d, expected previous %0d", k, c, allowed_degree, exp_prev);
        end
        checks++;
        if (epoch_end != (c == EP - 1)) begin failures++; $display("epoch_end at %0d", c); end
        @(negedge clk);
      end
      checks++;
      if (allowed_degree != 3'(e)) begin failures++; $display("busy %0d: degree %0d exp %0d", b, allowed_degree, e); end
      exp_prev = e;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
