// tb_city_hash: checks the hash circuit against the byte-level CityHash reference.
// Issues one random message per cycle (with gaps), and checks each result appears exactly
// two cycles after its input, with the reference value.
//
// How: after four corner messages (all zero, all one, single bits), word0/word1/word2 are
// drawn from $urandom, with word1 often zero and word2 a small seed as in the engine; each is
// pushed into a queue with the cycle they were presented, and compared with city_ref_pkg
// when out_valid rises. Timing checked: the two-cycle latency the engine's evaluation
// charges for the hash, and that out_valid never rises without an input. A cycle-count
// watchdog ends the run with a failure if it stalls.
module tb_city_hash;
  import city_ref_pkg::*;

  logic        clk = 0, rst_n = 0;
  logic        in_valid;
  logic [63:0] word0, word1, word2;
  logic        out_valid;
  logic [63:0] hash;
  int checks = 0, failures = 0;

  city_hash dut (.*);

  always #5 clk = ~clk;

  longint unsigned exp_q[$];
  int              exp_t[$];
  int              cyc = 0;

  always @(posedge clk) cyc <= cyc + 1;

  // watchdog
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // scoreboard: every out_valid must match the oldest expectation, 2 cycles later
  always @(posedge clk) if (rst_n) begin
    if (out_valid) begin
      checks++;
      if (exp_q.size() == 0) begin
        failures++; $display("unexpected output");
      end else begin
        automatic longint unsigned e = exp_q.pop_front();
        automatic int t = exp_t.pop_front();
        if (hash !== e || (cyc - t) != 2) begin
          failures++;
          $display("mismatch: got %h exp %h latency %0d", hash, e, cyc - t);
        end
      end
    end
  end

  initial begin
    in_valid = 0; word0 = 0; word1 = 0; word2 = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      in_valid = ($urandom_range(0, 3) != 0);
      word0 = {$urandom, $urandom};
      word1 = (n % 3 == 0) ? 64'd0 : {$urandom, $urandom};
      word2 = 64'($urandom_range(1, 4));
      if (n < 4) begin
        // corner messages: all zero, all one, one word set
        in_valid = 1;
        word0 = (n == 1) ? '1 : (n == 3) ? 64'h1 : 64'h0;
        word1 = (n == 1) ? '1 : 64'h0;
        word2 = (n == 1) ? '1 : (n == 2) ? 64'h8000_0000_0000_0000 : 64'h0;
      end
      if (in_valid) begin
        exp_q.push_back(city24(word0, word1, word2));
        exp_t.push_back(cyc);
      end
    end
    @(negedge clk) in_valid = 0;
    repeat (5) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin
      failures++; $display("missing outputs: %0d", exp_q.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
