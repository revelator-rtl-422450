// tb_hint_walker: builds a hint table (a 4 KB frame of entries and per-node Bloom filters)
// in a memory model, places pages in remote nodes, and checks each hint walk: the node it
// returns (first non-dominant node whose filter holds the page), a miss for pages that are
// in no filter or whose entry is invalid, a miss for pages whose key sets only one of its two
// filter bits, the addresses it reads and how many reads it makes.
//
// How: a memory model answers line reads after 0..4 cycles with a random ready. The walk
// is started with a random dominant node; the expected node, read count and addresses are
// computed from the table the testbench wrote. The 9-bit frame index, 14-bit key and 512-bit
// filters follow the NUMA figure; the entry format, the two filter hash functions and the
// node order are this design's own and the testbench mirrors them. A cycle-count watchdog
// ends the run with a failure if it stalls.
module tb_hint_walker;
  import revelator_pkg::*;
  localparam int NN = 8;
  localparam logic [PA_W-1:0] ROOT = 37'h01_2345_6000;
  logic clk = 0, rst_n = 0;
  logic start_valid, start_ready, rd_valid, rd_ready, rd_resp_valid, done, done_hit;
  logic [VPN_W-1:0] start_vpn;
  logic [2:0] start_dom, done_node;
  logic [PA_W-1:0] root, rd_addr;
  logic [BF_BITS-1:0] rd_resp_data;
  int checks = 0, failures = 0;

  hint_walker dut (.*);   // default: 8 nodes

  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // memory, by line address
  logic [BF_BITS-1:0] mem[logic [LINE_W-1:0]];

  function automatic int bf_idx(int key, int c);
    return ((key * c) / 8192) % 512;   // bits [21:13] of key * C
  endfunction

  function automatic logic [PA_W-1:0] group_of(int idx);
    return PA_W'(37'h04_0000_0000) + PA_W'(idx) * PA_W'(NN * 64);
  endfunction

  task automatic set_bit(logic [PA_W-1:0] pa, int b);
    logic [LINE_W-1:0] l = pa[PA_W-1:LINE_OFF_W];
    if (!mem.exists(l)) mem[l] = '0;
    mem[l][b] = 1'b1;
  endtask

  // OS side: mark a page as living in node n
  task automatic place(logic [VPN_W-1:0] vpn, int n);
    int idx = int'(vpn[22:14]);
    int key = int'(vpn[13:0]);
    logic [LINE_W-1:0] el = {ROOT[PA_W-1:12], 6'(idx / 8)};
    logic [63:0] entry = {1'b1, 26'd0, group_of(idx)};
    if (!mem.exists(el)) mem[el] = '0;
    mem[el][(idx % 8) * 64 +: 64] = entry;
    set_bit(group_of(idx) + PA_W'(n * 64), bf_idx(key, 32'h9E37));
    set_bit(group_of(idx) + PA_W'(n * 64), bf_idx(key, 32'h7A5B));
  endtask

  // a page whose key sets only the first of its two filter bits: it must not match
  task automatic place_half(logic [VPN_W-1:0] vpn, int n);
    int idx = int'(vpn[22:14]);
    logic [LINE_W-1:0] el = {ROOT[PA_W-1:12], 6'(idx / 8)};
    if (!mem.exists(el)) mem[el] = '0;
    mem[el][(idx % 8) * 64 +: 64] = {1'b1, 26'd0, group_of(idx)};
    set_bit(group_of(idx) + PA_W'(n * 64), bf_idx(int'(vpn[13:0]), 32'h9E37));
  endtask

  function automatic bit in_bf(logic [VPN_W-1:0] vpn, int n);
    logic [PA_W-1:0] ga = group_of(int'(vpn[22:14])) + PA_W'(n * 64);
    logic [LINE_W-1:0] l = ga[PA_W-1:LINE_OFF_W];
    int key = int'(vpn[13:0]);
    if (!mem.exists(l)) return 0;
    return mem[l][bf_idx(key, 32'h9E37)] && mem[l][bf_idx(key, 32'h7A5B)];
  endfunction

  function automatic bit entry_valid(logic [VPN_W-1:0] vpn);
    int idx = int'(vpn[22:14]);
    logic [LINE_W-1:0] el = {ROOT[PA_W-1:12], 6'(idx / 8)};
    if (!mem.exists(el)) return 0;
    return mem[el][(idx % 8) * 64 + 63];
  endfunction

  // memory responder with random latency
  logic [PA_W-1:0] reads[$];
  int              lat;
  logic            pending;
  logic [PA_W-1:0] paddr;
  always @(posedge clk) begin
    rd_resp_valid <= 0;
    if (pending) begin
      if (lat == 0) begin
        rd_resp_valid <= 1;
        rd_resp_data  <= mem.exists(paddr[PA_W-1:6]) ? mem[paddr[PA_W-1:6]] : '0;
        pending <= 0;
      end else lat <= lat - 1;
    end else if (rd_valid && rd_ready) begin
      pending <= 1; paddr <= rd_addr; lat <= $urandom_range(0, 4);
      reads.push_back(rd_addr);
    end
  end
  always @(negedge clk) rd_ready = !pending && ($urandom_range(0, 3) != 0);

  int n_hits = 0, n_miss = 0;

  initial begin
    logic [VPN_W-1:0] placed_vpn[$];
    int               placed_node[$];
    logic [VPN_W-1:0] half_vpn[$];
    start_valid = 0; start_vpn = 0; start_dom = 0; root = ROOT;
    pending = 0; rd_resp_data = '0;
    for (int i = 0; i < 60; i++) begin
      automatic logic [VPN_W-1:0] v = VPN_W'({$urandom, $urandom});
      automatic int n = $urandom_range(0, NN - 1);
      v[22:17] = 6'($urandom_range(0, 3));  // a few entries, several pages per filter
      place(v, n);
      placed_vpn.push_back(v); placed_node.push_back(n);
    end
    for (int i = 0; i < 30; i++) begin
      automatic logic [VPN_W-1:0] v = VPN_W'({$urandom, $urandom});
      v[22:17] = 6'($urandom_range(4, 7));  // entries of their own
      place_half(v, $urandom_range(0, NN - 1));
      half_vpn.push_back(v);
    end
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int q = 0; q < 300; q++) begin
      automatic logic [VPN_W-1:0] v;
      automatic int dom = $urandom_range(0, NN - 1);
      automatic int exp_node = -1;
      automatic int exp_reads;
      if (q % 3 == 0)      v = placed_vpn[$urandom_range(0, placed_vpn.size() - 1)];
      else if (q % 3 == 1) v = half_vpn[$urandom_range(0, half_vpn.size() - 1)];
      else                 v = VPN_W'({$urandom, $urandom});
      if (entry_valid(v))
        for (int n = 0; n < NN; n++)
          if (exp_node < 0 && n != dom && in_bf(v, n)) exp_node = n;
      if (!entry_valid(v)) exp_reads = 1;
      else if (exp_node >= 0) exp_reads = 1 + exp_node + (dom < exp_node ? 0 : 1);
      else exp_reads = NN;
      reads.delete();
      while (!start_ready) @(negedge clk);
      start_valid = 1; start_vpn = v; start_dom = 3'(dom);
      @(negedge clk);
      start_valid = 0;
      while (!done) @(negedge clk);
      checks++;
      if (done_hit != (exp_node >= 0) || (done_hit && int'(done_node) != exp_node)) begin
        failures++; $display("vpn %h dom %0d: hit %b node %0d, expected %0d", v, dom, done_hit, done_node, exp_node);
      end
      if (exp_node >= 0) n_hits++; else n_miss++;
      checks++;
      if (reads.size() != exp_reads) begin failures++; $display("reads %0d expected %0d", reads.size(), exp_reads); end
      checks++;
      if (reads.size() > 0 && reads[0] != {ROOT[PA_W-1:12], v[22:17], 6'd0}) begin
        failures++; $display("entry read at %h", reads[0]);
      end
      for (int r = 1; r < reads.size(); r++) begin
        checks++;
        if (reads[r][PA_W-1:9] != group_of(int'(v[22:14]))[PA_W-1:9] ||
            int'(reads[r][8:6]) == dom) begin
          failures++; $display("filter read at %h", reads[r]);
        end
      end
      @(negedge clk);
    end
    checks++;
    if (n_hits < 50 || n_miss < 50) begin failures++; $display("coverage hits %0d misses %0d", n_hits, n_miss); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
