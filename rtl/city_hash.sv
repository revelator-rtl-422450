// city_hash: the speculation engine's hash function circuit.
//
// Computes CityHash64 (v1.1) of a 24-byte message made of three 64-bit little-endian words:
// word0 = the page number being hashed (VPN, VPN>>9 for a page-table frame, or a guest PPN),
// word1 = the per-process hash key, word2 = the tier seed. The OS computes the same function
// when it places pages, so the hardware recomputes exactly the candidate frames the
// allocator tried. For a 24-byte message CityHash takes its 17-to-32-byte path:
//   mul = k2 + 2*24, a = w0*k1, b = w1, c = w2*mul, d = w1*k2
//   u = ror(a+b,43) + ror(c,30) + d,  v = a + ror(b+k2,18) + c
//   x = (u^v)*mul; x ^= x>>47;  y = (v^x)*mul; y ^= y>>47;  hash = y*mul
// Using CityHash, the key/PID input and a 2-cycle latency follow the paper; choosing
// the word order and the 24-byte message layout was up to this design.
//
// Timing: fully pipelined, one message per cycle, result LATENCY = 2 cycles after in_valid.
// Stage 1 registers (u, v); stage 2 registers the final product.
module city_hash
  import revelator_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  logic [63:0] word0,
  input  logic [63:0] word1,
  input  logic [63:0] word2,
  output logic        out_valid,
  output logic [63:0] hash
);

  localparam logic [63:0] MUL = CITY_K2 + 64'd48;

  logic [63:0] a, b, c, d, u, v;
  logic [63:0] u_q, v_q;
  logic        v1_q;
  logic [63:0] x0, x1, y0, y1, y2;

  // Stage 1: message mixing
  always_comb begin
    a = word0 * CITY_K1;
    b = word1;
    c = word2 * MUL;
    d = word1 * CITY_K2;
    u = ror64(a + b, 43) + ror64(c, 30) + d;
    v = a + ror64(b + CITY_K2, 18) + c;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1_q <= 1'b0;
      u_q  <= '0;
      v_q  <= '0;
    end else begin
      v1_q <= in_valid;
      if (in_valid) begin
        u_q <= u;
        v_q <= v;
      end
    end
  end

  // Stage 2: HashLen16(u, v, mul)
  always_comb begin
    x0 = (u_q ^ v_q) * MUL;
    x1 = x0 ^ (x0 >> 47);
    y0 = (v_q ^ x1) * MUL;
    y1 = y0 ^ (y0 >> 47);
    y2 = y1 * MUL;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      hash      <= '0;
    end else begin
      out_valid <= v1_q;
      if (v1_q) hash <= y2;
    end
  end

endmodule
