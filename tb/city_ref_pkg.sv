// city_ref_pkg: reference model of CityHash64 for the testbenches.
//
// Written independently of the RTL: it works on a byte string, as the C reference does,
// with little-endian Fetch64 and the generic HashLen17to32 / HashLen16 steps, so it
// exercises the same arithmetic through a different formulation.
//
// Interface: function city24(w0, w1, w2) returns the 64-bit hash of the 24 bytes w0|w1|w2,
// each word stored little-endian. It has no timing; the testbenches add the circuit's
// two-cycle latency themselves. The constants and steps are those of CityHash v1.1, the
// hash the engine's design relies on; using the 24-byte path is this design's choice.
package city_ref_pkg;

  localparam longint unsigned K1 = 64'hb492b66be98f3c65;
  localparam longint unsigned K2 = 64'h9ae16a3b2f90404f;

  function automatic longint unsigned rot(longint unsigned v, int s);
    return (s == 0) ? v : ((v >> s) | (v << (64 - s)));
  endfunction

  function automatic longint unsigned fetch64(byte unsigned b[], int at);
    longint unsigned r = 0;
    for (int i = 7; i >= 0; i--) r = (r << 8) | longint'(b[at + i]);
    return r;
  endfunction

  function automatic longint unsigned hash_len16(longint unsigned u, longint unsigned v,
                                                 longint unsigned mul);
    longint unsigned a, b;
    a = (u ^ v) * mul;
    a = a ^ (a >> 47);
    b = (v ^ a) * mul;
    b = b ^ (b >> 47);
    b = b * mul;
    return b;
  endfunction

  function automatic longint unsigned hash_len17to32(byte unsigned s[]);
    int len = s.size();
    longint unsigned mul = K2 + longint'(len) * 2;
    longint unsigned a = fetch64(s, 0) * K1;
    longint unsigned b = fetch64(s, 8);
    longint unsigned c = fetch64(s, len - 8) * mul;
    longint unsigned d = fetch64(s, len - 16) * K2;
    return hash_len16(rot(a + b, 43) + rot(c, 30) + d, a + rot(b + K2, 18) + c, mul);
  endfunction

  // CityHash64 of the 24-byte message {w0, w1, w2}, little-endian words
  function automatic longint unsigned city24(longint unsigned w0, longint unsigned w1,
                                             longint unsigned w2);
    byte unsigned s[] = new[24];
    for (int i = 0; i < 8; i++) begin
      s[i]      = byte'(w0 >> (8 * i));
      s[8 + i]  = byte'(w1 >> (8 * i));
      s[16 + i] = byte'(w2 >> (8 * i));
    end
    return hash_len17to32(s);
  endfunction

endpackage
