// hash_ref_pkg - reference models used by the testbenches.
//
// Written independently of the RTL package: the MD5 sine table is computed
// at run time from 2^32*|sin(i)|, the step equations are coded straight from
// the algorithm definitions, and message padding (which the hardware leaves
// to its host) is done here. States are packed {A,B,C,D,E,F}, 32 bits each.
package hash_ref_pkg;

  typedef logic [31:0] rw_t;
  typedef rw_t blk_t [16];

  function automatic rw_t rl(input rw_t x, input int n);
    if (n == 0) return x;
    return (x << n) | (x >> (32 - n));
  endfunction

  function automatic rw_t md5_t(input int i);  // i = 1..64
    real v;
    v = $sin(real'(i));
    if (v < 0.0) v = -v;
    return rw_t'(longint'($floor(v * 4294967296.0)));
  endfunction

  function automatic int md5_s(input int i);   // i = 0..63
    int s [16] = '{7,12,17,22, 5,9,14,20, 4,11,16,23, 6,10,15,21};
    return s[(i / 16) * 4 + (i % 4)];
  endfunction

  function automatic int md5_g(input int i);
    if (i < 16) return i;
    if (i < 32) return (5 * i + 1) % 16;
    if (i < 48) return (3 * i + 5) % 16;
    return (7 * i) % 16;
  endfunction

  function automatic rw_t md5_fn(input int i, input rw_t b, c, d);
    if (i < 16) return (b & c) | (~b & d);
    if (i < 32) return (d & b) | (~d & c);
    if (i < 48) return b ^ c ^ d;
    return c ^ (b | ~d);
  endfunction

  // One MD5 step i on {a,b,c,d}; e,f returned as zero.
  function automatic logic [191:0] md5_step(input logic [191:0] s, input int i, input rw_t x);
    rw_t a, b, c, d, t;
    {a, b, c, d} = s[191:64];
    t = b + rl(a + md5_fn(i, b, c, d) + x + md5_t(i + 1), md5_s(i));
    return {d, t, b, c, 64'd0};
  endfunction

  function automatic logic [191:0] md5_block(input logic [191:0] cv, input blk_t m);
    logic [191:0] s;
    s = cv;
    for (int i = 0; i < 64; i++) s = md5_step(s, i, m[md5_g(i)]);
    return {cv[191:160] + s[191:160], cv[159:128] + s[159:128],
            cv[127:96] + s[127:96], cv[95:64] + s[95:64], 64'd0};
  endfunction

  function automatic rw_t sha_f(input int t, input rw_t b, c, d);
    if (t < 20) return (b & c) | ((~b) & d);
    if (t < 40) return b ^ c ^ d;
    if (t < 60) return (b & c) | (b & d) | (c & d);
    return b ^ c ^ d;
  endfunction

  function automatic rw_t sha_k(input int t);
    if (t < 20) return 32'h5A827999;
    if (t < 40) return 32'h6ED9EBA1;
    if (t < 60) return 32'h8F1BBCDC;
    return 32'hCA62C1D6;
  endfunction

  // One SHA-192 step; add_a selects TEMP2 = TEMP1 + F + A instead of TEMP1 + F.
  function automatic logic [191:0] sha192_step(input logic [191:0] s, input int t,
                                               input rw_t w, input bit add_a);
    rw_t a, b, c, d, e, f, t1, t2;
    {a, b, c, d, e, f} = s;
    t1 = rl(a, 5) + sha_f(t, b, c, d) + e + w + sha_k(t);
    t2 = t1 + f + (add_a ? a : 32'd0);
    return {t2, rl(a, 15), rl(b, 30), c, d, t1};
  endfunction

  function automatic logic [191:0] sha192_block(input logic [191:0] cv, input blk_t m,
                                                input bit add_a);
    rw_t w [80];
    logic [191:0] s;
    for (int t = 0; t < 16; t++) w[t] = m[t];
    for (int t = 16; t < 80; t++) w[t] = rl(w[t-3] ^ w[t-8] ^ w[t-14] ^ w[t-16], 1);
    s = cv;
    for (int t = 0; t < 80; t++) s = sha192_step(s, t, w[t], add_a);
    for (int j = 0; j < 6; j++) s[j*32 +: 32] = s[j*32 +: 32] + cv[j*32 +: 32];
    return s;
  endfunction

  localparam logic [191:0] MD5_IV_REF =
    {32'h67452301, 32'hefcdab89, 32'h98badcfe, 32'h10325476, 64'd0};
  localparam logic [191:0] SHA192_IV_REF =
    {32'h67452301, 32'hefcdab89, 32'h98badcfe, 32'h10325476, 32'hc3d2e1f0, 32'hf9b2d834};

  // Pads a byte message (1 bit, zeros, 64-bit bit length) into 32-bit words.
  // little = 1: MD5 packing (little-endian words and length), else big-endian.
  function automatic void pad(input byte unsigned msg[$], input bit little, ref rw_t words[$]);
    byte unsigned b[$];
    longint unsigned bits;
    b = msg;
    bits = longint'(msg.size()) * 8;
    b.push_back(8'h80);
    while (b.size() % 64 != 56) b.push_back(8'h00);
    for (int i = 0; i < 8; i++)
      b.push_back(little ? bits[i*8 +: 8] : bits[(7-i)*8 +: 8]);
    words.delete();
    for (int i = 0; i < b.size(); i += 4)
      words.push_back(little ? {b[i+3], b[i+2], b[i+1], b[i]} : {b[i], b[i+1], b[i+2], b[i+3]});
  endfunction

  // MD5 digest bytes as printed in hex: each of A..D byte-reversed.
  function automatic logic [127:0] md5_digest(input logic [191:0] s);
    logic [127:0] r;
    for (int j = 0; j < 4; j++) begin
      rw_t v = s[191 - 32*j -: 32];
      r[127 - 32*j -: 32] = {v[7:0], v[15:8], v[23:16], v[31:24]};
    end
    return r;
  endfunction

endpackage
