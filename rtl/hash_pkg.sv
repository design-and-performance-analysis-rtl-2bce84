// hash_pkg - types and constants shared by the unified MD5 / SHA-192 hash unit.
//
// The unit keeps six 32-bit working variables A..F (state_t). SHA-192 uses all
// six; MD5 uses A..D and keeps E and F at zero. The select line (mode_e)
// chooses the algorithm for every block of the datapath.
//
// Constants that follow the algorithm definitions:
//   * MD5_T[i] is the integer part of 2^32 * |sin(i+1)|, i = 0..63 (i in radians).
//   * MD5 rotation amounts per round and step-within-4 (MD5_S), as in RFC 1321;
//     the source text only says that four different amounts are used per round.
//   * MD5 initial value A=67452301 B=efcdab89 C=98badcfe D=10325476.
//   * SHA-192 initial value H0..H5 and the four round constants Kt.
// Helper function rotl() is a left rotation by a run-time amount 0..31.
package hash_pkg;

  typedef logic [31:0] word_t;

  // Select line: which algorithm the datapath computes.
  typedef enum logic {
    MODE_MD5    = 1'b0,
    MODE_SHA192 = 1'b1
  } mode_e;

  // Working variables / chaining value, A in the most significant word.
  typedef struct packed {
    word_t a;
    word_t b;
    word_t c;
    word_t d;
    word_t e;
    word_t f;
  } state_t;

  localparam int unsigned BLOCK_WORDS = 16;  // 512-bit block of 32-bit words
  localparam int unsigned MD5_STEPS   = 64;  // 4 rounds x 16 steps
  localparam int unsigned SHA_STEPS   = 80;  // 4 rounds x 20 steps
  localparam int unsigned STEP_W      = 7;   // width of a step index 0..79

  // T[1..64] of MD5, stored here as index 0..63.
  localparam word_t MD5_T [64] = '{
    32'hd76aa478, 32'he8c7b756, 32'h242070db, 32'hc1bdceee,
    32'hf57c0faf, 32'h4787c62a, 32'ha8304613, 32'hfd469501,
    32'h698098d8, 32'h8b44f7af, 32'hffff5bb1, 32'h895cd7be,
    32'h6b901122, 32'hfd987193, 32'ha679438e, 32'h49b40821,
    32'hf61e2562, 32'hc040b340, 32'h265e5a51, 32'he9b6c7aa,
    32'hd62f105d, 32'h02441453, 32'hd8a1e681, 32'he7d3fbc8,
    32'h21e1cde6, 32'hc33707d6, 32'hf4d50d87, 32'h455a14ed,
    32'ha9e3e905, 32'hfcefa3f8, 32'h676f02d9, 32'h8d2a4c8a,
    32'hfffa3942, 32'h8771f681, 32'h6d9d6122, 32'hfde5380c,
    32'ha4beea44, 32'h4bdecfa9, 32'hf6bb4b60, 32'hbebfbc70,
    32'h289b7ec6, 32'heaa127fa, 32'hd4ef3085, 32'h04881d05,
    32'hd9d4d039, 32'he6db99e5, 32'h1fa27cf8, 32'hc4ac5665,
    32'hf4292244, 32'h432aff97, 32'hab9423a7, 32'hfc93a039,
    32'h655b59c3, 32'h8f0ccc92, 32'hffeff47d, 32'h85845dd1,
    32'h6fa87e4f, 32'hfe2ce6e0, 32'ha3014314, 32'h4e0811a1,
    32'hf7537e82, 32'hbd3af235, 32'h2ad7d2bb, 32'heb86d391
  };

  // MD5 rotation amount s for [round][step mod 4].
  localparam logic [4:0] MD5_S [4][4] = '{
    '{5'd7, 5'd12, 5'd17, 5'd22},
    '{5'd5, 5'd9,  5'd14, 5'd20},
    '{5'd4, 5'd11, 5'd16, 5'd23},
    '{5'd6, 5'd10, 5'd15, 5'd21}
  };

  // SHA-192 round constants Kt, one per 20-step round.
  localparam word_t SHA_K [4] = '{
    32'h5a827999, 32'h6ed9eba1, 32'h8f1bbcdc, 32'hca62c1d6
  };

  localparam state_t MD5_IV = '{
    a: 32'h67452301, b: 32'hefcdab89, c: 32'h98badcfe, d: 32'h10325476,
    e: 32'h0, f: 32'h0
  };

  localparam state_t SHA192_IV = '{
    a: 32'h67452301, b: 32'hefcdab89, c: 32'h98badcfe, d: 32'h10325476,
    e: 32'hc3d2e1f0, f: 32'hf9b2d834
  };

  // Left rotation of x by n places (n = 0 leaves x unchanged).
  function automatic word_t rotl(input word_t x, input logic [4:0] n);
    return (x << n) | (x >> (6'd32 - {1'b0, n}));
  endfunction

endpackage
