// nonlinear_fn - the "Non-Linear function" block of the data transformation
// round, shared by MD5 and SHA-192.
//
// Purely combinational. The select line `mode` and the round number `round`
// (0..3) pick one of the bitwise functions of the three inputs B, C, D:
//
//   round  MD5                          SHA-192
//   0      F = (B & C) | (~B & D)       Ch     = (B & C) | (~B & D)
//   1      G = (B & D) | (C & ~D)       Parity = B ^ C ^ D
//   2      H = B ^ C ^ D                Maj    = (B & C) | (B & D) | (C & D)
//   3      I = C ^ (B | ~D)             Parity = B ^ C ^ D
//
// The MD5 F function is the standard one; the formula printed in the source
// text for F is garbled (it would reduce to Y). Because MD5-F equals Ch and
// MD5-H equals Parity, the selection needs only five distinct functions.
module nonlinear_fn
  import hash_pkg::*;
(
  input  mode_e       mode,
  input  logic [1:0]  round,
  input  word_t       b,
  input  word_t       c,
  input  word_t       d,
  output word_t       f
);

  always_comb begin
    unique case (round)
      2'd0: f = (b & c) | (~b & d);
      2'd1: f = (mode == MODE_MD5) ? ((b & d) | (c & ~d)) : (b ^ c ^ d);
      2'd2: f = (mode == MODE_MD5) ? (b ^ c ^ d) : ((b & c) | (b & d) | (c & d));
      2'd3: f = (mode == MODE_MD5) ? (c ^ (b | ~d)) : (b ^ c ^ d);
      default: f = '0;
    endcase
  end

endmodule
