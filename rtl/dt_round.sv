// dt_round - data transformation round: one step of MD5 or of SHA-192 on the
// six working variables, computed in one combinational pass.
//
// The same modulo-2^32 adders (MA) and the same rotator serve both
// algorithms; the select line `mode` steers their operands:
//
//   ma1  = X + f(B,C,D) + w + k      X = A for MD5, E for SHA-192
//   rot  = rotl(ma1, s)  for MD5,    rotl(A, 5)  for SHA-192
//   ma2  = rot + B       for MD5,    rot + ma1   for SHA-192   (= TEMP1)
//
//   MD5     : A<-D, B<-ma2, C<-B, D<-C, E,F<-0
//   SHA-192 : A<-TEMP2, B<-rotl(A,15), C<-rotl(B,30), D<-C, E<-D, F<-TEMP1
//             TEMP2 = TEMP1 + F            (TEMP2_ADDS_A = 0, default)
//             TEMP2 = TEMP1 + F + A        (TEMP2_ADDS_A = 1)
//
// w is the message word (X[k] for MD5, Wt for SHA-192), k the additive
// constant (T[i] or Kt), s the MD5 rotation amount (ignored for SHA-192).
//
// The step equations follow the algorithm descriptions. The SHA-192 TEMP2
// term is ambiguous in the source: its equation adds A, while its step
// diagram and data transformation diagram do not, and its printed simulation
// values satisfy A = F + H5 after the first step, i.e. no A term. The default
// follows the diagrams; TEMP2_ADDS_A selects the equation instead. All
// shifts are rotations, as the source describes its shifters.
module dt_round
  import hash_pkg::*;
#(
  parameter bit TEMP2_ADDS_A = 1'b0
) (
  input  mode_e       mode,
  input  logic [1:0]  round,
  input  state_t      s_in,
  input  word_t       w,
  input  word_t       k,
  input  logic [4:0]  shamt,
  output state_t      s_out
);

  word_t nl, ma1, rot_in, rot, ma2, temp2;
  logic [4:0] rot_n;
  logic is_md5;

  assign is_md5 = (mode == MODE_MD5);

  nonlinear_fn u_nl (
    .mode (mode),
    .round(round),
    .b    (s_in.b),
    .c    (s_in.c),
    .d    (s_in.d),
    .f    (nl)
  );

  always_comb begin
    ma1    = (is_md5 ? s_in.a : s_in.e) + nl + w + k;
    rot_in = is_md5 ? ma1 : s_in.a;
    rot_n  = is_md5 ? shamt : 5'd5;
    rot    = rotl(rot_in, rot_n);
    ma2    = rot + (is_md5 ? s_in.b : ma1);
    temp2  = ma2 + s_in.f + (TEMP2_ADDS_A ? s_in.a : 32'd0);

    if (is_md5) begin
      s_out.a = s_in.d;
      s_out.b = ma2;
      s_out.c = s_in.b;
      s_out.d = s_in.c;
      s_out.e = '0;
      s_out.f = '0;
    end else begin
      s_out.a = temp2;
      s_out.b = rotl(s_in.a, 5'd15);
      s_out.c = rotl(s_in.b, 5'd30);
      s_out.d = s_in.c;
      s_out.e = s_in.d;
      s_out.f = ma2;
    end
  end

endmodule
