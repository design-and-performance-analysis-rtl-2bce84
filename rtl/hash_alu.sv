// hash_alu - final adder ("ALU") and hash output register.
//
// When `en` is high the six words of the chaining value and of the working
// variables are added word by word modulo 2^32 and registered as `hash`;
// `valid` is high for the one clock after that edge. In MD5 mode only
// A..D are added and E, F of the output are zero (MD5 keeps a 128-bit state).
module hash_alu
  import hash_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  mode_e   mode,
  input  logic    en,
  input  state_t  cv,
  input  state_t  st,
  output state_t  hash,
  output logic    valid
);

  state_t sum;

  always_comb begin
    sum.a = cv.a + st.a;
    sum.b = cv.b + st.b;
    sum.c = cv.c + st.c;
    sum.d = cv.d + st.d;
    sum.e = (mode == MODE_MD5) ? '0 : cv.e + st.e;
    sum.f = (mode == MODE_MD5) ? '0 : cv.f + st.f;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hash  <= '0;
      valid <= 1'b0;
    end else begin
      valid <= en;
      if (en) hash <= sum;
    end
  end

endmodule
