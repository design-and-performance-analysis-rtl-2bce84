// msg_sched - message register of the unified hash unit.
//
// Holds the sixteen 32-bit words of the current 512-bit block.
//   Load:  while `load_en` is high, `data_in` is shifted in, one word per
//          clock; the first word loaded ends up as word 0 (W0 / X[0]).
//   Read:  `w_out` gives the message word of the current step:
//          MD5     : X[widx], widx from the constant unit (word permutation)
//          SHA-192 : Wt, t = `step`. For t < 16 this is word t; for t >= 16
//                    it is rotl1(W[t-3] ^ W[t-8] ^ W[t-14] ^ W[t-16]),
//                    computed from a 16-word circular window.
//   Update: in SHA-192 mode, when `advance` is high and t >= 16, Wt is
//          written over W[t-16] (slot t mod 16), so 16 registers are enough
//          for all 80 words. In MD5 mode the words are never modified.
// The sixteen-word window is this design's choice; the source only says that
// a Register fed by Data In supplies X[k] to the hash core.
module msg_sched
  import hash_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  mode_e              mode,
  input  logic               load_en,
  input  word_t              data_in,
  input  logic               advance,
  input  logic [STEP_W-1:0]  step,
  input  logic [3:0]         widx,
  output word_t              w_out
);

  word_t w [BLOCK_WORDS];
  word_t w_exp;
  logic [3:0] t4;

  assign t4 = step[3:0];

  always_comb begin
    w_exp = rotl(w[4'(t4 - 4'd3)] ^ w[4'(t4 - 4'd8)] ^ w[4'(t4 - 4'd14)] ^ w[t4], 5'd1);
    if (mode == MODE_MD5)  w_out = w[widx];
    else if (step < 7'd16) w_out = w[t4];
    else                   w_out = w_exp;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < BLOCK_WORDS; i++) w[i] <= '0;
    end else if (load_en) begin
      for (int i = 0; i < BLOCK_WORDS - 1; i++) w[i] <= w[i+1];
      w[BLOCK_WORDS-1] <= data_in;
    end else if (advance && mode == MODE_SHA192 && step >= 7'd16) begin
      w[t4] <= w_exp;
    end
  end

endmodule
