// const_rom - step constants of the unified hash unit.
//
// Combinational lookup indexed by the step number (0..63 for MD5, 0..79 for
// SHA-192) and the select line. Outputs:
//   round : 0..3, step/16 for MD5, step/20 for SHA-192
//   k     : MD5 T[step+1] (integer part of 2^32*|sin(step+1)|), or SHA Kt
//   shamt : MD5 rotation amount for the step (0 in SHA-192 mode)
//   widx  : MD5 message word index k: i, (1+5i), (5+3i), 7i  (all mod 16)
//           in rounds 1..4; the step number mod 16 in SHA-192 mode.
// The word permutations follow the algorithm description (the third one is
// printed with a typo in the source and is read as (5+3i) mod 16); the
// rotation amounts are the standard MD5 ones, which the source does not list.
module const_rom
  import hash_pkg::*;
(
  input  mode_e              mode,
  input  logic [STEP_W-1:0]  step,
  output logic [1:0]         round,
  output word_t              k,
  output logic [4:0]         shamt,
  output logic [3:0]         widx
);

  logic [3:0] i4;
  assign i4 = step[3:0];

  always_comb begin
    if (mode == MODE_MD5) begin
      round = step[5:4];
      k     = MD5_T[step[5:0]];
      shamt = MD5_S[step[5:4]][step[1:0]];
      unique case (step[5:4])
        2'd0: widx = i4;
        2'd1: widx = 4'd1 + 4'd5 * i4;
        2'd2: widx = 4'd5 + 4'd3 * i4;
        default: widx = 4'd7 * i4;
      endcase
    end else begin
      if (step < 7'd20)      round = 2'd0;
      else if (step < 7'd40) round = 2'd1;
      else if (step < 7'd60) round = 2'd2;
      else                   round = 2'd3;
      k     = SHA_K[round];
      shamt = 5'd0;
      widx  = i4;
    end
  end

endmodule
