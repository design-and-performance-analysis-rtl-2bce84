// hash_core - working-variable register A..F with the data transformation
// round in its feedback path.
//
// On `load` the register takes the chaining value `cv_in` (the first step of
// a block starts from CVq). On each clock with `advance` it takes the output
// of dt_round, i.e. one MD5 or SHA-192 step per clock. `st` is the register
// content, fed to the final adder after the last step. The input selection
// (chaining value or own feedback) followed by a register around the hash
// core is the structure of the unified architecture diagram.
module hash_core
  import hash_pkg::*;
#(
  parameter bit TEMP2_ADDS_A = 1'b0
) (
  input  logic        clk,
  input  logic        rst_n,
  input  mode_e       mode,
  input  logic        load,
  input  logic        advance,
  input  state_t      cv_in,
  input  logic [1:0]  round,
  input  word_t       w,
  input  word_t       k,
  input  logic [4:0]  shamt,
  output state_t      st
);

  state_t nxt;

  dt_round #(.TEMP2_ADDS_A(TEMP2_ADDS_A)) u_round (
    .mode (mode),
    .round(round),
    .s_in (st),
    .w    (w),
    .k    (k),
    .shamt(shamt),
    .s_out(nxt)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       st <= '0;
    else if (load)    st <= cv_in;
    else if (advance) st <= nxt;
  end

endmodule
