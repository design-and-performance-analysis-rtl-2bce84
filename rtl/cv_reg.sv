// cv_reg - chaining value register CVq with its initial-value selector.
//
// `init` loads the initial value of the selected algorithm (MD5: A..D =
// 67452301 efcdab89 98badcfe 10325476, E=F=0; SHA-192: H0..H5 =
// 67452301 efcdab89 98badcfe 10325476 c3d2e1f0 f9b2d834).
// `chain` loads `hash_in`, the last hash output, so the next 512-bit block
// of the same message continues from CVq+1. Otherwise the value is held.
// The register is updated on the clock edge on which the strobe is high.
module cv_reg
  import hash_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  mode_e   mode,
  input  logic    init,
  input  logic    chain,
  input  state_t  hash_in,
  output state_t  cv
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     cv <= '0;
    else if (init)  cv <= (mode == MODE_MD5) ? MD5_IV : SHA192_IV;
    else if (chain) cv <= hash_in;
  end

endmodule
