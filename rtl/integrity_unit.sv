// integrity_unit - unified reconfigurable MD5 / SHA-192 hash unit (top level).
//
// One iterative datapath computes either MD5 (128-bit digest) or SHA-192
// (192-bit digest), chosen per message by the select line `mode`
// (0 = MD5, 1 = SHA-192). Blocks of 512 already padded bits enter as sixteen
// 32-bit words on `data_in`.
//
// Use:
//   1. While idle (busy = 0) pulse `start_new` for the first block of a
//      message, or `cont` for each further block; `mode` is sampled then.
//   2. Give the 16 words with `data_valid` (accepted while data_ready = 1,
//      one per clock, gaps allowed). Word order and packing are those of the
//      algorithm: MD5 words are little-endian, SHA-192 words big-endian.
//   3. After 64 (MD5) or 80 (SHA-192) step clocks plus one final-add clock,
//      `hash_valid` pulses for one clock and `hash_out` holds the new chaining
//      value {H0,H1,H2,H3,H4,H5} (MD5: {A,B,C,D,0,0}). It stays until the
//      next block finishes.
// Latency from the clock that accepts the 16th word to hash_valid: 65 clocks
// for MD5, 81 for SHA-192.
//
// Structure (following the unified architecture diagram): an initial-value
// selector and chaining-value register (cv_reg), a counter/sequencer
// (hash_ctrl), a message register (msg_sched) and constant unit (const_rom)
// that feed X[k]/Wt, T[i]/Kt and the shift amount to the hash core
// (hash_core, holding dt_round), and the final adder with the hash output
// register (hash_alu), whose output feeds back to the chaining value.
// The handshake signals, the one-step-per-clock schedule and the word
// loading order are this design's choices.
module integrity_unit
  import hash_pkg::*;
#(
  parameter bit TEMP2_ADDS_A = 1'b0
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          mode,
  input  logic          start_new,
  input  logic          cont,
  input  logic [31:0]   data_in,
  input  logic          data_valid,
  output logic          data_ready,
  output logic          busy,
  output logic          hash_valid,
  output logic [191:0]  hash_out
);

  mode_e              cur_mode;
  logic               cv_init, cv_chain, load_en, core_load, advance, alu_en;
  logic [STEP_W-1:0]  step;
  logic [1:0]         round;
  word_t              k, w;
  logic [4:0]         shamt;
  logic [3:0]         widx;
  state_t             cv, st, hash;

  hash_ctrl u_ctrl (
    .clk       (clk),
    .rst_n     (rst_n),
    .mode_in   (mode_e'(mode)),
    .start_new (start_new),
    .cont      (cont),
    .data_valid(data_valid),
    .mode      (cur_mode),
    .cv_init   (cv_init),
    .cv_chain  (cv_chain),
    .load_en   (load_en),
    .core_load (core_load),
    .advance   (advance),
    .step      (step),
    .alu_en    (alu_en),
    .busy      (busy),
    .data_ready(data_ready)
  );

  // The chaining value is loaded in the same clock the sequencer latches the
  // mode, so cv_reg is given the incoming select line.
  cv_reg u_cv (
    .clk    (clk),
    .rst_n  (rst_n),
    .mode   (mode_e'(mode)),
    .init   (cv_init),
    .chain  (cv_chain),
    .hash_in(hash),
    .cv     (cv)
  );

  const_rom u_const (
    .mode (cur_mode),
    .step (step),
    .round(round),
    .k    (k),
    .shamt(shamt),
    .widx (widx)
  );

  msg_sched u_msg (
    .clk    (clk),
    .rst_n  (rst_n),
    .mode   (cur_mode),
    .load_en(load_en),
    .data_in(data_in),
    .advance(advance),
    .step   (step),
    .widx   (widx),
    .w_out  (w)
  );

  hash_core #(.TEMP2_ADDS_A(TEMP2_ADDS_A)) u_core (
    .clk    (clk),
    .rst_n  (rst_n),
    .mode   (cur_mode),
    .load   (core_load),
    .advance(advance),
    .cv_in  (cv),
    .round  (round),
    .w      (w),
    .k      (k),
    .shamt  (shamt),
    .st     (st)
  );

  hash_alu u_alu (
    .clk  (clk),
    .rst_n(rst_n),
    .mode (cur_mode),
    .en   (alu_en),
    .cv   (cv),
    .st   (st),
    .hash (hash),
    .valid(hash_valid)
  );

  assign hash_out = hash;

endmodule
