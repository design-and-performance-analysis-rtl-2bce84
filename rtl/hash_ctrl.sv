// hash_ctrl - step counter and sequencer of the unified hash unit.
//
// A block starts on `start_new` (hash a new message from the initial value)
// or on `cont` (next block of the same message, chaining from the last
// hash output); either one is accepted only while idle, and the select line
// `mode_in` is latched at that moment. Phases:
//   IDLE  -> LOAD : cv_init (start_new) or cv_chain (cont) pulses.
//   LOAD          : 16 words are accepted, one per clock in which data_valid
//                   is high (gaps are allowed); load_en marks an accepted word.
//                   With the 16th word, core_load copies the chaining value
//                   into the working variables.
//   RUN           : `advance` is high for 64 (MD5) or 80 (SHA-192) clocks,
//                   `step` counts 0.. 63/79.
//   FINAL         : alu_en for one clock: hash := chaining value + working
//                   variables; `done` pulses with it; back to IDLE.
// So a block takes 16 load clocks + 64/80 step clocks + 1 final clock, and
// the result is valid on the clock edge after FINAL. One step per clock is
// this design's choice: the source mentions pipelining but gives no stages.
module hash_ctrl
  import hash_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  mode_e              mode_in,
  input  logic               start_new,
  input  logic               cont,
  input  logic               data_valid,
  output mode_e              mode,
  output logic               cv_init,
  output logic               cv_chain,
  output logic               load_en,
  output logic               core_load,
  output logic               advance,
  output logic [STEP_W-1:0]  step,
  output logic               alu_en,
  output logic               busy,
  output logic               data_ready
);

  typedef enum logic [1:0] {S_IDLE, S_LOAD, S_RUN, S_FINAL} phase_e;

  phase_e      phase;
  logic [3:0]  wcnt;
  logic [STEP_W-1:0] last_step;

  assign last_step  = (mode == MODE_MD5) ? STEP_W'(MD5_STEPS - 1) : STEP_W'(SHA_STEPS - 1);
  assign cv_init    = (phase == S_IDLE) && start_new;
  assign cv_chain   = (phase == S_IDLE) && !start_new && cont;
  assign data_ready = (phase == S_LOAD);
  assign load_en    = (phase == S_LOAD) && data_valid;
  assign core_load  = load_en && (wcnt == 4'd15);
  assign advance    = (phase == S_RUN);
  assign alu_en     = (phase == S_FINAL);
  assign busy       = (phase != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase <= S_IDLE;
      mode  <= MODE_MD5;
      wcnt  <= '0;
      step  <= '0;
    end else begin
      unique case (phase)
        S_IDLE: if (start_new || cont) begin
          mode  <= mode_in;
          wcnt  <= '0;
          step  <= '0;
          phase <= S_LOAD;
        end
        S_LOAD: if (data_valid) begin
          wcnt <= wcnt + 4'd1;
          if (wcnt == 4'd15) phase <= S_RUN;
        end
        S_RUN: begin
          step <= step + 1'b1;
          if (step == last_step) phase <= S_FINAL;
        end
        S_FINAL: phase <= S_IDLE;
        default: phase <= S_IDLE;
      endcase
    end
  end

  // Start New and Continue together are ambiguous; Start New wins.
  a_one_start: assert property (@(posedge clk) disable iff (!rst_n)
    !(phase == S_IDLE && start_new && cont))
    else $warning("start_new and cont asserted together; start_new taken");

endmodule
