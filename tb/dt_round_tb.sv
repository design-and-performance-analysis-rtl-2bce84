// dt_round_tb - checks one data transformation step against the reference
// step equations: all 64 MD5 steps and all 80 SHA-192 steps with random
// state and message words, for both settings of TEMP2_ADDS_A (two instances).
module dt_round_tb;
  import hash_pkg::*;
  import hash_ref_pkg::*;

  mode_e mode;
  logic [1:0] round;
  state_t s_in, s_out0, s_out1;
  word_t w, k;
  logic [4:0] shamt;
  int checks = 0, failures = 0;

  dt_round #(.TEMP2_ADDS_A(1'b0)) dut0 (.mode, .round, .s_in, .w, .k, .shamt, .s_out(s_out0));
  dt_round #(.TEMP2_ADDS_A(1'b1)) dut1 (.mode, .round, .s_in, .w, .k, .shamt, .s_out(s_out1));

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input logic [191:0] got, input logic [191:0] want, input string what);
    checks++;
    if (got !== want) begin
      failures++;
      $display("FAIL %s: got %h want %h", what, got, want);
    end
  endtask

  initial begin
    for (int rep = 0; rep < 10; rep++) begin
      for (int i = 0; i < 64; i++) begin
        mode = MODE_MD5; round = 2'(i / 16);
        s_in = {$urandom, $urandom, $urandom, $urandom, 64'd0};
        w = $urandom; k = md5_t(i + 1); shamt = 5'(md5_s(i));
        #1;
        chk(s_out0, md5_step(s_in, i, w), $sformatf("MD5 step %0d", i));
      end
      for (int t = 0; t < 80; t++) begin
        mode = MODE_SHA192; round = 2'(t / 20);
        s_in = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
        w = $urandom; k = sha_k(t); shamt = 5'($urandom);
        #1;
        chk(s_out0, sha192_step(s_in, t, w, 1'b0), $sformatf("SHA-192 step %0d", t));
        chk(s_out1, sha192_step(s_in, t, w, 1'b1), $sformatf("SHA-192 (+A) step %0d", t));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
