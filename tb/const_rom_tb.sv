// const_rom_tb - checks round number, additive constant, MD5 rotation amount
// and message word index for every step of both modes. The MD5 constants are
// recomputed from 2^32*|sin(i)| by the reference package.
module const_rom_tb;
  import hash_pkg::*;
  import hash_ref_pkg::*;

  mode_e mode;
  logic [STEP_W-1:0] step;
  logic [1:0] round;
  word_t k;
  logic [4:0] shamt;
  logic [3:0] widx;
  int checks = 0, failures = 0;

  const_rom dut (.*);

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin
    mode = MODE_MD5;
    for (int i = 0; i < 64; i++) begin
      step = STEP_W'(i);
      #1;
      chk(round == 2'(i / 16), $sformatf("MD5 round at %0d", i));
      chk(k == md5_t(i + 1), $sformatf("T[%0d] = %h, want %h", i + 1, k, md5_t(i + 1)));
      chk(int'(shamt) == md5_s(i), $sformatf("MD5 shift at %0d", i));
      chk(int'(widx) == md5_g(i), $sformatf("MD5 word index at %0d", i));
    end
    mode = MODE_SHA192;
    for (int t = 0; t < 80; t++) begin
      step = STEP_W'(t);
      #1;
      chk(round == 2'(t / 20), $sformatf("SHA round at %0d", t));
      chk(k == sha_k(t), $sformatf("Kt at %0d", t));
      chk(int'(widx) == t % 16, $sformatf("SHA index at %0d", t));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
