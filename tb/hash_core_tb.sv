// hash_core_tb - loads a random chaining value into the working-variable
// register, then runs all 64 MD5 or 80 SHA-192 steps with random message
// words and the reference constants, comparing the register with the
// reference state after every clock. Also checks that the register holds
// while neither load nor advance is high.
module hash_core_tb;
  import hash_pkg::*;
  import hash_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  mode_e mode = MODE_MD5;
  logic load = 0, advance = 0;
  state_t cv_in = '0, st;
  logic [1:0] round = '0;
  word_t w = '0, k = '0;
  logic [4:0] shamt = '0;
  int checks = 0, failures = 0;

  hash_core dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
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
    logic [191:0] ref_s;
    bit sha;
    int n;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 6; rep++) begin
      sha = rep[0];
      n = sha ? 80 : 64;
      mode = sha ? MODE_SHA192 : MODE_MD5;
      cv_in = sha ? {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom}
                  : {$urandom, $urandom, $urandom, $urandom, 64'd0};
      load = 1;
      @(negedge clk);
      load = 0;
      chk(st == cv_in, "load chaining value");
      ref_s = cv_in;
      repeat (3) @(negedge clk);
      chk(st == cv_in, "hold while idle");
      for (int i = 0; i < n; i++) begin
        advance = 1;
        w = $urandom;
        if (sha) begin
          round = 2'(i / 20); k = sha_k(i);
          ref_s = sha192_step(ref_s, i, w, 1'b0);
        end else begin
          round = 2'(i / 16); k = md5_t(i + 1); shamt = 5'(md5_s(i));
          ref_s = md5_step(ref_s, i, w);
        end
        @(negedge clk);
        chk(st == ref_s, $sformatf("mode %0d step %0d", sha, i));
      end
      advance = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
