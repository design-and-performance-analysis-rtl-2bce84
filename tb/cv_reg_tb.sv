// cv_reg_tb - checks the chaining value register: the initial values of both
// modes on init, loading the hash output on chain, and holding otherwise.
module cv_reg_tb;
  import hash_pkg::*;
  import hash_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  mode_e mode = MODE_MD5;
  logic init = 0, chain = 0;
  state_t hash_in = '0, cv;
  int checks = 0, failures = 0;

  cv_reg dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s: cv=%h", what, cv);
    end
  endtask

  initial begin
    logic [191:0] prev;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 20; rep++) begin
      mode = rep[0] ? MODE_SHA192 : MODE_MD5;
      hash_in = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
      init = 1;
      @(negedge clk);
      init = 0;
      chk(cv == (rep[0] ? SHA192_IV_REF : MD5_IV_REF), "initial value");
      prev = cv;
      hash_in = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
      repeat (2) @(negedge clk);
      chk(cv == prev, "hold");
      chain = 1;
      @(negedge clk);
      chain = 0;
      chk(cv == hash_in, "chain from hash output");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
