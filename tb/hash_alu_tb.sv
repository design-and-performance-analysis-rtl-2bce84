// hash_alu_tb - checks the final adder and hash output register: word-wise
// modulo-2^32 sums of chaining value and working variables (E, F zero in
// MD5 mode), the one-clock valid flag, and that the output holds when en
// is low.
module hash_alu_tb;
  import hash_pkg::*;

  logic clk = 0, rst_n = 0;
  mode_e mode = MODE_MD5;
  logic en = 0, valid;
  state_t cv = '0, st = '0, hash;
  int checks = 0, failures = 0;

  hash_alu dut (.*);

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
      $display("FAIL %s: hash=%h", what, hash);
    end
  endtask

  initial begin
    logic [191:0] want;
    bit sha;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 50; rep++) begin
      sha = rep[0];
      mode = sha ? MODE_SHA192 : MODE_MD5;
      cv = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
      st = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
      if (rep == 2) cv = '1;  // every word wraps around
      for (int j = 0; j < 6; j++)
        want[j*32 +: 32] = (!sha && j < 2) ? 32'd0 : 32'(longint'(cv[j*32 +: 32]) + longint'(st[j*32 +: 32]));
      en = 1;
      @(negedge clk);
      en = 0;
      chk(valid, "valid after en");
      chk(hash == want, "sum");
      cv = ~cv;
      @(negedge clk);
      chk(!valid, "valid one clock");
      chk(hash == want, "hold");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
