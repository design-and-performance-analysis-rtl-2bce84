// msg_sched_tb - loads random 16-word blocks into the message register and
// checks (a) MD5 reads of X[k] for random k, with the block unchanged by
// steps, and (b) the SHA-192 expanded words W0..W79 against the reference
// recurrence W[t] = rotl1(W[t-3]^W[t-8]^W[t-14]^W[t-16]).
module msg_sched_tb;
  import hash_pkg::*;
  import hash_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  mode_e mode = MODE_MD5;
  logic load_en = 0, advance = 0;
  word_t data_in = '0, w_out;
  logic [STEP_W-1:0] step = '0;
  logic [3:0] widx = '0;
  int checks = 0, failures = 0;
  rw_t blk [16];
  rw_t wx [80];

  msg_sched dut (.*);

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

  task automatic load_block();
    for (int i = 0; i < 16; i++) blk[i] = $urandom;
    for (int i = 0; i < 16; i++) begin
      @(negedge clk);
      load_en = 1; data_in = blk[i];
    end
    @(negedge clk);
    load_en = 0;
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 5; rep++) begin
      mode = MODE_MD5;
      load_block();
      for (int i = 0; i < 64; i++) begin
        step = STEP_W'(i); widx = 4'($urandom); advance = 1;
        #1;
        chk(w_out == blk[widx], $sformatf("MD5 X[%0d]", widx));
        @(negedge clk);
      end
      advance = 0;
      mode = MODE_SHA192;
      load_block();
      for (int t = 0; t < 16; t++) wx[t] = blk[t];
      for (int t = 16; t < 80; t++) wx[t] = rl(wx[t-3] ^ wx[t-8] ^ wx[t-14] ^ wx[t-16], 1);
      for (int t = 0; t < 80; t++) begin
        step = STEP_W'(t); advance = 1;
        #1;
        chk(w_out == wx[t], $sformatf("SHA W%0d got %h want %h", t, w_out, wx[t]));
        @(negedge clk);
      end
      advance = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
