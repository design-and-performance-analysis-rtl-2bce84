// integrity_unit_tb - end-to-end test of the unified MD5 / SHA-192 unit at its
// default parameters.
//
// Hashes padded messages through the top level and compares every block
// result with the reference models of hash_ref_pkg; the MD5 reference (and
// so the unit) is also checked against published MD5 digests of "" and
// "abc" and a 2-block message. It covers: both modes, switching mode
// between messages, Start New and Continue (multi-block messages), gaps in
// data_valid during loading, and requests ignored while busy. The latency
// from the 16th accepted word to hash_valid is checked: 65 clocks (MD5),
// 81 clocks (SHA-192). Each mechanism is counted and must occur.
module integrity_unit_tb;
  import hash_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic mode = 1'b0, start_new = 1'b0, cont = 1'b0, data_valid = 1'b0;
  logic [31:0] data_in = '0;
  logic data_ready, busy, hash_valid;
  logic [191:0] hash_out;

  int checks = 0, failures = 0;
  int n_md5 = 0, n_sha = 0, n_new = 0, n_cont = 0, n_switch = 0, n_gap = 0, n_ignored = 0;
  int last_mode = -1;

  integrity_unit dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // Runs one block; returns the hash. gaps = 1 inserts idle clocks in loading.
  task automatic run_block(input bit m, input bit first, input rw_t w[$], input int base,
                           input bit gaps, output logic [191:0] h);
    int lat;
    @(negedge clk);
    mode = m; start_new = first; cont = !first;
    @(negedge clk);
    start_new = 0; cont = 0;
    if (first) n_new++; else n_cont++;
    if (last_mode != -1 && last_mode != int'(m)) n_switch++;
    last_mode = int'(m);
    check(busy && data_ready, "unit did not enter loading");
    for (int i = 0; i < 16; i++) begin
      if (gaps && (i % 5 == 2)) begin
        data_valid = 0;
        repeat (2) @(negedge clk);
        n_gap++;
      end
      data_valid = 1; data_in = w[base + i];
      if (i == 3) begin  // a request while busy must be ignored
        start_new = 1; mode = !m;
        n_ignored++;
      end
      @(negedge clk);
      start_new = 0; mode = m;
    end
    data_valid = 0; data_in = '0;
    lat = 0;
    while (!hash_valid && lat < 200) begin
      @(negedge clk);
      lat++;
    end
    check(lat == (m ? 81 : 65), $sformatf("latency %0d clocks in mode %0d", lat, m));
    h = hash_out;
    if (m) n_sha++; else n_md5++;
    @(negedge clk);
    check(!busy && !hash_valid, "unit not idle after block");
  endtask

  task automatic hash_msg(input bit m, input byte unsigned msg[$], input bit gaps,
                          output logic [191:0] h);
    rw_t w[$];
    logic [191:0] ref_s, hw;
    blk_t blk;
    pad(msg, !m, w);
    ref_s = m ? SHA192_IV_REF : MD5_IV_REF;
    for (int b = 0; b < w.size() / 16; b++) begin
      for (int i = 0; i < 16; i++) blk[i] = w[16*b + i];
      ref_s = m ? sha192_block(ref_s, blk, 1'b0) : md5_block(ref_s, blk);
      run_block(m, b == 0, w, 16*b, gaps, hw);
      check(hw == ref_s, $sformatf("mode %0d block %0d: got %h want %h", m, b, hw, ref_s));
    end
    h = hw;
  endtask

  function automatic void str2bytes(input string s, ref byte unsigned q[$]);
    q.delete();
    for (int i = 0; i < s.len(); i++) q.push_back(s[i]);
  endfunction

  initial begin : main
    byte unsigned msg[$];
    logic [191:0] h;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(!busy && !hash_valid, "idle after reset");

    // Published MD5 digests.
    str2bytes("", msg);
    hash_msg(0, msg, 0, h);
    check(md5_digest(h) == 128'hd41d8cd98f00b204e9800998ecf8427e, "MD5(\"\")");
    check(h[63:0] == 64'd0, "MD5 leaves E,F zero");
    str2bytes("abc", msg);
    hash_msg(0, msg, 1, h);
    check(md5_digest(h) == 128'h900150983cd24fb0d6963f7d28e17f72, "MD5(\"abc\")");

    // SHA-192 of "abc" (mode switch), then a 2-block message.
    hash_msg(1, msg, 0, h);
    $display("SHA-192(\"abc\") = %h", h);
    str2bytes("12345678901234567890123456789012345678901234567890123456789012345678901234567890", msg);
    hash_msg(1, msg, 1, h);
    $display("SHA-192(80 digits) = %h", h);
    hash_msg(0, msg, 0, h);
    check(md5_digest(h) == 128'h57edf4a22be3c955ac49da2e2107b67a, "MD5(80 digits)");

    // Random messages in both modes.
    for (int r = 0; r < 6; r++) begin
      msg.delete();
      for (int i = 0; i < $urandom_range(0, 150); i++) msg.push_back(8'($urandom));
      hash_msg(r % 2 == 1, msg, r % 3 == 0, h);
    end

    check(n_md5 > 0,     "no MD5 block");
    check(n_sha > 0,     "no SHA-192 block");
    check(n_new > 0,     "no Start New");
    check(n_cont > 0,    "no Continue");
    check(n_switch > 0,  "no mode switch");
    check(n_gap > 0,     "no loading gap");
    check(n_ignored > 0, "no request while busy");
    $display("blocks: md5=%0d sha192=%0d start_new=%0d continue=%0d mode_switches=%0d gaps=%0d ignored=%0d",
             n_md5, n_sha, n_new, n_cont, n_switch, n_gap, n_ignored);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
