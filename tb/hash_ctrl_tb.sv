// hash_ctrl_tb - drives Start New / Continue and data_valid (with random
// gaps) into the sequencer and checks the control sequence it produces:
// one cv_init or cv_chain strobe, exactly 16 load_en, core_load with the
// 16th word, 64 (MD5) or 80 (SHA-192) consecutive advance clocks with step
// counting 0..N-1, then one alu_en clock; the latched mode; busy; and that
// start requests during a block are ignored.
module hash_ctrl_tb;
  import hash_pkg::*;

  logic clk = 0, rst_n = 0;
  mode_e mode_in = MODE_MD5, mode;
  logic start_new = 0, cont = 0, data_valid = 0;
  logic cv_init, cv_chain, load_en, core_load, advance, alu_en, busy, data_ready;
  logic [STEP_W-1:0] step;
  int checks = 0, failures = 0;

  hash_ctrl dut (.*);

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

  task automatic block(input mode_e m, input bit first);
    int n_load = 0, n_adv = 0, n_alu = 0, n_core = 0, n_cv = 0, cyc = 0;
    int expect_steps;
    bit order_ok = 1;
    expect_steps = (m == MODE_MD5) ? 64 : 80;
    @(negedge clk);
    mode_in = m; start_new = first; cont = !first;
    #1;
    chk(first ? (cv_init && !cv_chain) : (cv_chain && !cv_init), "start strobe");
    @(negedge clk);
    start_new = 0; cont = 0;
    mode_in = (m == MODE_MD5) ? MODE_SHA192 : MODE_MD5;  // must not matter now
    while (cyc < 400 && !(alu_en)) begin
      data_valid = ($urandom_range(0, 3) != 0);
      if (cyc == 5) start_new = 1;   // ignored while busy
      #1;
      chk(busy, "busy during block");
      chk(mode == m, "mode latched");
      if (cv_init || cv_chain) n_cv++;
      if (load_en) begin
        n_load++;
        if (core_load) begin
          n_core++;
          chk(n_load == 16, "core_load with 16th word");
        end
      end
      if (advance) begin
        if (int'(step) != n_adv) order_ok = 0;
        n_adv++;
      end
      @(negedge clk);
      start_new = 0;
      cyc++;
    end
    data_valid = 0;
    #1;
    chk(alu_en, "alu_en reached");
    @(negedge clk);
    #1;
    n_alu++;
    chk(!busy && !alu_en, "idle after final clock");
    chk(n_load == 16, $sformatf("16 words loaded, got %0d", n_load));
    chk(n_core == 1, "one core_load");
    chk(n_cv == 0, "no extra chaining strobe");
    chk(n_adv == expect_steps, $sformatf("%0d steps, got %0d", expect_steps, n_adv));
    chk(order_ok, "step counts 0..N-1");
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    chk(!busy && !advance && !load_en, "idle after reset");
    block(MODE_MD5, 1);
    block(MODE_MD5, 0);
    block(MODE_SHA192, 1);
    block(MODE_SHA192, 0);
    block(MODE_MD5, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
