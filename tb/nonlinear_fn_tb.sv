// nonlinear_fn_tb - checks the non-linear function unit for every mode and
// round against the boolean definitions, on random and corner inputs.
module nonlinear_fn_tb;
  import hash_pkg::*;

  mode_e mode;
  logic [1:0] round;
  word_t b, c, d, f;
  int checks = 0, failures = 0;

  nonlinear_fn dut (.*);

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic word_t expect_f(input bit m, input int r, input word_t x, y, z);
    if (!m) begin
      case (r)
        0: return (x & y) | (~x & z);
        1: return (x & z) | (y & ~z);
        2: return x ^ y ^ z;
        default: return y ^ (x | ~z);
      endcase
    end
    case (r)
      0: return (x & y) | (~x & z);
      2: return (x & y) | (x & z) | (y & z);
      default: return x ^ y ^ z;
    endcase
  endfunction

  initial begin
    for (int n = 0; n < 400; n++) begin
      for (int m = 0; m < 2; m++) begin
        for (int r = 0; r < 4; r++) begin
          mode = mode_e'(m); round = 2'(r);
          b = (n == 0) ? 32'hffff0000 : $urandom;
          c = (n == 0) ? 32'hff00ff00 : $urandom;
          d = (n == 0) ? 32'hf0f0f0f0 : $urandom;
          #1;
          checks++;
          if (f !== expect_f(m[0], r, b, c, d)) begin
            failures++;
            $display("FAIL mode %0d round %0d: %h", m, r, f);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
