// tb_fetta_adder_switch: self-checking test of the reduction-network switch.
//
// Random small-integer words and random valid bits on both inputs, every
// mode. Expected outputs: Pass (l=a, r=b), Swap (l=b, r=a), Add-Left (l=a+b,
// r empty), Add-Right (r=a+b, l empty); an add with one valid input forwards
// that input, with no valid input the result is empty. Empty outputs must
// carry valid=0 and zero data. The switch is combinational; values are
// checked 1 time unit after they are applied. Has a watchdog.
module tb_fetta_adder_switch;
  import fetta_pkg::*;
  import tb_util_pkg::*;

  sw_mode_e mode;
  word_t a, b, l, r;
  logic a_valid, b_valid, l_valid, r_valid;
  int checks = 0, failures = 0;
  int counts [4];

  fetta_adder_switch dut (.*);

  task automatic chk_word(string what, word_t got, logic gv, int exp [4], logic ev);
    checks++;
    if (gv !== ev) begin
      failures++;
      $display("FAIL %s valid: got %b exp %b (mode %0d)", what, gv, ev, mode);
      return;
    end
    for (int i = 0; i < 4; i++)
      if (bf2r(got[i]) != real'(exp[i])) begin
        failures++;
        $display("FAIL %s[%0d]: got %f exp %0d (mode %0d)", what, i, bf2r(got[i]), exp[i], mode);
        return;
      end
  endtask

  initial begin
    int av [4], bv [4], sv [4], zv [4];
    for (int it = 0; it < 2000; it++) begin
      mode = sw_mode_e'($urandom_range(3));
      a_valid = ($urandom_range(3) != 0);
      b_valid = ($urandom_range(3) != 0);
      for (int i = 0; i < 4; i++) begin
        av[i] = rnd_small(100); bv[i] = rnd_small(100); zv[i] = 0;
        a[i] = i2bf(av[i]); b[i] = i2bf(bv[i]);
        sv[i] = (a_valid ? av[i] : 0) + (b_valid ? bv[i] : 0);
      end
      counts[mode]++;
      #1;
      unique case (mode)
        SW_PASS: begin
          chk_word("pass l", l, l_valid, av, a_valid);
          chk_word("pass r", r, r_valid, bv, b_valid);
        end
        SW_SWAP: begin
          chk_word("swap l", l, l_valid, bv, b_valid);
          chk_word("swap r", r, r_valid, av, a_valid);
        end
        SW_ADD_LEFT: begin
          chk_word("addl l", l, l_valid, sv, a_valid | b_valid);
          chk_word("addl r", r, r_valid, zv, 1'b0);
        end
        SW_ADD_RIGHT: begin
          chk_word("addr r", r, r_valid, sv, a_valid | b_valid);
          chk_word("addr l", l, l_valid, zv, 1'b0);
        end
      endcase
    end
    for (int m = 0; m < 4; m++) begin
      checks++;
      if (counts[m] == 0) begin failures++; $display("FAIL mode %0d never tested", m); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    #100000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
