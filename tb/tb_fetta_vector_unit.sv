// tb_fetta_vector_unit: self-checking test of the 64-lane vector unit.
//
// Random operations and operands every cycle: PASS, RELU, RELU_BWD (a passed
// where b > 0), SCALE (s * a) and AXPY (s * a + b). Operands are small
// integers or halves so the results are exact in BF16. The result and
// y_valid appear one cycle after the inputs; y holds when in_valid is low.
// Inputs change on the falling edge. Has a watchdog.
module tb_fetta_vector_unit;
  import fetta_pkg::*;
  import tb_util_pkg::*;

  localparam int LANES = 64;
  logic clk = 0, rst_n = 0, in_valid = 0, y_valid;
  vop_e op = VOP_PASS;
  bf16_t scalar = '0;
  bf16_t [LANES-1:0] a = '0, b = '0, y;
  int checks = 0, failures = 0;
  int counts [5];

  fetta_vector_unit #(.LANES(LANES)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    real av [LANES], bv [LANES], ev [LANES], s;
    bf16_t held [LANES];
    #12 rst_n = 1;
    for (int it = 0; it < 1000; it++) begin
      @(negedge clk);
      in_valid = ($urandom_range(4) != 0);
      op = vop_e'($urandom_range(4));
      s = real'(rnd_small(8)) / 2.0;
      scalar = r2bf(s);
      for (int i = 0; i < LANES; i++) begin
        av[i] = real'(rnd_small(10)); bv[i] = real'(rnd_small(10));
        a[i] = r2bf(av[i]); b[i] = r2bf(bv[i]);
        unique case (op)
          VOP_PASS:     ev[i] = av[i];
          VOP_RELU:     ev[i] = (av[i] > 0.0) ? av[i] : 0.0;
          VOP_RELU_BWD: ev[i] = (bv[i] > 0.0) ? av[i] : 0.0;
          VOP_SCALE:    ev[i] = s * av[i];
          default:      ev[i] = s * av[i] + bv[i];
        endcase
        held[i] = y[i];
      end
      @(posedge clk); #1;
      checks++;
      if (y_valid !== in_valid) begin failures++; $display("FAIL y_valid"); end
      if (in_valid) counts[op]++;
      for (int i = 0; i < LANES; i++) begin
        checks++;
        if (in_valid ? (bf2r(y[i]) != ev[i]) : (y[i] !== held[i])) begin
          failures++;
          $display("FAIL op %0d lane %0d: got %f exp %f", op, i, bf2r(y[i]), ev[i]);
        end
      end
    end
    for (int o = 0; o < 5; o++) begin
      checks++;
      if (counts[o] == 0) begin failures++; $display("FAIL op %0d never run", o); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    #1000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
