// tb_fetta_pkg: checks the BF16 multiplier and adder of fetta_pkg against
// the simulator's single-precision arithmetic.
// Multiplication: the exact product of two BF16 values fits in single
// precision, so the expected result is that product truncated to BF16.
// Addition: random operands are compared within one BF16 unit in the last
// place of the exact sum; small integers must come out exact.
module tb_fetta_pkg;
  import fetta_pkg::*;
  import tb_util_pkg::*;

  int checks = 0, failures = 0;

  function automatic bf16_t rnd_bf();
    bf16_t b;
    b[15]   = 1'($urandom_range(1));
    b[14:7] = 8'($urandom_range(150, 105));
    b[6:0]  = 7'($urandom);
    return b;
  endfunction

  initial begin : main
    bf16_t a, b, got, expb;
    real   ra, rb, ref_v, err;
    for (int n = 0; n < 2000; n++) begin
      a = rnd_bf(); b = rnd_bf();
      ra = bf2r(a); rb = bf2r(b);
      // multiplication: exact, then truncated
      got  = bf16_mul(a, b);
      expb = r2bf(ra * rb);
      checks++;
      if (got !== expb) begin
        failures++;
        if (failures < 10) $display("FAIL mul %h*%h = %h exp %h", a, b, got, expb);
      end
      // addition: within one ulp of the exact sum
      got   = bf16_add(a, b);
      ref_v = ra + rb;
      err   = bf2r(got) - ref_v;
      if (err < 0) err = -err;
      if (ref_v < 0) ref_v = -ref_v;
      checks++;
      if (err > ref_v / 128.0 + 1.0e-30) begin
        failures++;
        if (failures < 10) $display("FAIL add %h+%h = %h (err %g)", a, b, got, err);
      end
    end
    // integers are exact
    for (int x = -20; x <= 20; x++)
      for (int y = -12; y <= 12; y++) begin
        checks += 2;
        if (bf16_add(i2bf(x), i2bf(y)) !== i2bf(x + y)) begin
          failures++;
          if (failures < 10) $display("FAIL int add %0d+%0d", x, y);
        end
        if (bf2r(bf16_mul(i2bf(x), i2bf(y))) != real'(x * y)) begin
          failures++;
          if (failures < 10) $display("FAIL int mul %0d*%0d", x, y);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
