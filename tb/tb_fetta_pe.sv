// tb_fetta_pe: self-checking test of one processing element.
//
// Drives the PE directly, cycle by cycle, with small-integer BF16 values so
// every expected result is exact, and checks:
//   stationary, IB from the north: shadow load, ib_out chain, swap, MAC with
//     psum_in, bypass of psum_in when no IA is valid, loading the next IB
//     while the current one is in use (double buffering);
//   stationary, IB from the east;
//   output stationary: IB pipeline (ib_out = last ib_n), local accumulation
//     over a random number of steps with 'first' clearing the accumulator,
//     hand-off to the drain register on 'last', and the drain shift.
// Inputs change on the falling edge, outputs are checked after the rising
// edge. A watchdog ends the run if it hangs.
module tb_fetta_pe;
  import fetta_pkg::*;
  import tb_util_pkg::*;

  logic clk = 0, rst_n = 0;
  dataflow_e df = DF_WS;
  ib_dir_e ib_dir = IB_NORTH;
  bf16_t ia_in = '0, ib_n = '0, ib_e = '0, psum_in = '0;
  logic valid = 0, ib_load = 0, ib_swap = 0, first = 0, last = 0, drain_shift = 0;
  bf16_t ib_out, psum_out;
  int checks = 0, failures = 0;

  fetta_pe dut (.*);

  always #5 clk = ~clk;

  task automatic chk(string what, bf16_t got, int exp);
    checks++;
    if (bf2r(got) != real'(exp)) begin
      failures++;
      $display("FAIL %s: got %h (%f) exp %0d", what, got, bf2r(got), exp);
    end
  endtask

  task automatic step;
    @(posedge clk); #1;
  endtask

  task automatic idle;
    valid = 0; ib_load = 0; ib_swap = 0; first = 0; last = 0; drain_shift = 0;
  endtask

  initial begin
    int b_cur, b_nxt, a, p, acc, k, x;
    #12 rst_n = 1;
    // ------------------------------------------------ stationary, north
    for (int it = 0; it < 50; it++) begin
      df = (it % 2) ? DF_IS : DF_WS;
      ib_dir = IB_NORTH;
      b_cur = rnd_small(12);
      idle(); ib_load = 1; ib_n = i2bf(b_cur);
      step();
      chk("ib_out shadow", ib_out, b_cur);
      idle(); ib_swap = 1;
      step();
      // compute with b_cur while the next IB is loaded
      b_nxt = rnd_small(12);
      for (int j = 0; j < 4; j++) begin
        a = rnd_small(12); p = rnd_small(100);
        idle(); valid = 1; ia_in = i2bf(a); psum_in = i2bf(p);
        if (j == 1) begin ib_load = 1; ib_n = i2bf(b_nxt); end
        step();
        chk("stationary mac", psum_out, p + a * b_cur);
      end
      chk("shadow holds next", ib_out, b_nxt);
      idle(); p = rnd_small(100); psum_in = i2bf(p); ia_in = i2bf(7);
      step();
      chk("psum bypass", psum_out, p);
      idle(); ib_swap = 1; step();
      a = rnd_small(12); p = rnd_small(100);
      idle(); valid = 1; ia_in = i2bf(a); psum_in = i2bf(p);
      step();
      chk("after swap", psum_out, p + a * b_nxt);
    end
    // ------------------------------------------------ stationary, east
    for (int it = 0; it < 20; it++) begin
      df = DF_IS; ib_dir = IB_EAST;
      b_cur = rnd_small(12);
      idle(); ib_load = 1; ib_e = i2bf(b_cur); ib_n = i2bf(99);
      step();
      chk("east shadow", ib_out, b_cur);
      idle(); ib_swap = 1; step();
      a = rnd_small(12); p = rnd_small(100);
      idle(); valid = 1; ia_in = i2bf(a); psum_in = i2bf(p);
      step();
      chk("east mac", psum_out, p + a * b_cur);
    end
    // ------------------------------------------------ output stationary
    df = DF_OS; ib_dir = IB_NORTH;
    for (int it = 0; it < 40; it++) begin
      int bs [16];
      k = 1 + int'($urandom_range(6));
      for (int j = 0; j < k; j++) bs[j] = rnd_small(8);
      // IB enters one cycle ahead of the matching IA
      idle(); ib_n = i2bf(bs[0]); step();
      chk("os ib pipeline", ib_out, bs[0]);
      acc = 0;
      for (int j = 0; j < k; j++) begin
        a = rnd_small(8);
        acc += a * bs[j];
        idle(); valid = 1; ia_in = i2bf(a); first = (j == 0); last = (j == k - 1);
        ib_n = i2bf(bs[j + 1]);
        step();
      end
      chk("os result", psum_out, acc);
      x = rnd_small(100);
      idle(); psum_in = i2bf(x); step();
      chk("os hold", psum_out, acc);
      idle(); drain_shift = 1; psum_in = i2bf(x); step();
      chk("os drain shift", psum_out, x);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    #200000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
