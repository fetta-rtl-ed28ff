// tb_util_pkg: BF16 helpers for the testbenches, written independently of
// the design's arithmetic: conversions go through IEEE double precision
// ($realtobits / $bitstoreal), arithmetic is done on reals or integers.
package tb_util_pkg;
  // truncating conversion of a real to BF16 (normal range only, 0 -> 0)
  function automatic logic [15:0] r2bf(real v);
    logic [63:0] d;
    int          e;
    if (v == 0.0) return 16'h0000;
    d = $realtobits(v);
    e = int'(d[62:52]) - 1023 + 127;
    if (e <= 0) return {d[63], 15'd0};
    return {d[63], 8'(e), d[51:45]};
  endfunction
  function automatic real bf2r(logic [15:0] b);
    logic [63:0] d;
    if (b[14:7] == 8'd0) return 0.0;
    d = {b[15], 11'(int'(b[14:7]) - 127 + 1023), b[6:0], 45'd0};
    return $bitstoreal(d);
  endfunction
  // exact for integers up to 256 in magnitude
  function automatic logic [15:0] i2bf(int v);
    return r2bf(real'(v));
  endfunction
  function automatic int rnd_small(int lim);
    return int'($urandom_range(2 * lim)) - lim;
  endfunction
endpackage
