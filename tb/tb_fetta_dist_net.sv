// tb_fetta_dist_net: self-checking test of the transposable butterfly
// distribution network at its full size (16 banks in, 16 CEs out).
//
// Every bank carries a unique tag, so each output can be traced back to the
// bank it came from. Checks:
//   identity with all selects 0;
//   transpose level alone: output {r,c} takes bank {c,r};
//   broadcast of bank p to all outputs, for every p, built only by
//     bank_idx = p with all select bits at zero-of-the-upper-half pattern
//     (the selects are the bit pattern of each output's position);
//   the same broadcast pattern moved to another bank group by bank_idx alone;
//   multicast of bank pairs (each bank copied to two outputs);
//   random select vectors against a reference that follows a value through
//   the levels (transpose first, then bit 3, 2, 1, 0).
// The network is combinational; outputs are checked 1 time unit after the
// inputs change. Has a watchdog.
module tb_fetta_dist_net;
  import fetta_pkg::*;

  localparam int N = 16, LOGN = 4;
  logic [N-1:0][63:0] din, dout;
  logic [N-1:0] tsel;
  logic [LOGN-1:0][N-1:0] sel;
  logic [LOGN-1:0] bank_idx;
  int checks = 0, failures = 0;

  fetta_dist_net #(.N(N), .EW(64)) dut (.*);

  function automatic int tp(int i);
    return ((i & 3) << 2) | (i >> 2);
  endfunction

  // reference: where does output o get its value from?
  function automatic int src_of(int o);
    int p;
    p = o;
    // walk back from the last level to the first
    for (int b = 0; b < LOGN; b++)
      if (sel[b][p] ^ bank_idx[b]) p = p ^ (1 << b);
    if (tsel[p]) p = tp(p);
    return p;
  endfunction

  task automatic chk_src(string what, int o, int exp_bank);
    checks++;
    if (dout[o] !== din[exp_bank]) begin
      failures++;
      $display("FAIL %s: out %0d got %h exp bank %0d", what, o, dout[o], exp_bank);
    end
  endtask

  initial begin
    for (int i = 0; i < N; i++) din[i] = {$urandom(), 24'(i), 8'hA5};
    tsel = '0; sel = '0; bank_idx = '0; #1;
    for (int o = 0; o < N; o++) chk_src("identity", o, o);
    tsel = '1; #1;
    for (int o = 0; o < N; o++) chk_src("transpose", o, tp(o));
    // broadcast: level b selects are bit b of the output position, so
    // each output climbs to the partner whose bits are all zero; bank_idx
    // then XORs the start bank into the path.
    tsel = '0;
    for (int b = 0; b < LOGN; b++)
      for (int o = 0; o < N; o++) sel[b][o] = o[b];
    for (int p = 0; p < N; p++) begin
      bank_idx = LOGN'(p); #1;
      for (int o = 0; o < N; o++) chk_src("broadcast", o, p);
    end
    // multicast: only bit 0 copies, pairs {2k, 2k+1} both take bank 2k
    sel = '0; bank_idx = '0;
    for (int o = 0; o < N; o++) sel[0][o] = o[0];
    #1;
    for (int o = 0; o < N; o++) chk_src("multicast", o, o & ~1);
    // random
    for (int it = 0; it < 3000; it++) begin
      for (int i = 0; i < N; i++) din[i] = {$urandom(), 24'(i), 8'h5A};
      tsel = N'($urandom); bank_idx = LOGN'($urandom);
      for (int b = 0; b < LOGN; b++) sel[b] = N'($urandom);
      #1;
      for (int o = 0; o < N; o++) chk_src("random", o, src_of(o));
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
