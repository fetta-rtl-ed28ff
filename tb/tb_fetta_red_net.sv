// tb_fetta_red_net: self-checking test of the reduction network at full
// size (16 CE outputs, 4 levels of 8 adder switches, output transpose).
//
// Random switch modes, random valid bits and small-integer data. A new input
// vector enters every cycle; the modes stay fixed for a block of 20 vectors
// and change only while the pipeline is empty. A reference model applies the
// levels in integers (level l pairs positions that differ in bit l), then the
// optional transpose, and its result is expected LOGN = 4 cycles later.
// Half of the blocks also use a random bank index, which the model applies
// by flipping the direction of level-l switches where bit l is set.
// Also checks the complete reduction (every switch Add-Left: all 16 inputs
// summed at position 0) and a plain transpose. Inputs change after a rising
// edge; outputs are sampled 1 time unit after the edge. Has a watchdog.
module tb_fetta_red_net;
  import fetta_pkg::*;
  import tb_util_pkg::*;

  localparam int N = 16, LOGN = 4;
  logic clk = 0, rst_n = 0;
  word_t [N-1:0] din, dout;
  logic [N-1:0] din_valid = '0, dout_valid, tsel = '0;
  logic [LOGN-1:0] bank_idx = '0;
  logic [LOGN-1:0][N/2-1:0][1:0] mode = '0;
  int checks = 0, failures = 0;

  fetta_red_net #(.N(N)) dut (.*);

  always #5 clk = ~clk;

  typedef struct {
    int   v [N][4];
    logic ok [N];
  } vec_t;
  vec_t expq [$];

  function automatic int tp(int i);
    return ((i & 3) << 2) | (i >> 2);
  endfunction

  function automatic vec_t model(vec_t x);
    vec_t y;
    for (int l = 0; l < LOGN; l++) begin
      y = x;
      for (int k = 0; k < N / 2; k++) begin
        int il, ir, s [4];
        logic sv;
        il = ((k >> l) << (l + 1)) | (k & ((1 << l) - 1));
        ir = il | (1 << l);
        for (int e = 0; e < 4; e++)
          s[e] = (x.ok[il] ? x.v[il][e] : 0) + (x.ok[ir] ? x.v[ir][e] : 0);
        sv = x.ok[il] | x.ok[ir];
        unique case (sw_mode_e'(mode[l][k] ^ {1'b0, bank_idx[l]}))
          SW_PASS: ;
          SW_SWAP: begin
            y.v[il] = x.v[ir]; y.ok[il] = x.ok[ir];
            y.v[ir] = x.v[il]; y.ok[ir] = x.ok[il];
          end
          SW_ADD_LEFT:  begin y.v[il] = s; y.ok[il] = sv; y.ok[ir] = 0; end
          SW_ADD_RIGHT: begin y.v[ir] = s; y.ok[ir] = sv; y.ok[il] = 0; end
        endcase
      end
      x = y;
    end
    for (int i = 0; i < N; i++) begin
      int j;
      j = tsel[i] ? tp(i) : i;
      y.v[i] = x.v[j]; y.ok[i] = x.ok[j];
    end
    return y;
  endfunction

  task automatic apply(vec_t x);
    for (int i = 0; i < N; i++) begin
      din_valid[i] = x.ok[i];
      for (int e = 0; e < 4; e++) din[i][e] = i2bf(x.v[i][e]);
    end
    expq.push_back(model(x));
  endtask

  task automatic compare(vec_t y);
    for (int i = 0; i < N; i++) begin
      checks++;
      if (dout_valid[i] !== y.ok[i]) begin
        failures++;
        $display("FAIL valid %0d: got %b exp %b", i, dout_valid[i], y.ok[i]);
      end else if (y.ok[i]) begin
        for (int e = 0; e < 4; e++)
          if (bf2r(dout[i][e]) != real'(y.v[i][e])) begin
            failures++;
            $display("FAIL data %0d.%0d: got %f exp %0d", i, e, bf2r(dout[i][e]), y.v[i][e]);
          end
      end
    end
  endtask

  // pipeline: compare the entry launched LOGN cycles ago
  int launched = 0;
  vec_t pend [$];
  always @(posedge clk) begin
    #1;
    if (pend.size() == LOGN) compare(pend.pop_front());
  end

  task automatic run_block(int len, bit full_add);
    vec_t x;
    for (int c = 0; c < len; c++) begin
      for (int i = 0; i < N; i++) begin
        x.ok[i] = full_add ? 1'b1 : ($urandom_range(3) != 0);
        for (int e = 0; e < 4; e++) x.v[i][e] = rnd_small(20);
      end
      apply(x);
      pend.push_back(expq.pop_front());
      @(posedge clk);
    end
    // empty the pipeline
    for (int i = 0; i < N; i++) x.ok[i] = 0;
    for (int c = 0; c < LOGN; c++) begin
      apply(x);
      pend.push_back(expq.pop_front());
      @(posedge clk);
    end
  endtask

  initial begin
    vec_t blank;
    for (int i = 0; i < N; i++) blank.ok[i] = 0;
    din = '0;
    #12 rst_n = 1;
    @(posedge clk);
    // warm-up: fill the compare pipeline with empty vectors
    for (int c = 0; c < LOGN; c++) begin
      apply(blank); pend.push_back(expq.pop_front()); @(posedge clk);
    end
    // full reduction into position 0
    mode = {(LOGN * N / 2){SW_ADD_LEFT}};
    tsel = '0;
    run_block(10, 1);
    // transpose only
    mode = '0; tsel = '1;
    run_block(10, 0);
    for (int blk = 0; blk < 100; blk++) begin
      for (int l = 0; l < LOGN; l++)
        for (int k = 0; k < N / 2; k++) mode[l][k] = 2'($urandom);
      tsel = N'($urandom);
      bank_idx = (blk % 2) ? LOGN'($urandom) : '0;
      run_block(20, 0);
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
