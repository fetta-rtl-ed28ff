// tb_fetta_tcu: self-checking test of the tensor contraction unit at full
// size: two 16-way distribution networks, 16 CEs of 4x4 PEs and the 16-input
// reduction network.
//
// Weight-stationary runs: every bank carries random small integers; the IB
// network gets random transpose / butterfly selects and a random start bank
// index (so CEs receive unicast, multicast or broadcast copies), the IA
// network the same with its own random settings. The testbench finds the
// source bank of every CE output with a reference walk through the network
// levels, loads 4 IB words (north or east) and then streams n IA vectors.
// The expected CE psums are integer vector-matrix products, which then go
// through a reference reduction network with random switch modes, a random
// reduction bank index and a random output transpose. Each IA vector must produce one reduction-network
// output vector, in order, with the reference valid bits and values.
// Output-stationary runs: every CE gets its own bank; the reduction network
// passes everything; each 4x4 result tile must leave the network bottom row
// first with red_row naming the row.
// Inputs change on the falling edge; outputs are sampled on the rising edge.
// Has a watchdog.
module tb_fetta_tcu;
  import fetta_pkg::*;
  import tb_util_pkg::*;

  localparam int N = 16, LOGN = 4;
  logic clk = 0, rst_n = 0;
  ce_ctrl_t ce_ctrl = '0;
  word_t [N-1:0] bank_rdata = '0, red_out;
  logic [N-1:0] ia_tsel = '0, ib_tsel = '0, red_tsel = '0, red_valid;
  logic [LOGN-1:0][N-1:0] ia_sel = '0, ib_sel = '0;
  logic [LOGN-1:0] ia_bank_idx = '0, ib_bank_idx = '0, red_bank_idx = '0;
  logic [LOGN-1:0][N/2-1:0][1:0] red_mode = '0;
  logic [1:0] red_row;
  int checks = 0, failures = 0;

  fetta_tcu #(.NCE(N)) dut (.*);

  always #5 clk = ~clk;

  function automatic int tp(int i);
    return ((i & 3) << 2) | (i >> 2);
  endfunction

  function automatic int src_of(int o, logic [N-1:0] ts, logic [LOGN-1:0][N-1:0] sl,
                                logic [LOGN-1:0] bi);
    int p;
    p = o;
    for (int b = 0; b < LOGN; b++) if (sl[b][p] ^ bi[b]) p = p ^ (1 << b);
    if (ts[p]) p = tp(p);
    return p;
  endfunction

  // reference reduction network on integers; ok[] = valid bits
  task automatic red_model(inout int v [N][4], inout bit ok [N]);
    int y [N][4];
    bit yo [N];
    for (int l = 0; l < LOGN; l++) begin
      y = v; yo = ok;
      for (int k = 0; k < N / 2; k++) begin
        int il, ir, s [4];
        il = ((k >> l) << (l + 1)) | (k & ((1 << l) - 1));
        ir = il | (1 << l);
        for (int e = 0; e < 4; e++) s[e] = (ok[il] ? v[il][e] : 0) + (ok[ir] ? v[ir][e] : 0);
        case (sw_mode_e'(red_mode[l][k] ^ {1'b0, red_bank_idx[l]}))
          SW_SWAP: begin y[il] = v[ir]; yo[il] = ok[ir]; y[ir] = v[il]; yo[ir] = ok[il]; end
          SW_ADD_LEFT:  begin y[il] = s; yo[il] = ok[il] | ok[ir]; yo[ir] = 0; end
          SW_ADD_RIGHT: begin y[ir] = s; yo[ir] = ok[il] | ok[ir]; yo[il] = 0; end
          default: ;
        endcase
      end
      v = y; ok = yo;
    end
    for (int i = 0; i < N; i++) begin
      y[i] = v[tp(i)]; yo[i] = ok[tp(i)];
      if (!red_tsel[i]) begin y[i] = v[i]; yo[i] = ok[i]; end
    end
    v = y; ok = yo;
  endtask

  // expected outputs, one queue entry per element
  int  expv [N][4][$];
  bit  expo [N][$];
  int  exprow [$];
  bit  os_run = 0;
  int  outs = 0;

  always @(posedge clk) if (rst_n && red_valid != '0) begin
    outs++;
    if (expo[0].size() == 0) begin
      failures++; $display("FAIL unexpected output");
    end else begin
      if (os_run) begin
        int r;
        r = exprow.pop_front();
        checks++;
        if (red_row != 2'(r)) begin failures++; $display("FAIL red_row %0d exp %0d", red_row, r); end
      end
      for (int i = 0; i < N; i++) begin
        bit o;
        o = expo[i].pop_front();
        checks++;
        if (red_valid[i] !== o) begin
          failures++; $display("FAIL valid %0d got %b exp %b", i, red_valid[i], o);
        end
        for (int e = 0; e < 4; e++) begin
          int x;
          x = expv[i][e].pop_front();
          if (o) begin
            checks++;
            if (bf2r(red_out[i][e]) != real'(x)) begin
              failures++;
              $display("FAIL out %0d.%0d got %f exp %0d", i, e, bf2r(red_out[i][e]), x);
            end
          end
        end
      end
    end
  end

  task automatic run_ws(int n, ib_dir_e dir);
    int bm [N][4][4];
    int words [N][4];
    int srcb [N], srca [N];
    ia_tsel = N'($urandom); ib_tsel = N'($urandom);
    for (int b = 0; b < LOGN; b++) begin ia_sel[b] = N'($urandom); ib_sel[b] = N'($urandom); end
    ia_bank_idx = LOGN'($urandom); ib_bank_idx = LOGN'($urandom);
    for (int l = 0; l < LOGN; l++)
      for (int k = 0; k < N / 2; k++) red_mode[l][k] = 2'($urandom);
    red_tsel = N'($urandom);
    red_bank_idx = LOGN'($urandom);
    for (int j = 0; j < N; j++) begin
      srcb[j] = src_of(j, ib_tsel, ib_sel, ib_bank_idx);
      srca[j] = src_of(j, ia_tsel, ia_sel, ia_bank_idx);
    end
    ce_ctrl.df = DF_WS; ce_ctrl.ib_dir = dir;
    for (int k = 0; k < 4; k++) begin
      @(negedge clk);
      ce_ctrl.ia_valid = 0; ce_ctrl.ib_load = 1; ce_ctrl.ib_swap = (k == 3);
      for (int b = 0; b < N; b++)
        for (int e = 0; e < 4; e++) begin
          words[b][e] = rnd_small(3);
          bank_rdata[b][e] = i2bf(words[b][e]);
        end
      for (int j = 0; j < N; j++)
        for (int e = 0; e < 4; e++)
          if (dir == IB_NORTH) bm[j][3-k][e] = words[srcb[j]][e];
          else                 bm[j][e][k]   = words[srcb[j]][e];
    end
    for (int c = 0; c < n; c++) begin
      int v [N][4];
      bit ok [N];
      @(negedge clk);
      ce_ctrl.ia_valid = 1; ce_ctrl.ib_load = 0; ce_ctrl.ib_swap = 0;
      for (int b = 0; b < N; b++)
        for (int e = 0; e < 4; e++) begin
          words[b][e] = rnd_small(3);
          bank_rdata[b][e] = i2bf(words[b][e]);
        end
      for (int j = 0; j < N; j++) begin
        ok[j] = 1;
        for (int col = 0; col < 4; col++) begin
          v[j][col] = 0;
          for (int r = 0; r < 4; r++) v[j][col] += words[srca[j]][r] * bm[j][r][col];
        end
      end
      red_model(v, ok);
      for (int i = 0; i < N; i++) begin
        expo[i].push_back(ok[i]);
        for (int e = 0; e < 4; e++) expv[i][e].push_back(v[i][e]);
      end
    end
    @(negedge clk); ce_ctrl.ia_valid = 0;
    repeat (12) @(negedge clk);
  endtask

  task automatic run_os(int n);
    int a [N][4][12], b [N][12][4];
    ia_tsel = '0; ib_tsel = '0; ia_sel = '0; ib_sel = '0;
    ia_bank_idx = '0; ib_bank_idx = '0; red_mode = '0; red_tsel = '0; red_bank_idx = '0;
    ce_ctrl.df = DF_OS; ce_ctrl.ib_dir = IB_NORTH; ce_ctrl.ib_load = 0; ce_ctrl.ib_swap = 0;
    // IA and IB share the banks here (both networks see the same data)
    for (int k = 0; k < n; k++) begin
      @(negedge clk);
      ce_ctrl.ia_valid = 1; ce_ctrl.first = (k == 0); ce_ctrl.last = (k == n - 1);
      for (int j = 0; j < N; j++)
        for (int e = 0; e < 4; e++) begin
          a[j][e][k] = rnd_small(4); b[j][k][e] = a[j][e][k];
          bank_rdata[j][e] = i2bf(a[j][e][k]);
        end
    end
    @(negedge clk); ce_ctrl.ia_valid = 0; ce_ctrl.first = 0; ce_ctrl.last = 0;
    for (int r = 3; r >= 0; r--) begin
      exprow.push_back(r);
      for (int j = 0; j < N; j++) begin
        expo[j].push_back(1);
        for (int c = 0; c < 4; c++) begin
          int s;
          s = 0;
          for (int k = 0; k < n; k++) s += a[j][r][k] * b[j][k][c];
          expv[j][c].push_back(s);
        end
      end
    end
    repeat (16) @(negedge clk);
  endtask

  initial begin
    #12 rst_n = 1;
    for (int it = 0; it < 30; it++) run_ws(1 + $urandom_range(5), (it % 2) ? IB_EAST : IB_NORTH);
    checks++;
    if (expo[0].size() != 0) begin failures++; $display("FAIL missing WS outputs"); end
    os_run = 1;
    for (int it = 0; it < 10; it++) run_os(4 + $urandom_range(6));
    checks++;
    if (expo[0].size() != 0) begin failures++; $display("FAIL missing OS outputs"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    #1000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
