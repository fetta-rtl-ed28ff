// tb_fetta_ce: self-checking test of one 4x4 contraction engine.
//
// The testbench plays the controller's schedule and compares against
// integer matrix products (small integers, so BF16 results are exact):
//   WS/IS, IB from the north or from the east: 4-cycle preload of the first
//     tile's IB words with a swap on the last one; per tile max(n, 7) cycles
//     of which the first n carry an IA vector; the next tile's IB words are
//     loaded at cycles 3..6 and swapped in on the last cycle of the tile.
//     North: word k holds row 3-k of the stationary matrix; east: word k
//     holds column k. Each IA vector x gives psum[c] = sum_r x[r] * B[r][c];
//     psums come out in issue order, flagged by psum_valid.
//   OS: per tile max(n, 4) cycles; step k drives ia[r] = A[r][k] and
//     ib[c] = B[k][c] with first / last marks. The finished 4x4 tile drains
//     bottom row first, one row per cycle, and psum_row names the row.
// n is random (1..10 stationary, 4..10 OS), several tiles back to back.
// Inputs change on the falling edge; outputs are sampled on the rising edge.
// Has a watchdog.
module tb_fetta_ce;
  import fetta_pkg::*;
  import tb_util_pkg::*;

  logic clk = 0, rst_n = 0;
  ce_ctrl_t ctrl = '0;
  bf16_t [3:0] ia = '0, ib = '0, psum;
  logic psum_valid;
  logic [1:0] psum_row;
  int checks = 0, failures = 0;

  fetta_ce #(.DIM(4)) dut (.*);

  always #5 clk = ~clk;

  int expq [4][$];        // stationary: expected psum columns in order
  int os_exp [$][4][4];   // OS: expected tiles in order
  bit os_mode = 0;
  int drained = 0, outs = 0;

  always @(posedge clk) if (rst_n && psum_valid) begin
    int e [4];
    outs++;
    if (!os_mode) begin
      if (expq[0].size() == 0) begin
        failures++; $display("FAIL unexpected psum"); 
      end else begin
        for (int c = 0; c < 4; c++) e[c] = expq[c].pop_front();
        for (int c = 0; c < 4; c++) begin
          checks++;
          if (bf2r(psum[c]) != real'(e[c])) begin
            failures++;
            $display("FAIL stationary col %0d: got %f exp %0d", c, bf2r(psum[c]), e[c]);
          end
        end
      end
    end else begin
      checks++;
      if (psum_row != 2'(3 - drained)) begin
        failures++; $display("FAIL psum_row %0d exp %0d", psum_row, 3 - drained);
      end
      for (int c = 0; c < 4; c++) begin
        checks++;
        if (bf2r(psum[c]) != real'(os_exp[0][psum_row][c])) begin
          failures++;
          $display("FAIL os row %0d col %0d: got %f exp %0d",
                   psum_row, c, bf2r(psum[c]), os_exp[0][psum_row][c]);
        end
      end
      drained++;
      if (drained == 4) begin drained = 0; void'(os_exp.pop_front()); end
    end
  end

  task automatic drive(logic iav, logic ld, logic sw, logic fi, logic la);
    ctrl.ia_valid = iav; ctrl.ib_load = ld; ctrl.ib_swap = sw;
    ctrl.first = fi; ctrl.last = la;
  endtask

  // one stationary run of 'tiles' tiles
  task automatic run_stationary(ib_dir_e dir, int tiles, int n);
    int bm [8][4][4];   // stationary matrices per tile
    int len;
    len = (n < 7) ? 7 : n;
    ctrl.df = DF_WS; ctrl.ib_dir = dir;
    for (int t = 0; t < tiles; t++)
      for (int r = 0; r < 4; r++)
        for (int c = 0; c < 4; c++) bm[t][r][c] = rnd_small(6);
    // word k of tile t as driven on ib[]
    for (int k = 0; k < 4; k++) begin
      @(negedge clk);
      drive(0, 1, k == 3, 0, 0);
      for (int i = 0; i < 4; i++) ib[i] = i2bf((dir == IB_NORTH) ? bm[0][3-k][i] : bm[0][i][k]);
    end
    for (int t = 0; t < tiles; t++)
      for (int cy = 0; cy < len; cy++) begin
        int e [4];
        int x [4];
        @(negedge clk);
        drive(cy < n, 0, cy == len - 1, 0, 0);
        if (cy < n) begin
          for (int r = 0; r < 4; r++) begin x[r] = rnd_small(6); ia[r] = i2bf(x[r]); end
          for (int c = 0; c < 4; c++) begin
            e[c] = 0;
            for (int r = 0; r < 4; r++) e[c] += x[r] * bm[t][r][c];
          end
          for (int c = 0; c < 4; c++) expq[c].push_back(e[c]);
        end
        if (t + 1 < tiles && cy >= 3 && cy < 7) begin
          int k;
          k = cy - 3;
          ctrl.ib_load = 1;
          for (int i = 0; i < 4; i++)
            ib[i] = i2bf((dir == IB_NORTH) ? bm[t+1][3-k][i] : bm[t+1][i][k]);
        end
      end
    @(negedge clk); drive(0, 0, 0, 0, 0);
    repeat (8) @(negedge clk);
  endtask

  task automatic run_os(int tiles, int n);
    int len;
    len = (n < 4) ? 4 : n;
    ctrl.df = DF_OS; ctrl.ib_dir = IB_NORTH;
    for (int t = 0; t < tiles; t++) begin
      int a [4][10], b [10][4];
      int cm [4][4];
      for (int k = 0; k < n; k++)
        for (int i = 0; i < 4; i++) begin a[i][k] = rnd_small(5); b[k][i] = rnd_small(5); end
      for (int r = 0; r < 4; r++)
        for (int c = 0; c < 4; c++) begin
          cm[r][c] = 0;
          for (int k = 0; k < n; k++) cm[r][c] += a[r][k] * b[k][c];
        end
      os_exp.push_back(cm);
      for (int cy = 0; cy < len; cy++) begin
        @(negedge clk);
        drive(cy < n, 0, 0, cy == 0, cy == n - 1);
        if (cy < n)
          for (int i = 0; i < 4; i++) begin ia[i] = i2bf(a[i][cy]); ib[i] = i2bf(b[cy][i]); end
      end
    end
    @(negedge clk); drive(0, 0, 0, 0, 0);
    repeat (12) @(negedge clk);
  endtask

  initial begin
    #12 rst_n = 1;
    for (int it = 0; it < 40; it++) begin
      os_mode = 0;
      run_stationary((it % 2) ? IB_EAST : IB_NORTH, 1 + $urandom_range(3), 1 + $urandom_range(9));
      checks++;
      if (expq[0].size() != 0) begin failures++; $display("FAIL missing stationary psums"); end
      for (int c = 0; c < 4; c++) expq[c].delete();
    end
    for (int it = 0; it < 40; it++) begin
      os_mode = 1;
      run_os(1 + $urandom_range(3), 4 + $urandom_range(6));
      checks++;
      if (os_exp.size() != 0) begin failures++; $display("FAIL missing OS tiles"); end
      os_exp.delete(); drained = 0;
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
