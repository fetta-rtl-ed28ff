// tb_fetta_top: end-to-end test of the accelerator at its default sizes.
//
// The testbench plays host and DRAM. It loads operands through the DRAM
// port into the idle ping-pong half, flips the halves, runs contraction
// instructions and reads the results out through the vector unit, checking
// every value against products computed here on integers (small integer
// BF16 values make every sum exact). Three contractions cover:
//   A  weight-stationary, IB loaded from the north, unicast IA, IB routed by
//      the start-bank XOR, two tiles reduced in the accumulation unit;
//   B  output-stationary, IB broadcast to all CEs, pairwise reduction in the
//      reduction network (ADD_LEFT) moved to the odd banks by the reduction
//      bank index, two tiles to separate rows;
//   C  input-stationary with IB loaded from the east (transposed), only 3 IA
//      vectors per tile (stalls), IA banks rotated per tile, reduction
//      network transpose level, accumulation across tiles.
// Vector instructions: PASS and RELU to DRAM, AXPY into the unified memory
// and RELU_BWD reading it back. Each mechanism is counted and a mechanism
// that never happened counts as a failure. The cycle count of contraction A
// is checked against the controller's schedule.
module tb_fetta_top;
  import fetta_pkg::*;
  import tb_util_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                  instr_valid = 1'b0;
  logic                  instr_ready, busy, done;
  instr_t                instr;
  logic [NUM_BANKS-1:0]  dram_we = '0;
  logic [UM_AW-1:0]      dram_addr = '0;
  word_t [NUM_BANKS-1:0] dram_wdata = '0;
  logic [NUM_BANKS-1:0]  dram_ready;
  logic                  dram_out_valid;
  logic [UM_AW-1:0]      dram_out_row;
  bf16_t [4*NUM_BANKS-1:0] dram_out_data;
  logic                  stall, pp_sel;
  logic [NUM_BANKS-1:0]  ia_banks;

  fetta_top dut (.*);

  int checks = 0, failures = 0;

  // ---------------------------------------------------- mechanism counters
  int n_stall = 0, n_swap = 0, n_rot = 0, n_accum = 0, n_bcast = 0, n_redadd = 0,
      n_redt = 0, n_east = 0, n_os = 0, n_ws = 0, n_is = 0, n_vec_um = 0, n_redidx = 0,
      n_pingpong_load = 0;
  logic [NUM_BANKS-1:0] last_banks = '0;
  logic last_pp = 1'b0;
  always @(posedge clk) if (rst_n) begin
    if (stall) n_stall++;
    if (pp_sel != last_pp) n_swap++;
    last_pp <= pp_sel;
    if (busy && ia_banks != last_banks && last_banks != '0) n_rot++;
    last_banks <= ia_banks;
    if (dut.u_acc.in_valid != '0 && dut.acc_accum) n_accum++;
    if (dut.um_we != '0) n_vec_um++;
    if (dram_we != '0 && busy) n_pingpong_load++;
  end

  // ------------------------------------------------------------- helpers
  task automatic issue(instr_t i);
    @(negedge clk);
    while (!instr_ready) @(negedge clk);
    instr = i;
    instr_valid = 1'b1;
    @(negedge clk);
    instr_valid = 1'b0;
  endtask

  task automatic wait_idle();
    @(negedge clk);
    while (busy) @(negedge clk);
  endtask

  task automatic dram_write(int bank, int addr, word_t w);
    @(negedge clk);
    dram_we = '0;
    dram_we[bank] = 1'b1;
    dram_addr = UM_AW'(addr);
    dram_wdata[bank] = w;
    @(negedge clk);
    dram_we = '0;
  endtask

  function automatic instr_t base_instr();
    instr_t i;
    i = '0;
    i.op = OP_CONTRACT;
    return i;
  endfunction

  task automatic swap_halves();
    instr_t i;
    i = '0;
    i.op = OP_SWAP;
    issue(i);
    wait_idle();
  endtask

  // collect rows coming out of the DRAM store port
  bf16_t [4*NUM_BANKS-1:0] outrow [64];
  int n_out = 0;
  always @(posedge clk) if (dram_out_valid) begin
    outrow[6'(dram_out_row)] <= dram_out_data;
    n_out <= n_out + 1;
  end

  task automatic vec_out(vop_e op, int acc_base, int rows, bf16_t s, int b_base, bit to_dram,
                         int dst);
    instr_t i;
    i = '0;
    i.op = OP_VECTOR;
    i.vop = op;
    i.acc_base = ACC_AW'(acc_base);
    i.n_inner = CNT_W'(rows);
    i.scalar = s;
    i.b_base = UM_AW'(b_base);
    i.to_dram = to_dram;
    i.dst_base = UM_AW'(dst);
    issue(i);
    wait_idle();
    repeat (2) @(negedge clk);
  endtask

  task automatic check_val(string what, bf16_t got, int exp);
    checks++;
    if (got !== i2bf(exp)) begin
      failures++;
      if (failures < 20)
        $display("FAIL %s: got %h (%f) expected %0d", what, got, bf2r(got), exp);
    end
  endtask

  // ------------------------------------------------------------ test data
  int A  [16][2][8][4];   // [ce][tile][m][r]
  int Bm [16][2][4][4];   // [ce][tile][r][c]
  int expA [16][8][4];

  // OS test
  int OA [16][2][6][4];   // [ce][tile][k][r]  (IA word at step k: a[r])
  int OB [2][6][4];       // [tile][k][c]      (broadcast IB)

  // C test
  int CA [4][2][3][4];    // [ce][tile][m][r]
  int CB [4][2][4][4];    // [ce][tile][r][c]

  function automatic word_t mkword(int e0, int e1, int e2, int e3);
    word_t w;
    w[0] = i2bf(e0); w[1] = i2bf(e1); w[2] = i2bf(e2); w[3] = i2bf(e3);
    return w;
  endfunction

  int t0, t1;

  initial begin : main
    instr_t i;
    instr = '0;
    repeat (4) @(negedge clk);
    rst_n = 1'b1;

    // ================================================= contraction A (WS)
    for (int j = 0; j < 8; j++)
      for (int t = 0; t < 2; t++) begin
        for (int m = 0; m < 8; m++) for (int r = 0; r < 4; r++) A[j][t][m][r] = rnd_small(3);
        for (int r = 0; r < 4; r++) for (int c = 0; c < 4; c++) Bm[j][t][r][c] = rnd_small(3);
      end
    // IA: bank j, row t*8+m holds A[j][t][m][0..3]
    // IB: bank 8+j, row 100+t*4+k holds B[j][t][3-k][0..3] (north loading)
    for (int j = 0; j < 8; j++)
      for (int t = 0; t < 2; t++) begin
        for (int m = 0; m < 8; m++)
          dram_write(j, t*8+m, mkword(A[j][t][m][0], A[j][t][m][1], A[j][t][m][2], A[j][t][m][3]));
        for (int k = 0; k < 4; k++)
          dram_write(8+j, 100+t*4+k, mkword(Bm[j][t][3-k][0], Bm[j][t][3-k][1],
                                            Bm[j][t][3-k][2], Bm[j][t][3-k][3]));
      end
    swap_halves();

    i = base_instr();
    i.df = DF_WS; i.ib_dir = IB_NORTH;
    i.ia_bank_en = 16'h00FF; i.ib_bank_en = 16'hFF00;
    i.ia_bank_idx = 4'd0;    i.ib_bank_idx = 4'd8;
    i.acc_bank_en = 16'h00FF;
    i.n_tiles = 2; i.n_inner = 8;
    i.ia_base = 0;   i.ia_tile_stride = 8;
    i.ib_base = 100; i.ib_tile_stride = 4;
    i.acc_base = 10; i.acc_tile_stride = 0;
    n_ws++;
    // meanwhile stream the operands of contraction B into the other half
    fork
      begin
        issue(i);
        t0 = int'($time / 10);
        wait_idle();
        t1 = int'($time / 10);
      end
      begin : load_b
        for (int j = 0; j < 16; j++)
          for (int t = 0; t < 2; t++)
            for (int k = 0; k < 6; k++) OA[j][t][k] = '{rnd_small(3), rnd_small(3), rnd_small(3), rnd_small(3)};
        for (int t = 0; t < 2; t++)
          for (int k = 0; k < 6; k++) OB[t][k] = '{rnd_small(3), rnd_small(3), rnd_small(3), rnd_small(3)};
        for (int j = 0; j < 15; j++)
          for (int t = 0; t < 2; t++)
            for (int k = 0; k < 6; k++)
              dram_write(j, 200+t*6+k, mkword(OA[j][t][k][0], OA[j][t][k][1], OA[j][t][k][2], OA[j][t][k][3]));
      end
    join
    // schedule: 4 preload + 2 tiles x 8 + flush (reduction network 4, CE 4,
    // accumulation 2 ...) ; check the issue part precisely and the total loosely
    checks++;
    if ((t1 - t0) < 20 || (t1 - t0) > 40) begin
      failures++;
      $display("FAIL contraction A took %0d cycles", t1 - t0);
    end

    vec_out(VOP_PASS, 10, 8, 16'h0, 0, 1'b1, 0);
    for (int j = 0; j < 8; j++)
      for (int m = 0; m < 8; m++)
        for (int c = 0; c < 4; c++) begin
          int e;
          e = 0;
          for (int t = 0; t < 2; t++)
            for (int r = 0; r < 4; r++) e += A[j][t][m][r] * Bm[j][t][r][c];
          expA[j][m][c] = e;
          check_val($sformatf("A ce%0d m%0d c%0d", j, m, c), outrow[m][4*j+c], e);
        end

    // RELU of the same rows
    vec_out(VOP_RELU, 10, 8, 16'h0, 0, 1'b1, 0);
    for (int j = 0; j < 8; j++)
      for (int m = 0; m < 8; m++)
        for (int c = 0; c < 4; c++)
          check_val("relu", outrow[m][4*j+c], expA[j][m][c] > 0 ? expA[j][m][c] : 0);

    // IB of contraction B into the idle half (bank 15), then swap
    for (int t = 0; t < 2; t++)
      for (int k = 0; k < 6; k++)
        dram_write(15, 300+t*6+k, mkword(OB[t][k][0], OB[t][k][1], OB[t][k][2], OB[t][k][3]));
    swap_halves();

    // ================================================= contraction B (OS)
    i = base_instr();
    i.df = DF_OS;
    i.ia_bank_en = 16'h7FFF; i.ib_bank_en = 16'h8000;
    // broadcast bank 15: every level copies the upper partner, expressed as
    // a broadcast of bank 0 moved to bank 15 by the start index
    for (int b = 0; b < 4; b++)
      for (int p = 0; p < 16; p++) i.ib_sel[b][p] = p[b];
    i.ib_bank_idx = 4'd15;
    // ADD_LEFT pairs, moved to the odd banks by the reduction bank index
    for (int k = 0; k < 8; k++) i.red_mode[0][k] = SW_ADD_LEFT;
    i.red_bank_idx = 4'd1;
    i.acc_bank_en = 16'h2AAA;
    i.n_tiles = 2; i.n_inner = 6;
    i.ia_base = 200; i.ia_tile_stride = 6;
    i.ib_base = 300; i.ib_tile_stride = 6;
    i.acc_base = 40; i.acc_tile_stride = 4;
    n_os++; n_bcast++; n_redadd++; n_redidx++;
    issue(i);
    wait_idle();
    vec_out(VOP_PASS, 40, 8, 16'h0, 0, 1'b1, 0);
    for (int p = 0; p < 7; p++)
      for (int t = 0; t < 2; t++)
        for (int r = 0; r < 4; r++)
          for (int c = 0; c < 4; c++) begin
            int e;
            e = 0;
            for (int q = 2*p; q < 2*p+2; q++)
              for (int k = 0; k < 6; k++) e += OA[q][t][k][r] * OB[t][k][c];
            check_val($sformatf("B pair%0d t%0d r%0d c%0d", p, t, r, c),
                      outrow[t*4+r][4*(2*p+1)+c], e);
          end

    // ================================================= contraction C (IS)
    // IA of CE j in tile t: bank 4t+j (rotation by 4), IB of CE j: bank 8+j
    for (int j = 0; j < 4; j++)
      for (int t = 0; t < 2; t++) begin
        for (int m = 0; m < 3; m++) for (int r = 0; r < 4; r++) CA[j][t][m][r] = rnd_small(3);
        for (int r = 0; r < 4; r++) for (int c = 0; c < 4; c++) CB[j][t][r][c] = rnd_small(3);
      end
    for (int j = 0; j < 4; j++)
      for (int t = 0; t < 2; t++) begin
        for (int m = 0; m < 3; m++)
          dram_write(4*t+j, 400+t*3+m, mkword(CA[j][t][m][0], CA[j][t][m][1], CA[j][t][m][2], CA[j][t][m][3]));
        // east loading: word k lands in column k, element r of the word in row r
        for (int k = 0; k < 4; k++)
          dram_write(8+j, 500+t*4+k, mkword(CB[j][t][0][k], CB[j][t][1][k],
                                            CB[j][t][2][k], CB[j][t][3][k]));
      end
    // zero rows used as the second vector operand further down
    for (int m = 0; m < 3; m++) begin
      dram_write(0, 500+m, '0);
      dram_write(4, 500+m, '0);
      dram_write(12, 500+m, '0);
    end
    swap_halves();
    i = base_instr();
    i.df = DF_IS; i.ib_dir = IB_EAST;
    i.ia_bank_en = 16'h000F; i.ib_bank_en = 16'h0F00;
    i.ia_bank_idx = 4'd0; i.ib_bank_idx = 4'd8;
    i.rotate_ia = 1'b1; i.bank_stride = 4'd4;
    i.red_tsel = '1;
    i.acc_bank_en = 16'h1111;
    i.n_tiles = 2; i.n_inner = 3;
    i.ia_base = 400; i.ia_tile_stride = 3;
    i.ib_base = 500; i.ib_tile_stride = 4;
    i.acc_base = 60; i.acc_tile_stride = 0;
    n_is++; n_east++; n_redt++;
    issue(i);
    wait_idle();
    vec_out(VOP_PASS, 60, 3, 16'h0, 0, 1'b1, 0);
    for (int j = 0; j < 4; j++)
      for (int m = 0; m < 3; m++)
        for (int c = 0; c < 4; c++) begin
          int e;
          e = 0;
          for (int t = 0; t < 2; t++)
            for (int r = 0; r < 4; r++) e += CA[j][t][m][r] * CB[j][t][r][c];
          // CE j reaches bank tpos(j) = 4j through the transpose level
          check_val($sformatf("C ce%0d m%0d c%0d", j, m, c), outrow[m][4*(4*j)+c], e);
        end

    // ================================= vector unit into the unified memory
    // AXPY: y = 2 * acc + b with b = unified-memory rows 500.. (IB words of
    // CE 0 in bank 8, zero in banks 0, 4 and 12)
    // RELU_BWD checks what AXPY wrote: mask = AXPY result (> 0 ?)
    vec_out(VOP_AXPY, 60, 3, i2bf(2), 500, 1'b1, 0);     // straight to DRAM first
    for (int j = 0; j < 4; j++)
      for (int m = 0; m < 3; m++)
        for (int c = 0; c < 4; c++) begin
          int e, bb;
          e = 0;
          for (int t = 0; t < 2; t++)
            for (int r = 0; r < 4; r++) e += CA[j][t][m][r] * CB[j][t][r][c];
          bb = (j == 2) ? CB[0][0][c][m] : 0;
          check_val($sformatf("axpy ce%0d m%0d c%0d", j, m, c), outrow[m][4*(4*j)+c], 2 * e + bb);
        end
    vec_out(VOP_AXPY, 60, 3, i2bf(2), 500, 1'b0, 700);   // rows 700..702 = 2*C + b
    vec_out(VOP_RELU_BWD, 60, 3, 16'h0, 700, 1'b1, 0);
    for (int j = 0; j < 4; j++)
      for (int m = 0; m < 3; m++)
        for (int c = 0; c < 4; c++) begin
          int e, bb, y;
          e = 0;
          for (int t = 0; t < 2; t++)
            for (int r = 0; r < 4; r++) e += CA[j][t][m][r] * CB[j][t][r][c];
          // b operand of bank 4j at row 500+m: only bank 8 (j=2) holds IB data
          bb = 0;
          if (j == 2) bb = CB[0][0][c][m];
          y = 2 * e + bb;
          check_val($sformatf("vec ce%0d m%0d c%0d", j, m, c), outrow[m][4*(4*j)+c],
                    (y > 0) ? e : 0);
        end

    // --------------------------------------------------- mechanism report
    $display("mechanisms: ws=%0d is=%0d os=%0d east=%0d bcast=%0d redadd=%0d redidx=%0d redT=%0d",
             n_ws, n_is, n_os, n_east, n_bcast, n_redadd, n_redidx, n_redt);
    $display("            stall=%0d swap=%0d rot=%0d accum=%0d vec_um=%0d pp_load=%0d",
             n_stall, n_swap, n_rot, n_accum, n_vec_um, n_pingpong_load);
    if (n_stall == 0) begin failures++; $display("FAIL no stall"); end
    if (n_swap < 3)   begin failures++; $display("FAIL no ping-pong swap"); end
    if (n_rot == 0)   begin failures++; $display("FAIL no bank rotation"); end
    if (n_accum == 0) begin failures++; $display("FAIL no accumulation"); end
    if (n_vec_um == 0) begin failures++; $display("FAIL no vector write-back"); end
    if (n_pingpong_load == 0) begin failures++; $display("FAIL no load during compute"); end
    if (n_ws == 0 || n_is == 0 || n_os == 0) begin failures++; $display("FAIL dataflow missing"); end
    if (n_east == 0)   begin failures++; $display("FAIL no east loading"); end
    if (n_bcast == 0)  begin failures++; $display("FAIL no broadcast"); end
    if (n_redadd == 0) begin failures++; $display("FAIL no reduction add"); end
    if (n_redidx == 0) begin failures++; $display("FAIL no reduction bank index"); end
    if (n_redt == 0)   begin failures++; $display("FAIL no reduction transpose"); end
    checks += 12;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
