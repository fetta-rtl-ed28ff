// tb_fetta_addr_gen: self-checking test of the address generator.
//
// Read side: random bases, strides and loop counters; IA address must be
// ia_base + tile * ia_tile_stride + inner and IB address
// ib_base + ib_tile * ib_tile_stride + ib_k (modulo the address width).
// Write side: after wstart, a random stream of wvalid pulses is counted into
// tiles of n_inner words (stationary dataflows) or 4 rows (OS). Checked per
// word: the accumulation row (acc_base + tile * acc_tile_stride + index, OS
// index = wrow), the accumulate flag (set by the instruction, or forced from
// the second tile on when all tiles share rows), and wdone once n_tiles tiles
// have been seen. Inputs change on the falling edge. Has a watchdog.
module tb_fetta_addr_gen;
  import fetta_pkg::*;

  logic clk = 0, rst_n = 0;
  instr_t ins = '0;
  logic [CNT_W-1:0] tile = '0, inner = '0, ib_tile = '0, ib_k = '0;
  logic [UM_AW-1:0] ia_addr, ib_addr;
  logic wstart = 0, wvalid = 0;
  logic [1:0] wrow = '0;
  logic [ACC_AW-1:0] acc_addr;
  logic acc_accum, wdone;
  int checks = 0, failures = 0;

  fetta_addr_gen dut (.*);

  always #5 clk = ~clk;

  task automatic chk(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d exp %0d", what, got, exp);
    end
  endtask

  initial begin
    #12 rst_n = 1;
    for (int it = 0; it < 2000; it++) begin
      ins.ia_base = UM_AW'($urandom); ins.ia_tile_stride = UM_AW'($urandom_range(64));
      ins.ib_base = UM_AW'($urandom); ins.ib_tile_stride = UM_AW'($urandom_range(64));
      tile = CNT_W'($urandom_range(40)); inner = CNT_W'($urandom_range(40));
      ib_tile = CNT_W'($urandom_range(40)); ib_k = CNT_W'($urandom_range(40));
      #1;
      chk("ia_addr", ia_addr, (ins.ia_base + tile * ins.ia_tile_stride + inner) % 2048);
      chk("ib_addr", ib_addr, (ins.ib_base + ib_tile * ins.ib_tile_stride + ib_k) % 2048);
    end
    for (int it = 0; it < 200; it++) begin
      int per, t, idx, exp_row;
      bit os;
      @(negedge clk);
      os = ($urandom_range(2) == 0);
      ins.df = os ? DF_OS : ((it % 2) ? DF_WS : DF_IS);
      ins.n_tiles = CNT_W'(1 + $urandom_range(4));
      ins.n_inner = CNT_W'(1 + $urandom_range(9));
      ins.acc_base = ACC_AW'($urandom_range(500));
      ins.acc_tile_stride = ($urandom_range(2) == 0) ? '0 : ACC_AW'($urandom_range(16));
      ins.acc_accumulate = $urandom_range(1);
      per = os ? 4 : int'(ins.n_inner);
      wstart = 1;
      @(negedge clk);
      wstart = 0;
      for (t = 0; t < ins.n_tiles; t++)
        for (idx = 0; idx < per; idx++) begin
          // idle cycles between words
          wvalid = 0;
          repeat ($urandom_range(2)) @(negedge clk);
          wvalid = 1;
          wrow = os ? 2'(3 - idx) : 2'($urandom);
          #1;
          exp_row = ins.acc_base + t * ins.acc_tile_stride + (os ? 3 - idx : idx);
          chk("acc_addr", acc_addr, exp_row % 1024);
          chk("acc_accum", acc_accum,
              ins.acc_accumulate || (t != 0 && ins.acc_tile_stride == 0));
          chk("wdone early", wdone, 0);
          @(negedge clk);
        end
      wvalid = 0;
      #1;
      chk("wdone", wdone, 1);
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
