// tb_fetta_unified_mem: self-checking test of the 16-bank ping-pong unified
// memory at its default size (16 banks x 4096 rows, two halves of 2048).
//
// Checks, against a reference copy of both halves:
//   DRAM-side writes land in the half the compute side is not using and are
//   invisible to compute reads until the halves are swapped (pp_sel);
//   compute reads with a different address per bank;
//   compute writes take priority over a DRAM write to the same bank, and
//   dram_ready is low for exactly the banks written by the compute side;
//   DRAM writes to the other banks in that cycle still happen.
// Inputs change on the falling edge; read data is checked one rising edge
// after the read. Has a watchdog.
module tb_fetta_unified_mem;
  import fetta_pkg::*;

  localparam int NB = 16, AW = 11, HALF = 2048;
  logic clk = 0, pp_sel = 0;
  logic [NB-1:0] re = '0, we = '0, dram_we = '0, dram_ready;
  logic [NB-1:0][AW-1:0] raddr = '0, waddr = '0;
  logic [AW-1:0] dram_addr = '0;
  word_t [NB-1:0] rdata, wdata = '0, dram_wdata = '0;
  word_t ref_mem [2][NB][HALF];
  bit    valid_row [2][NB][HALF];
  int checks = 0, failures = 0;

  fetta_unified_mem #(.NB(NB), .DEPTH(4096)) dut (.*);

  always #5 clk = ~clk;

  function automatic word_t rword();
    return {$urandom, $urandom};
  endfunction

  // one cycle of random traffic; reads only rows with known contents
  task automatic cycle_random(bit do_compute_w);
    int h;
    h = int'(pp_sel);
    @(negedge clk);
    dram_addr = AW'($urandom);
    for (int b = 0; b < NB; b++) begin
      dram_we[b] = $urandom_range(1);
      dram_wdata[b] = rword();
      we[b] = do_compute_w && ($urandom_range(2) == 0);
      waddr[b] = AW'($urandom_range(63));
      wdata[b] = rword();
      raddr[b] = AW'($urandom_range(63));
      re[b] = valid_row[h][b][raddr[b]];
    end
    #1;
    for (int b = 0; b < NB; b++) begin
      checks++;
      if (dram_ready[b] !== ~we[b]) begin
        failures++; $display("FAIL dram_ready %0d", b);
      end
    end
    @(posedge clk); #1;
    for (int b = 0; b < NB; b++) begin
      if (re[b]) begin
        checks++;
        if (rdata[b] !== ref_mem[h][b][raddr[b]]) begin
          failures++;
          $display("FAIL read bank %0d row %0d half %0d got %h exp %h t=%0t", b, raddr[b], h, rdata[b], ref_mem[h][b][raddr[b]], $time);
        end
      end
      if (we[b]) begin
        ref_mem[h][b][waddr[b]] = wdata[b]; valid_row[h][b][waddr[b]] = 1;
      end else if (dram_we[b]) begin
        ref_mem[1-h][b][dram_addr] = dram_wdata[b]; valid_row[1-h][b][dram_addr] = 1;
      end
    end
  endtask

  initial begin
    // DRAM fills the inactive half (rows 0..63), then a swap exposes it
    for (int r = 0; r < 64; r++) begin
      @(negedge clk);
      dram_we = '1; dram_addr = AW'(r);
      for (int b = 0; b < NB; b++) dram_wdata[b] = rword();
      @(posedge clk); #1;
      for (int b = 0; b < NB; b++) begin
        ref_mem[1][b][r] = dram_wdata[b]; valid_row[1][b][r] = 1;
      end
    end
    @(negedge clk); dram_we = '0;
    for (int p = 0; p < 6; p++) begin
      @(negedge clk); pp_sel = ~pp_sel; we = '0; dram_we = '0; re = '0;
      for (int i = 0; i < 400; i++) cycle_random(i % 2 == 1);
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
