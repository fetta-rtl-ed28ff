// tb_fetta_sram_bank: self-checking test of one memory bank at its default
// size (4096 rows of 64 bits).
//
// Writes random data to random rows while keeping a reference copy, and reads
// random rows back: the read is synchronous (data one cycle after re), the
// output holds while re is low, and a read of the row being written in the
// same cycle returns the old contents. Every row that is read was written
// first. Has a watchdog.
module tb_fetta_sram_bank;
  localparam int DEPTH = 4096, W = 64, AW = 12;
  logic clk = 0, re = 0, we = 0;
  logic [AW-1:0] raddr = '0, waddr = '0;
  logic [W-1:0] rdata, wdata = '0;
  logic [W-1:0] ref_mem [DEPTH];
  bit written [DEPTH];
  int checks = 0, failures = 0;

  fetta_sram_bank #(.DEPTH(DEPTH), .W(W)) dut (.*);

  always #5 clk = ~clk;

  task automatic chk(string what, logic [W-1:0] exp);
    checks++;
    if (rdata !== exp) begin
      failures++;
      $display("FAIL %s: got %h exp %h", what, rdata, exp);
    end
  endtask

  initial begin
    logic [W-1:0] held, old;
    int a;
    // fill 300 random rows
    for (int i = 0; i < 300; i++) begin
      @(negedge clk);
      we = 1; waddr = AW'($urandom); wdata = {$urandom, $urandom};
      ref_mem[waddr] = wdata; written[waddr] = 1;
    end
    @(negedge clk); we = 0;
    for (int i = 0; i < 2000; i++) begin
      do a = int'($urandom_range(DEPTH - 1)); while (!written[a]);
      @(negedge clk);
      re = 1; raddr = AW'(a);
      // write elsewhere, or to the same row (read returns old data)
      we = ($urandom_range(1) == 1);
      waddr = ($urandom_range(3) == 0) ? AW'(a) : AW'($urandom);
      wdata = {$urandom, $urandom};
      old = ref_mem[a];
      @(posedge clk); #1;
      chk("read", old);
      if (we) begin ref_mem[waddr] = wdata; written[waddr] = 1; end
      held = rdata;
      @(negedge clk); re = 0; we = 0;
      @(posedge clk); #1;
      chk("hold", held);
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
