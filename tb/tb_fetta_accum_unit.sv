// tb_fetta_accum_unit: self-checking test of the 16-bank accumulation unit
// at its default size (16 banks x 1024 rows of four BF16 psums).
//
// Rounds of: overwrite rows 0..7 of every bank (accumulate = 0); a burst of
// random psum words (random bank mask, random row among 8 so that the same
// row is often hit on consecutive cycles, random accumulate flag); then reads
// of all 8 rows, back to back. A reference keeps integer sums; data are small
// integers so every BF16 sum is exact. Checks the read data, that rd_valid
// follows rd_en by one cycle, and that a read is refused (no rd_valid) in a
// cycle that also writes. Inputs change on the falling edge. Has a watchdog.
module tb_fetta_accum_unit;
  import fetta_pkg::*;
  import tb_util_pkg::*;

  localparam int NB = 16, AW = 10, ROWS = 8;
  logic clk = 0, rst_n = 0;
  logic [NB-1:0] in_valid = '0;
  word_t [NB-1:0] in_data = '0, rd_data;
  logic [AW-1:0] in_addr = '0, rd_addr = '0;
  logic accumulate = 0, rd_en = 0, rd_valid;
  int model [NB][ROWS][4];
  int checks = 0, failures = 0, fwd_hits = 0;

  fetta_accum_unit #(.NB(NB), .DEPTH(1024)) dut (.*);

  always #5 clk = ~clk;

  task automatic put(logic [NB-1:0] mask, int row, logic acc);
    @(negedge clk);
    rd_en = 0; in_valid = mask; in_addr = AW'(row); accumulate = acc;
    for (int b = 0; b < NB; b++)
      for (int e = 0; e < 4; e++) begin
        int v;
        v = rnd_small(4);
        in_data[b][e] = i2bf(v);
        if (mask[b]) model[b][row][e] = acc ? model[b][row][e] + v : v;
      end
  endtask

  initial begin
    int last_row;
    #12 rst_n = 1;
    for (int round = 0; round < 60; round++) begin
      for (int r = 0; r < ROWS; r++) put('1, r, 0);
      last_row = -1;
      for (int c = 0; c < 15; c++) begin
        int r;
        r = int'($urandom_range(ROWS - 1));
        if (r == last_row) fwd_hits++;
        last_row = r;
        put(NB'($urandom), r, $urandom_range(9) < 7);
      end
      // a read during a write is not served
      @(negedge clk); rd_en = 1; rd_addr = '0; in_valid = '1; accumulate = 1;
      in_data = '0;
      @(posedge clk); #1;
      checks++;
      if (rd_valid !== 1'b0) begin failures++; $display("FAIL rd_valid during write"); end
      @(negedge clk); in_valid = '0; rd_en = 0;
      repeat (3) @(negedge clk);
      for (int r = 0; r < ROWS; r++) begin
        rd_en = 1; rd_addr = AW'(r);
        @(posedge clk); #1;
        checks++;
        if (rd_valid !== 1'b1) begin failures++; $display("FAIL rd_valid missing"); end
        for (int b = 0; b < NB; b++)
          for (int e = 0; e < 4; e++) begin
            checks++;
            if (bf2r(rd_data[b][e]) != real'(model[b][r][e])) begin
              failures++;
              $display("FAIL round %0d bank %0d row %0d el %0d: got %f exp %0d",
                       round, b, r, e, bf2r(rd_data[b][e]), model[b][r][e]);
            end
          end
        @(negedge clk);
      end
      rd_en = 0;
    end
    checks++;
    if (fwd_hits == 0) begin failures++; $display("FAIL back-to-back row never hit"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    #1000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
