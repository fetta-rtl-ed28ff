// tb_fetta_controller: self-checking test of the global controller alone.
//
// The address generator is replaced by the testbench: ia_addr and ib_addr
// are simple functions of the loop counters ({tile, inner} and
// {ib_tile, ib_k}), and wdone is raised a random time after the last compute
// cycle. Random contraction instructions (WS, IS, OS; 1..4 tiles; 1..12 inner
// steps; random IA / IB bank masks; IA rotation on or off with a random
// stride) and vector instructions are issued. Checked, cycle by cycle:
//   instr_ready / busy / a one-cycle done pulse per instruction;
//   IA reads: banks = the current (rotated) IA mask, address = ia_addr, and
//     the rotated mask and start index after every tile boundary;
//   IB reads: banks = ib_bank_en, address = ib_addr;
//   CE control one cycle after the read: number of ia_valid, ib_load,
//     ib_swap, first and last cycles per instruction, and stall cycles
//     = tiles * (tile length - inner steps);
//   vector: acc read rows acc_base + i, operand rows b_base + i, vu_valid one
//     cycle later, write-back rows dst_base + i (or the DRAM port) two
//     cycles later;
//   swap instructions flip pp_sel.
// Inputs change on the falling edge. Has a watchdog.
module tb_fetta_controller;
  import fetta_pkg::*;

  localparam int NB = 16;
  logic clk = 0, rst_n = 0;
  logic instr_valid = 0, instr_ready, busy, done;
  instr_t instr = '0, ins;
  logic [CNT_W-1:0] tile, inner, ib_tile, ib_k;
  logic [UM_AW-1:0] ia_addr, ib_addr;
  logic wstart, wdone = 0;
  logic [NB-1:0] um_re, um_we;
  logic [NB-1:0][UM_AW-1:0] um_raddr;
  logic [UM_AW-1:0] um_waddr;
  logic pp_sel;
  ce_ctrl_t ce_ctrl;
  logic [LOG_BANKS-1:0] ia_bank_idx;
  logic acc_rd_en;
  logic [ACC_AW-1:0] acc_rd_addr;
  logic vu_valid, dram_out_valid, stall;
  logic [UM_AW-1:0] dram_out_row;
  logic [NB-1:0] ia_bank_en;
  int checks = 0, failures = 0;

  fetta_controller #(.NB(NB)) dut (.*);

  always #5 clk = ~clk;

  assign ia_addr = UM_AW'({tile[4:0], inner[5:0]});
  assign ib_addr = UM_AW'({1'b1, ib_tile[3:0], ib_k[5:0]});

  task automatic chk(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d exp %0d (t=%0t)", what, got, exp, $time);
    end
  endtask

  function automatic logic [NB-1:0] rotl(logic [NB-1:0] m, int s);
    s = s % NB;
    return (s == 0) ? m : ((m << s) | (m >> (NB - s)));
  endfunction

  // per-instruction counters, updated at every rising edge
  int n_iav, n_ld, n_sw, n_first, n_last, n_stall, n_done, n_vu, n_we, n_acc_rd;
  int vec_row;
  always @(posedge clk) if (rst_n) begin
    if (ce_ctrl.ia_valid) n_iav++;
    if (ce_ctrl.ib_load)  n_ld++;
    if (ce_ctrl.ib_swap)  n_sw++;
    if (ce_ctrl.first)    n_first++;
    if (ce_ctrl.last)     n_last++;
    if (stall)            n_stall++;
    if (done)             n_done++;
    if (vu_valid)         n_vu++;
    if (acc_rd_en)        n_acc_rd++;
    if (um_we != '0 || dram_out_valid) n_we++;
  end

  task automatic clear_counts;
    n_iav = 0; n_ld = 0; n_sw = 0; n_first = 0; n_last = 0; n_stall = 0;
    n_done = 0; n_vu = 0; n_we = 0; n_acc_rd = 0;
  endtask

  task automatic issue(instr_t i);
    @(negedge clk);
    chk("instr_ready", instr_ready, 1);
    instr = i; instr_valid = 1;
    @(negedge clk);
    instr_valid = 0;
  endtask

  task automatic run_contract;
    instr_t i;
    int len, exp_tile, cyc_in_tile;
    logic [NB-1:0] mask;
    logic [LOG_BANKS-1:0] idx;
    i = '0;
    i.op = OP_CONTRACT;
    i.df = dataflow_e'($urandom_range(2));
    i.ib_dir = ib_dir_e'($urandom_range(1));
    i.n_tiles = CNT_W'(1 + $urandom_range(3));
    i.n_inner = (i.df == DF_OS) ? CNT_W'(4 + $urandom_range(8)) : CNT_W'(1 + $urandom_range(11));
    i.ia_bank_en = NB'($urandom) | 16'h0001;
    i.ib_bank_en = ~i.ia_bank_en;
    i.ia_bank_idx = LOG_BANKS'($urandom);
    i.rotate_ia = $urandom_range(1);
    i.bank_stride = LOG_BANKS'($urandom);
    len = (i.df == DF_OS) ? ((i.n_inner < 4) ? 4 : int'(i.n_inner))
                          : ((i.n_inner < 7) ? 7 : int'(i.n_inner));
    clear_counts();
    issue(i);
    chk("busy", busy, 1);
    // walk the compute phase and check every read
    mask = i.ia_bank_en; idx = i.ia_bank_idx;
    if (i.df != DF_OS) repeat (4) begin
      chk("preload ib banks", um_re, i.ib_bank_en);
      @(negedge clk);
    end
    for (int t = 0; t < i.n_tiles; t++) begin
      chk("rotated mask", ia_bank_en, mask);
      for (int c = 0; c < len; c++) begin
        if (c < i.n_inner) begin
          chk("ia banks", um_re & mask, mask);
          for (int b = 0; b < NB; b++)
            if (mask[b]) chk("ia addr", um_raddr[b], {t[4:0], c[5:0]});
          if (i.df == DF_OS)
            for (int b = 0; b < NB; b++)
              if (i.ib_bank_en[b] && !mask[b]) chk("os ib addr", um_raddr[b], {1'b1, t[3:0], c[5:0]});
        end
        @(negedge clk);
        // the CE control of this cycle is visible now, one cycle later
        if (i.df != DF_OS) chk("ia_bank_idx", ia_bank_idx, idx);
      end
      if (i.rotate_ia) begin
        mask = rotl(mask, int'(i.bank_stride));
        idx = idx + i.bank_stride;
      end
    end
    repeat ($urandom_range(5)) @(negedge clk);
    wdone = 1;
    while (!done) @(negedge clk);
    @(negedge clk);
    wdone = 0;
    chk("ia_valid cycles", n_iav, i.n_tiles * i.n_inner);
    chk("stall cycles", n_stall, i.n_tiles * (len - i.n_inner));
    chk("done pulses", n_done, 1);
    if (i.df == DF_OS) begin
      chk("first", n_first, i.n_tiles);
      chk("last", n_last, i.n_tiles);
      chk("os loads", n_ld, 0);
    end else begin
      chk("ib_load", n_ld, 4 * i.n_tiles);
      chk("ib_swap", n_sw, 1 + i.n_tiles);
    end
    chk("busy after", busy, 0);
  endtask

  task automatic run_vector;
    instr_t i;
    int n;
    i = '0;
    i.op = OP_VECTOR;
    i.vop = vop_e'($urandom_range(4));
    i.n_inner = CNT_W'(1 + $urandom_range(9));
    i.acc_base = ACC_AW'($urandom_range(900));
    i.b_base = UM_AW'($urandom_range(1500));
    i.dst_base = UM_AW'($urandom_range(1500));
    i.to_dram = $urandom_range(1);
    n = int'(i.n_inner);
    clear_counts();
    issue(i);
    for (int c = 0; c < n + 2; c++) begin
      if (c < n) begin
        chk("acc_rd_en", acc_rd_en, 1);
        chk("acc_rd_addr", acc_rd_addr, i.acc_base + c);
        chk("b read", um_re, 16'hFFFF);
        chk("b addr", um_raddr[5], i.b_base + c);
      end
      if (c >= 2 && c < n + 2) begin
        if (i.to_dram) begin
          chk("dram_out_valid", dram_out_valid, 1);
          chk("dram_out_row", dram_out_row, c - 2);
        end else begin
          chk("um_we", um_we, 16'hFFFF);
          chk("um_waddr", um_waddr, (i.dst_base + c - 2) % 2048);
        end
      end
      @(negedge clk);
    end
    while (busy) @(negedge clk);
    chk("vu_valid", n_vu, n);
    chk("acc reads", n_acc_rd, n);
    chk("writes", n_we, n);
    chk("done pulses", n_done, 1);
  endtask

  initial begin
    instr_t sw;
    logic p;
    #12 rst_n = 1;
    for (int it = 0; it < 150; it++) begin
      int pick;
      pick = int'($urandom_range(3));
      case (pick)
        0, 1: run_contract();
        2: run_vector();
        default: begin
          p = pp_sel;
          sw = '0; sw.op = OP_SWAP;
          issue(sw);
          while (busy) @(negedge clk);
          chk("pp_sel flipped", pp_sel, !p);
        end
      endcase
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    #2000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
