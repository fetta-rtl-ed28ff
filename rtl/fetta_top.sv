// fetta_top: the complete tensor-contraction training accelerator.
//
//   host --instr--> fetta_controller --loop counters--> fetta_addr_gen
//                        |                                  |
//            bank enables/addresses                     IA/IB/psum addresses
//                        v                                  v
//   DRAM load --> fetta_unified_mem --64 values/cycle--> fetta_tcu
//                  (16 banks, ping-pong)                (IA/IB distribution nets,
//                        ^                               16 CEs, reduction net)
//                        |                                  |
//                 fetta_vector_unit <-- fetta_accum_unit <--+
//                        |
//                        +--> DRAM store stream
//
// A contraction instruction streams IA and IB words out of the unified
// memory, through the two transposable butterfly distribution networks into
// the contraction engines, and the psums back through the reduction network
// into the accumulation unit. A vector instruction moves accumulation-unit
// rows through the vector unit into the unified memory (or out to DRAM). The
// block set and their connections follow the system overview of the
// accelerator description. The host and the off-chip LPDDR4 memory are not
// part of this module: the instruction port and the two DRAM streams stand
// in for them. The DRAM load port writes the half of the unified memory that
// the compute side is not using.
module fetta_top
  import fetta_pkg::*;
(
  input  logic                     clk,
  input  logic                     rst_n,
  // host
  input  logic                     instr_valid,
  output logic                     instr_ready,
  input  instr_t                   instr,
  output logic                     busy,
  output logic                     done,
  // DRAM -> unified memory (inactive ping-pong half)
  input  logic  [NUM_BANKS-1:0]    dram_we,
  input  logic  [UM_AW-1:0]        dram_addr,
  input  word_t [NUM_BANKS-1:0]    dram_wdata,
  output logic  [NUM_BANKS-1:0]    dram_ready,
  // vector unit -> DRAM
  output logic                     dram_out_valid,
  output logic  [UM_AW-1:0]        dram_out_row,
  output bf16_t [4*NUM_BANKS-1:0]  dram_out_data,
  // status
  output logic                     stall,
  output logic                     pp_sel,
  output logic  [NUM_BANKS-1:0]    ia_banks    // IA banks in use (after rotation)
);

  localparam int unsigned NB = NUM_BANKS;

  instr_t                ins;
  logic [CNT_W-1:0]      tile, inner, ib_tile, ib_k;
  logic [UM_AW-1:0]      ia_addr, ib_addr;
  logic                  wstart, wdone, wvalid;
  logic [NB-1:0]         um_re, um_we;
  logic [NB-1:0][UM_AW-1:0] um_raddr, um_waddr_b;
  logic [UM_AW-1:0]      um_waddr;
  word_t [NB-1:0]        um_rdata, um_wdata;
  ce_ctrl_t              ce_ctrl;
  logic [LOG_BANKS-1:0]  ia_bank_idx;
  logic                  acc_rd_en;
  logic [ACC_AW-1:0]     acc_rd_addr, acc_addr;
  logic                  acc_accum;
  word_t [NB-1:0]        acc_rd_data, red_out;
  logic [NB-1:0]         red_valid;
  logic                  acc_rd_valid;
  logic [1:0]            red_row;
  logic                  vu_valid, vu_y_valid;
  bf16_t [4*NB-1:0]      vu_y;

  fetta_controller #(.NB(NB)) u_ctrl (
    .clk, .rst_n,
    .instr_valid, .instr_ready, .instr, .busy, .done,
    .ins, .tile, .inner, .ib_tile, .ib_k, .ia_addr, .ib_addr, .wstart, .wdone,
    .um_re, .um_raddr, .um_we, .um_waddr, .pp_sel,
    .ce_ctrl, .ia_bank_idx,
    .acc_rd_en, .acc_rd_addr,
    .vu_valid, .dram_out_valid, .dram_out_row,
    .stall, .ia_bank_en(ia_banks)
  );

  fetta_addr_gen u_agen (
    .clk, .rst_n, .ins,
    .tile, .inner, .ib_tile, .ib_k, .ia_addr, .ib_addr,
    .wstart, .wvalid, .wrow(red_row), .acc_addr, .acc_accum, .wdone
  );

  for (genvar b = 0; b < NB; b++) begin : g_wa
    assign um_waddr_b[b] = um_waddr;
  end
  assign um_wdata = vu_y;

  fetta_unified_mem #(.NB(NB), .DEPTH(4096)) u_umem (
    .clk, .pp_sel,
    .re(um_re), .raddr(um_raddr), .rdata(um_rdata),
    .we(um_we), .waddr(um_waddr_b), .wdata(um_wdata),
    .dram_we, .dram_addr, .dram_wdata, .dram_ready
  );

  fetta_tcu #(.NCE(NUM_CE)) u_tcu (
    .clk, .rst_n,
    .ce_ctrl,
    .bank_rdata (um_rdata),
    .ia_tsel    (ins.ia_tsel),
    .ia_sel     (ins.ia_sel),
    .ia_bank_idx(ia_bank_idx),
    .ib_tsel    (ins.ib_tsel),
    .ib_sel     (ins.ib_sel),
    .ib_bank_idx(ins.ib_bank_idx),
    .red_mode   (ins.red_mode),
    .red_tsel   (ins.red_tsel),
    .red_bank_idx(ins.red_bank_idx),
    .red_out    (red_out),
    .red_valid  (red_valid),
    .red_row    (red_row)
  );

  assign wvalid = |red_valid;

  fetta_accum_unit #(.NB(NB), .DEPTH(1024)) u_acc (
    .clk, .rst_n,
    .in_valid  (red_valid & ins.acc_bank_en),
    .in_data   (red_out),
    .in_addr   (acc_addr),
    .accumulate(acc_accum),
    .rd_en     (acc_rd_en),
    .rd_addr   (acc_rd_addr),
    .rd_data   (acc_rd_data),
    .rd_valid  (acc_rd_valid)
  );

  fetta_vector_unit #(.LANES(4*NB)) u_vu (
    .clk, .rst_n,
    .in_valid(vu_valid),
    .op      (ins.vop),
    .scalar  (ins.scalar),
    .a       (acc_rd_data),
    .b       (um_rdata),
    .y       (vu_y),
    .y_valid (vu_y_valid)
  );

  assign dram_out_data = vu_y;

  // The vector unit consumes an accumulation row exactly when one is read.
  always_ff @(posedge clk) begin
    if (rst_n) assert (vu_valid == acc_rd_valid)
      else $error("vector unit and accumulation read-out out of step");
    if (rst_n && vu_y_valid && !dram_out_valid)
      assert (um_we == '1) else $error("vector result not written back");
  end

endmodule
