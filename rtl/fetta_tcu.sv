// fetta_tcu: tensor contraction unit.
//
// Sixteen contraction engines (fetta_ce) between two distribution networks
// and one reduction network:
//   bank words --IA fetta_dist_net--> CE j ia[0..3]
//   bank words --IB fetta_dist_net--> CE j ib[0..3]
//   CE j psum[0..3] --fetta_red_net--> accumulation bank j
// Both distribution networks see all banks; the controller decides which
// banks are read for IA and which for IB in a cycle, and routes each operand
// with its own select vectors. All CEs share one control word (they run in
// lock step), so their psums arrive at the reduction network together.
//
// Timing: dist networks are combinational (bank data of cycle t reaches the
// CEs in t); CE latency 4 cycles in the stationary modes; reduction network
// latency log2(NUM_CE) cycles. In OS mode the CE drains every tile for four
// cycles and reports the tile row of each psum word on psum_row.
// The composition (16 CEs, distribution / reduction networks around them)
// follows the accelerator description; using two distribution network
// instances, one per operand, is this design's reading of it.
module fetta_tcu
  import fetta_pkg::*;
#(
  parameter int unsigned NCE = NUM_CE,
  localparam int unsigned LOGN = $clog2(NCE)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  ce_ctrl_t                 ce_ctrl,
  input  word_t [NCE-1:0]          bank_rdata,
  // IA network
  input  logic [NCE-1:0]           ia_tsel,
  input  logic [LOGN-1:0][NCE-1:0] ia_sel,
  input  logic [LOGN-1:0]          ia_bank_idx,
  // IB network
  input  logic [NCE-1:0]           ib_tsel,
  input  logic [LOGN-1:0][NCE-1:0] ib_sel,
  input  logic [LOGN-1:0]          ib_bank_idx,
  // reduction network
  input  logic [LOGN-1:0][NCE/2-1:0][1:0] red_mode,
  input  logic [NCE-1:0]           red_tsel,
  input  logic [LOGN-1:0]          red_bank_idx,
  output word_t [NCE-1:0]          red_out,
  output logic  [NCE-1:0]          red_valid,
  output logic  [1:0]              red_row     // OS tile row of red_out
);

  word_t [NCE-1:0] ia_w, ib_w, ps_w;
  logic  [NCE-1:0] ps_v;
  logic  [1:0]     ce_row [NCE];

  fetta_dist_net #(.N(NCE), .EW(WORD_W)) u_dist_ia (
    .din(bank_rdata), .tsel(ia_tsel), .sel(ia_sel), .bank_idx(ia_bank_idx), .dout(ia_w)
  );
  fetta_dist_net #(.N(NCE), .EW(WORD_W)) u_dist_ib (
    .din(bank_rdata), .tsel(ib_tsel), .sel(ib_sel), .bank_idx(ib_bank_idx), .dout(ib_w)
  );

  for (genvar j = 0; j < NCE; j++) begin : g_ce
    logic v;
    fetta_ce #(.DIM(CE_DIM)) u_ce (
      .clk       (clk),
      .rst_n     (rst_n),
      .ctrl      (ce_ctrl),
      .ia        (ia_w[j]),
      .ib        (ib_w[j]),
      .psum      (ps_w[j]),
      .psum_valid(v),
      .psum_row  (ce_row[j])
    );
    assign ps_v[j] = v;
  end

  fetta_red_net #(.N(NCE)) u_red (
    .clk       (clk),
    .rst_n     (rst_n),
    .din       (ps_w),
    .din_valid (ps_v),
    .mode      (red_mode),
    .tsel      (red_tsel),
    .bank_idx  (red_bank_idx),
    .dout      (red_out),
    .dout_valid(red_valid)
  );

  // the tile row travels alongside the reduction network registers
  logic [1:0] row_d [LOGN+1];
  assign row_d[0] = ce_row[0];
  always_ff @(posedge clk) begin
    if (!rst_n) for (int i = 1; i <= LOGN; i++) row_d[i] <= '0;
    else        for (int i = 1; i <= LOGN; i++) row_d[i] <= row_d[i-1];
  end
  assign red_row = row_d[LOGN];

endmodule
