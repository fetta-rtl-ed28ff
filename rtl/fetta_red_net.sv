// fetta_red_net: transposable butterfly reduction network.
//
// N inputs (CE psum words) to N outputs (accumulation banks). log2(N)
// butterfly levels of N/2 fetta_adder_switch each, a register row after
// every level, then a transpose level of N 2:1 muxes in front of the banks.
//   butterfly level l (l = 0 first): switch k pairs position i (bit l = 0,
//     port A / left) with i | (1 << l) (port B / right); distance 1, 2, 4, 8.
//   transpose level: output {row,col} takes position {col,row} when its
//     select is set (sqrt(N) x sqrt(N) grid).
// Besides routing, the adder switches sum psums of different CEs (spatial
// reduction): e.g. ADD_LEFT on levels 0 and 1 for the switches at positions
// 0,2 / 0 sums CEs 0..3 into output 0.
//
// Bank index: bit l of bank_idx is XORed into the direction bit of every
// level-l switch mode (Pass <-> Swap, Add-Left <-> Add-Right). A reduction
// pattern written for destination banks 0.. therefore lands on the banks
// XOR-offset by bank_idx, without new switch modes - the same select-vector
// XOR the controller applies to the distribution networks.
//
// Every word carries a valid bit so that empty ports are known downstream.
// Latency: log2(N) cycles from din to dout (registers after each level; the
// transpose muxes are combinational). Topology, the register placement, the
// adder-switch modes and the bottom transpose level follow the reduction
// network drawing; the valid bits are this design's addition.
module fetta_red_net
  import fetta_pkg::*;
#(
  parameter int unsigned N = NUM_CE,
  localparam int unsigned LOGN = $clog2(N)
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  word_t [N-1:0]               din,
  input  logic  [N-1:0]               din_valid,
  input  logic  [LOGN-1:0][N/2-1:0][1:0] mode,   // [level][switch]
  input  logic  [N-1:0]               tsel,
  input  logic  [LOGN-1:0]            bank_idx,  // destination bank offset
  output word_t [N-1:0]               dout,
  output logic  [N-1:0]               dout_valid
);

  word_t [N-1:0] q   [LOGN+1];
  logic  [N-1:0] qv  [LOGN+1];
  assign q[0]  = din;
  assign qv[0] = din_valid;

  for (genvar l = 0; l < LOGN; l++) begin : g_lvl
    word_t [N-1:0] nxt;
    logic  [N-1:0] nxtv;
    for (genvar k = 0; k < N/2; k++) begin : g_sw
      // k-th pair: low index has bit l cleared
      localparam int unsigned IL = ((k >> l) << (l + 1)) | (k & ((1 << l) - 1));
      localparam int unsigned IR = IL | (1 << l);
      fetta_adder_switch u_sw (
        .mode    (sw_mode_e'(mode[l][k] ^ {1'b0, bank_idx[l]})),
        .a       (q[l][IL]),
        .a_valid (qv[l][IL]),
        .b       (q[l][IR]),
        .b_valid (qv[l][IR]),
        .l       (nxt[IL]),
        .l_valid (nxtv[IL]),
        .r       (nxt[IR]),
        .r_valid (nxtv[IR])
      );
    end
    always_ff @(posedge clk) begin
      if (!rst_n) begin
        q[l+1]  <= '0;
        qv[l+1] <= '0;
      end else begin
        q[l+1]  <= nxt;
        qv[l+1] <= nxtv;
      end
    end
  end

  always_comb begin
    for (int i = 0; i < N; i++) begin
      dout[i]       = tsel[i] ? q[LOGN][tpos(i, LOGN)]  : q[LOGN][i];
      dout_valid[i] = tsel[i] ? qv[LOGN][tpos(i, LOGN)] : qv[LOGN][i];
    end
  end

endmodule
