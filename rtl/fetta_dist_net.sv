// fetta_dist_net: transposable butterfly distribution network.
//
// N inputs (memory banks) to N outputs (CEs), log2(N)+1 levels of N 2:1
// muxes. Every mux either keeps the value of its own position ("vertical")
// or takes the value of one partner position ("diagonal"):
//   level T (transpose, first): partner of position {row,col} is {col,row},
//            indices seen as a sqrt(N) x sqrt(N) grid;
//   butterfly level for bit b:  partner of position i is i ^ (1 << b).
// The butterfly levels are applied from the highest bit to the lowest.
// With all selects 0 the network is the identity (unicast). Setting the
// selects of bit b on the positions whose bit b is 1 copies the lower half of
// every pair into the upper half, which builds multicast and broadcast;
// the transpose level exchanges bank (r,c) with bank (c,r).
//
// The controller XORs bit b of the start bank index into every select of
// level b (done here through bank_idx) so that a routing pattern can be
// moved to another group of banks without recomputing the select vector.
//
// Element = one bank row (four BF16 values). Purely combinational, as the
// mux-only drawing of the network suggests. Level order and the transpose
// pairing follow the 4-bank example drawing; the gate-level structure of a
// mux is a plain 2:1 select.
module fetta_dist_net
  import fetta_pkg::*;
#(
  parameter int unsigned N  = NUM_BANKS,
  parameter int unsigned EW = WORD_W,
  localparam int unsigned LOGN = $clog2(N)
) (
  input  logic [N-1:0][EW-1:0]   din,
  input  logic [N-1:0]           tsel,       // transpose level selects
  input  logic [LOGN-1:0][N-1:0] sel,        // butterfly selects, [bit][position]
  input  logic [LOGN-1:0]        bank_idx,   // XORed into level 'bit' selects
  output logic [N-1:0][EW-1:0]   dout
);

  // g_stage[s].v is the output of level s (level 0 = transpose)
  for (genvar s = 0; s <= LOGN; s++) begin : g_stage
    logic [N-1:0][EW-1:0] v;
    if (s == 0) begin : g_t
      for (genvar i = 0; i < N; i++) begin : g_m
        assign v[i] = tsel[i] ? din[tpos(i, LOGN)] : din[i];
      end
    end else begin : g_b
      localparam int unsigned B = LOGN - s;   // bit handled by this level
      for (genvar i = 0; i < N; i++) begin : g_m
        assign v[i] = (sel[B][i] ^ bank_idx[B]) ? g_stage[s-1].v[i ^ (1 << B)]
                                                : g_stage[s-1].v[i];
      end
    end
  end

  assign dout = g_stage[LOGN].v;

endmodule
