// fetta_addr_gen: address generator for the unified memory and the
// accumulation unit.
//
// Read side (combinational, driven by the controller's loop counters):
//   ia_addr = ia_base + tile    * ia_tile_stride + inner
//   ib_addr = ib_base + ib_tile * ib_tile_stride + ib_k
// where inner is the IA vector (WS/IS) or reduction step (OS) inside a tile,
// ib_tile/ib_k the tile and word being loaded into the IB registers.
//
// Write side (sequential): counts the psum words that leave the reduction
// network and gives the accumulation-unit row for the current one:
//   acc_addr = acc_base + wtile * acc_tile_stride + widx
// widx runs over the n_inner psum vectors of a tile in WS/IS and is the
// drained tile row (given by the TCU) in OS, where a tile yields 4 words.
// A word overwrites its row unless acc_accumulate is set or the tiles share
// rows (acc_tile_stride = 0), in which case every tile after the first adds
// its contribution.
// The accelerator description names this block and says that it generates
// the memory addresses; the affine form above is this design's choice.
// The whole instruction is passed in for simplicity; only its address,
// loop-count and dataflow fields are used here, so lint reports the other
// bits as unused.
module fetta_addr_gen
  import fetta_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  instr_t            ins,
  // read side
  input  logic [CNT_W-1:0]  tile,
  input  logic [CNT_W-1:0]  inner,
  input  logic [CNT_W-1:0]  ib_tile,
  input  logic [CNT_W-1:0]  ib_k,
  output logic [UM_AW-1:0]  ia_addr,
  output logic [UM_AW-1:0]  ib_addr,
  // write side
  input  logic              wstart,     // new instruction: clear the counters
  input  logic              wvalid,     // a psum word is at the accumulation unit
  input  logic [1:0]        wrow,       // OS: tile row of that word
  output logic [ACC_AW-1:0] acc_addr,
  output logic              acc_accum,
  output logic              wdone       // all psum words of the instruction seen
);

  assign ia_addr = UM_AW'(ins.ia_base + tile * ins.ia_tile_stride + inner);
  assign ib_addr = UM_AW'(ins.ib_base + ib_tile * ins.ib_tile_stride + ib_k);

  logic [CNT_W-1:0] wtile, widx, per_tile;
  logic             os;
  assign os       = (ins.df == DF_OS);
  assign per_tile = os ? CNT_W'(CE_DIM) : ins.n_inner;

  always_ff @(posedge clk) begin
    if (!rst_n || wstart) begin
      wtile <= '0;
      widx  <= '0;
    end else if (wvalid) begin
      if (widx == per_tile - 1'b1) begin
        widx  <= '0;
        wtile <= wtile + 1'b1;
      end else begin
        widx <= widx + 1'b1;
      end
    end
  end

  assign acc_addr  = ACC_AW'(CNT_W'(ins.acc_base) + wtile * CNT_W'(ins.acc_tile_stride)
                             + (os ? CNT_W'(wrow) : widx));
  assign acc_accum = ins.acc_accumulate || (wtile != '0 && ins.acc_tile_stride == '0);
  assign wdone     = (wtile == ins.n_tiles);

endmodule
