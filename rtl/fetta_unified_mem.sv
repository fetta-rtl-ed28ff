// fetta_unified_mem: the unified on-chip memory holding activations,
// weights and gradients.
//
// NUM_BANKS banks of DEPTH rows; a row is four BF16 values (one CE row), so
// all banks together deliver 64 values per cycle. 16 banks x 4096 rows x
// 8 bytes = 512 KB. Each bank is split into two ping-pong halves: the
// compute side (TCU reads, vector-unit reads and writes) works in half
// pp_sel while the DRAM side fills half ~pp_sel with the next tile or
// layer; flipping pp_sel exchanges them without copying.
//
// Compute side: per-bank read enable and address (each bank is read for IA
// or IB or the vector unit, independently of the others), data one cycle
// later; per-bank write. DRAM side: per-bank write that is accepted
// (dram_ready) unless the compute side writes the same bank in that cycle.
// Bank count, row width and capacity follow the accelerator description;
// the port arrangement and the half-bank ping-pong are this design's.
module fetta_unified_mem
  import fetta_pkg::*;
#(
  parameter int unsigned NB    = NUM_BANKS,
  parameter int unsigned DEPTH = 4096,
  localparam int unsigned AW   = $clog2(DEPTH) - 1   // address within a half
) (
  input  logic                   clk,
  input  logic                   pp_sel,
  // compute side
  input  logic  [NB-1:0]         re,
  input  logic  [NB-1:0][AW-1:0] raddr,
  output word_t [NB-1:0]         rdata,
  input  logic  [NB-1:0]         we,
  input  logic  [NB-1:0][AW-1:0] waddr,
  input  word_t [NB-1:0]         wdata,
  // DRAM side
  input  logic  [NB-1:0]         dram_we,
  input  logic  [AW-1:0]         dram_addr,
  input  word_t [NB-1:0]         dram_wdata,
  output logic  [NB-1:0]         dram_ready
);

  for (genvar b = 0; b < NB; b++) begin : g_bank
    logic          bwe;
    logic [AW:0]   bwa;
    logic [WORD_W-1:0] bwd;
    always_comb begin
      if (we[b]) begin
        bwe = 1'b1; bwa = {pp_sel, waddr[b]};   bwd = wdata[b];
      end else begin
        bwe = dram_we[b]; bwa = {~pp_sel, dram_addr}; bwd = dram_wdata[b];
      end
    end
    assign dram_ready[b] = ~we[b];

    fetta_sram_bank #(.DEPTH(DEPTH), .W(WORD_W)) u_bank (
      .clk  (clk),
      .re   (re[b]),
      .raddr({pp_sel, raddr[b]}),
      .rdata(rdata[b]),
      .we   (bwe),
      .waddr(bwa),
      .wdata(bwd)
    );
  end

endmodule
