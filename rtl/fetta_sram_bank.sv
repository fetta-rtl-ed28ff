// fetta_sram_bank: one SRAM bank written as an array, one synchronous read
// port and one write port.
//
// rdata returns mem[raddr] one cycle after re (it holds its value
// otherwise). A read and a write of the same address in one cycle return
// the old contents. The array has no reset; the contents are whatever was
// written. In silicon this would be a compiled SRAM macro; its port set
// (1R1W, registered read) is this design's choice.
module fetta_sram_bank #(
  parameter int unsigned DEPTH = 4096,
  parameter int unsigned W     = 64,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output logic [W-1:0]  rdata,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wdata
);

  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (re) rdata <= mem[raddr];
    if (we) mem[waddr] <= wdata;
  end

endmodule
