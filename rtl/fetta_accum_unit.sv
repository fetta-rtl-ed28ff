// fetta_accum_unit: accumulation unit between the reduction network and the
// vector unit.
//
// NUM_BANKS banks, one per reduction-network output, DEPTH rows of four BF16
// psums (16 x 1024 x 8 bytes = 128 KB) and four BF16 adders per bank. A
// psum word arriving on bank b with address a is either written as is
// (accumulate = 0) or added to the row already stored there (accumulate = 1).
// This lets reductions that are longer than the TCU can do spatially be
// completed over time.
//
// Pipeline per bank (read-modify-write):
//   cycle t   : psum arrives, row a is read;
//   cycle t+1 : old row (or, if the word written in cycle t has the same
//               address, that word: forwarding) + psum is written back.
// A new psum may arrive every cycle, back-to-back to the same address.
// The vector-unit read port (rd_en, data one cycle later) shares the bank
// read port and must not be used while psums arrive.
// Bank count, row width, capacity and the four adders per bank follow the
// accelerator description; the pipeline and forwarding are this design's.
module fetta_accum_unit
  import fetta_pkg::*;
#(
  parameter int unsigned NB    = NUM_BANKS,
  parameter int unsigned DEPTH = 1024,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              rst_n,
  // psum input from the reduction network
  input  logic  [NB-1:0]    in_valid,
  input  word_t [NB-1:0]    in_data,
  input  logic  [AW-1:0]    in_addr,
  input  logic              accumulate,
  // read-out towards the vector unit
  input  logic              rd_en,
  input  logic  [AW-1:0]    rd_addr,
  output word_t [NB-1:0]    rd_data,
  output logic              rd_valid
);

  logic          s1_acc;
  logic [AW-1:0] s1_addr;
  logic          rd_pend;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      s1_acc  <= 1'b0;
      s1_addr <= '0;
      rd_pend <= 1'b0;
    end else begin
      s1_acc  <= accumulate;
      s1_addr <= in_addr;
      rd_pend <= rd_en && (in_valid == '0);
    end
  end
  assign rd_valid = rd_pend;

  for (genvar b = 0; b < NB; b++) begin : g_bank
    logic          s1_v, s2_v;
    word_t         s1_d, s2_d;
    logic [AW-1:0] s2_addr;
    word_t         rdat, old, nxt;

    always_ff @(posedge clk) begin
      if (!rst_n) begin
        s1_v <= 1'b0; s2_v <= 1'b0;
        s1_d <= '0;   s2_d <= '0; s2_addr <= '0;
      end else begin
        s1_v <= in_valid[b];
        s1_d <= in_data[b];
        s2_v <= s1_v;
        s2_d <= nxt;
        s2_addr <= s1_addr;
      end
    end

    assign old = (s2_v && s2_addr == s1_addr) ? s2_d : rdat;
    assign nxt = s1_acc ? word_add(old, s1_d) : s1_d;

    fetta_sram_bank #(.DEPTH(DEPTH), .W(WORD_W)) u_bank (
      .clk  (clk),
      .re   (in_valid[b] | rd_en),
      .raddr(in_valid != '0 ? in_addr : rd_addr),
      .rdata(rdat),
      .we   (s1_v),
      .waddr(s1_addr),
      .wdata(nxt)
    );
    assign rd_data[b] = rdat;
  end

endmodule
