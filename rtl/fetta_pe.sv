// fetta_pe: one processing element of a contraction engine.
//
// A BF16 multiplier and adder with two double-buffered register pairs:
//   * IB registers ib_q[0..1]. In the stationary dataflows (WS / IS) one of
//     them is the active operand and the other a shadow that is loaded
//     through the IB shift chain (from the north or the east neighbour) while
//     the active one is being used; ib_swap exchanges their roles. In the
//     output-stationary dataflow (OS) ib_q[0] is a pipeline register that
//     passes IB from north to south every cycle.
//   * Psum registers ps_q[0..1]. Stationary: ps_q[0] holds psum_in + IA*IB
//     and feeds the PE below. OS: ps_q[0] accumulates IA*IB locally; when the
//     last reduction step arrives the finished sum is copied into ps_q[1],
//     the drain register, which then shifts down the column on drain_shift
//     while ps_q[0] already accumulates the next tile.
//
// The muxes in front of and behind each register pair, the E/N choice for
// IB and the bypass of psum_in into the drain register follow the PE drawing
// of the accelerator description; the select encodings, the toggle bit that
// marks the active IB register and the reset values are this design's.
//
// Timing: every register updates on the rising clock edge; psum_out and
// ib_out are register outputs (one cycle per PE hop). Active-low
// synchronous reset clears all registers.
module fetta_pe
  import fetta_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  dataflow_e df,
  input  ib_dir_e   ib_dir,
  // operands
  input  bf16_t     ia_in,        // broadcast along the row (already skewed)
  input  logic      valid,        // ia_in carries a real operand this cycle
  input  bf16_t     ib_n,         // IB from the PE above (or the CE input)
  input  bf16_t     ib_e,         // IB from the PE to the right (or the CE input)
  output bf16_t     ib_out,       // IB passed on (south in N mode / OS, west in E mode)
  input  bf16_t     psum_in,      // psum from the PE above
  output bf16_t     psum_out,     // psum to the PE below
  // control
  input  logic      ib_load,      // stationary: shift IB into the shadow register
  input  logic      ib_swap,      // stationary: shadow becomes active (row skewed)
  input  logic      first,        // OS: first reduction step of a tile (row skewed)
  input  logic      last,         // OS: last reduction step of a tile (row skewed)
  input  logic      drain_shift   // OS: drain register takes psum_in
);

  bf16_t ib_q [2];
  bf16_t ps_q [2];
  logic  act;            // index of the active IB register (stationary modes)

  logic  os;
  bf16_t ib_sel_in;      // IB input mux (E / N)
  bf16_t ib_use;         // IB operand at the multiplier
  bf16_t prod;
  bf16_t add_b;          // adder input mux (psum_in / local accumulator)
  bf16_t sum;

  assign os        = (df == DF_OS);
  assign ib_sel_in = (!os && ib_dir == IB_EAST) ? ib_e : ib_n;
  assign ib_use    = os ? ib_q[0] : ib_q[act];
  assign prod      = bf16_mul(ia_in, ib_use);
  assign add_b     = os ? (first ? 16'h0000 : ps_q[0]) : psum_in;
  assign sum       = bf16_add(add_b, prod);

  // IB output mux: the shadow register forms the load chain in the
  // stationary modes, the pipeline register in OS.
  assign ib_out   = os ? ib_q[0] : ib_q[~act];
  // Psum output mux: systolic partial sum or drain register.
  assign psum_out = os ? ps_q[1] : ps_q[0];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ib_q[0] <= '0;
      ib_q[1] <= '0;
      ps_q[0] <= '0;
      ps_q[1] <= '0;
      act     <= 1'b0;
    end else if (os) begin
      ib_q[0] <= ib_n;
      if (valid) ps_q[0] <= sum;
      if (valid && last)  ps_q[1] <= sum;
      else if (drain_shift) ps_q[1] <= psum_in;
    end else begin
      if (ib_load) ib_q[~act] <= ib_sel_in;
      if (ib_swap) act <= ~act;
      ps_q[0] <= valid ? sum : psum_in;
    end
  end

endmodule
