// fetta_ce: contraction engine, a reconfigurable and transposable 4x4
// systolic array of fetta_pe.
//
// IA: one element per row enters from the left and is broadcast to the whole
// row (no PE-to-PE streaming). Rows are skewed by a delay line: row r sees
// the IA word r cycles late in the stationary modes and r+1 cycles late in
// OS (one extra cycle because IB is registered in each PE before it is
// used). Row controls (valid, ib_swap, first, last) travel in the same delay
// line so that each row switches exactly when its data does.
//
// Stationary dataflows (WS / IS): IB is shifted into the shadow registers
// with ib_load, four words per tile, either from the top (ib_dir = IB_NORTH:
// word k lands in row 3-k) or from the right (IB_EAST: word k lands in column
// k, element r of the word in row r, i.e. the stream stored transposed). ib_swap activates it. Each
// valid IA word a[0..3] then yields, four cycles later at the bottom,
//     psum[c] = sum_r a[r] * B[r][c].
// Because of the row skew the shadow of the next tile may only be loaded
// once the swap has reached row 3, i.e. from the 4th cycle of a tile on;
// a tile therefore occupies at least 7 cycles (3 skew + 4 load) when loads
// are overlapped with compute. ib_swap is given with the last IA word of a
// tile (or with the 4th load word before the first tile).
//
// Output-stationary dataflow (OS): IB words b[0..3] (one per column) stream
// in from the top each step k together with the IA column a[0..3];
// PE(r,c) accumulates sum_k a_k[r] * b_k[c]. After the step marked 'last'
// reaches the bottom row the CE drains the tile for four cycles, bottom row
// first: psum = C[3][*], C[2][*], C[1][*], C[0][*] with psum_row = 3..0.
// Draining overlaps the next tile, which must have at least 4 steps.
//
// All of the above structure follows the CE drawing of the accelerator
// description (IA from the left with 0..3 skew registers, IB both downward
// and leftward, psum out at the bottom). Reset: synchronous, active low.
module fetta_ce
  import fetta_pkg::*;
#(
  parameter int unsigned DIM = CE_DIM
) (
  input  logic      clk,
  input  logic      rst_n,
  input  ce_ctrl_t  ctrl,
  input  bf16_t [DIM-1:0] ia,       // ia[r] for row r
  input  bf16_t [DIM-1:0] ib,       // ib[c] (north) or ib[r] (east)
  output bf16_t [DIM-1:0] psum,     // bottom of each column
  output logic            psum_valid,
  output logic [$clog2(DIM)-1:0] psum_row  // OS: row of the tile being drained
);

  typedef struct packed {
    logic valid;
    logic swap;
    logic first;
    logic last;
  } rowctl_t;

  // delay line: stage d holds what entered d cycles ago (stage 0 = input)
  bf16_t [DIM-1:0] ia_d  [DIM+1];
  rowctl_t         ctl_d [DIM+1];

  assign ia_d[0]  = ia;
  assign ctl_d[0] = '{valid: ctrl.ia_valid, swap: ctrl.ib_swap, first: ctrl.first, last: ctrl.last};

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int d = 1; d <= DIM; d++) begin
        ia_d[d]  <= '0;
        ctl_d[d] <= '0;
      end
    end else begin
      for (int d = 1; d <= DIM; d++) begin
        ia_d[d]  <= ia_d[d-1];
        ctl_d[d] <= ctl_d[d-1];
      end
    end
  end

  logic os;
  assign os = (ctrl.df == DF_OS);

  // drain sequencing for OS
  logic [$clog2(DIM+1)-1:0] drain_cnt;   // cycles of draining still to come
  logic [$clog2(DIM)-1:0]   drain_step;  // 0 .. DIM-1 while draining
  logic                     draining;
  assign draining = (drain_cnt != 0);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      drain_cnt  <= '0;
      drain_step <= '0;
    end else if (os && ctl_d[DIM].valid && ctl_d[DIM].last) begin
      drain_cnt  <= ($clog2(DIM+1))'(DIM);
      drain_step <= '0;
    end else if (draining) begin
      drain_cnt  <= drain_cnt - 1'b1;
      drain_step <= drain_step + 1'b1;
    end
  end

  // PE grid
  bf16_t ib_o [DIM][DIM];
  bf16_t ps_o [DIM][DIM];

  for (genvar r = 0; r < DIM; r++) begin : g_row
    for (genvar c = 0; c < DIM; c++) begin : g_col
      bf16_t   ia_r;
      rowctl_t ct_r;
      bf16_t   ibn, ibe, psin;
      logic    dshift;
      assign ia_r  = os ? ia_d[r+1][r] : ia_d[r][r];
      assign ct_r  = os ? ctl_d[r+1]   : ctl_d[r];
      assign ibn   = (r == 0)       ? ib[c] : ib_o[r-1][c];
      assign ibe   = (c == DIM - 1) ? ib[r] : ib_o[r][c+1];
      assign psin  = (r == 0)       ? 16'h0000 : ps_o[r-1][c];
      // rows below the drained part collapse one row per cycle
      assign dshift = draining && (int'(drain_step) < r);

      fetta_pe u_pe (
        .clk        (clk),
        .rst_n      (rst_n),
        .df         (ctrl.df),
        .ib_dir     (ctrl.ib_dir),
        .ia_in      (ia_r),
        .valid      (ct_r.valid),
        .ib_n       (ibn),
        .ib_e       (ibe),
        .ib_out     (ib_o[r][c]),
        .psum_in    (psin),
        .psum_out   (ps_o[r][c]),
        .ib_load    (ctrl.ib_load),
        .ib_swap    (ct_r.swap),
        .first      (ct_r.first),
        .last       (ct_r.last),
        .drain_shift(dshift)
      );
    end
  end

  for (genvar c = 0; c < DIM; c++) begin : g_out
    assign psum[c] = ps_o[DIM-1][c];
  end

  assign psum_valid = os ? draining : ctl_d[DIM].valid;
  assign psum_row   = ($clog2(DIM))'(DIM - 1) - drain_step;

endmodule
