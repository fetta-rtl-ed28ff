// fetta_pkg: constants, types and BF16 arithmetic shared by the whole
// accelerator.
//
// The array is built from 16 contraction engines (CEs) of 4x4 processing
// elements, fed from 16 memory banks that each return four BF16 elements per
// row. Those sizes come from the accelerator description. Everything else
// here (instruction layout, mode encodings, rounding) is this design's own
// choice.
//
// BF16 arithmetic: the multiplier and the adder flush denormals to zero,
// truncate the result toward zero (guard and sticky bits are kept while
// aligning, so subtraction is exact before truncation) and saturate on
// exponent overflow to the largest finite value. NaN and infinity are not
// produced. A product of two BF16 values is formed exactly (8x8 bit
// significands) before truncation, so small integers are computed exactly.
package fetta_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned DATA_W    = 16;   // BF16
  localparam int unsigned CE_DIM    = 4;    // PEs per CE row / column
  localparam int unsigned NUM_CE    = 16;   // CEs in the TCU
  localparam int unsigned NUM_BANKS = 16;   // unified-memory / accumulation banks
  localparam int unsigned WORD_W    = CE_DIM * DATA_W;  // one bank row: 4 elements
  localparam int unsigned LOG_BANKS = $clog2(NUM_BANKS);

  typedef logic [DATA_W-1:0] bf16_t;
  typedef bf16_t [CE_DIM-1:0] word_t;  // four elements, element 0 in the low bits

  // ------------------------------------------------------------ encodings
  // Dataflow of a contraction. WS and IS differ only in which tensor the
  // software places on the IB side; both keep IB stationary in the PEs.
  typedef enum logic [1:0] {DF_WS = 2'd0, DF_IS = 2'd1, DF_OS = 2'd2} dataflow_e;

  // Direction in which IB enters a CE for the stationary modes.
  typedef enum logic {IB_NORTH = 1'b0, IB_EAST = 1'b1} ib_dir_e;

  // Adder-switch modes of the reduction network.
  typedef enum logic [1:0] {
    SW_PASS = 2'd0, SW_SWAP = 2'd1, SW_ADD_LEFT = 2'd2, SW_ADD_RIGHT = 2'd3
  } sw_mode_e;

  // Vector-unit operations.
  typedef enum logic [2:0] {
    VOP_PASS = 3'd0,   // y = a
    VOP_RELU = 3'd1,   // y = max(a, 0)
    VOP_RELU_BWD = 3'd2,  // y = (b > 0) ? a : 0   (gradient through a ReLU)
    VOP_SCALE = 3'd3,  // y = s * a
    VOP_AXPY = 3'd4    // y = s * a + b         (SGD update: W + (-lr) * dW)
  } vop_e;

  typedef enum logic [1:0] {
    OP_CONTRACT = 2'd0,  // run a tiled contraction on the TCU
    OP_VECTOR   = 2'd1,  // accumulation unit -> vector unit -> memory / DRAM
    OP_SWAP     = 2'd2   // flip the ping-pong halves of the unified memory
  } opcode_e;

  localparam int unsigned UM_AW  = 11;  // address within one ping-pong half
  localparam int unsigned ACC_AW = 10;
  localparam int unsigned CNT_W  = 12;

  // One instruction as written by the host.
  typedef struct packed {
    opcode_e   op;
    // ---- contraction fields
    dataflow_e df;
    ib_dir_e   ib_dir;
    logic [NUM_BANKS-1:0] ia_bank_en;   // banks that hold IA
    logic [NUM_BANKS-1:0] ib_bank_en;   // banks that hold IB
    logic [LOG_BANKS-1:0] ia_bank_idx;  // start bank index (XORed into the IA network selects)
    logic [LOG_BANKS-1:0] ib_bank_idx;
    logic [LOG_BANKS-1:0] bank_stride;  // IA bank rotation per tile
    logic                 rotate_ia;    // rotate IA banks at every tile boundary
    logic [LOG_BANKS-1:0][NUM_BANKS-1:0] ia_sel;  // default butterfly selects, IA network
    logic [NUM_BANKS-1:0]                ia_tsel; // transpose level selects, IA network
    logic [LOG_BANKS-1:0][NUM_BANKS-1:0] ib_sel;
    logic [NUM_BANKS-1:0]                ib_tsel;
    logic [LOG_BANKS-1:0][NUM_BANKS/2-1:0][1:0] red_mode;  // adder-switch modes
    logic [NUM_BANKS-1:0]                red_tsel;          // reduction transpose selects
    logic [LOG_BANKS-1:0]                red_bank_idx;      // XORed into the direction bit of level-i switches
    logic [NUM_BANKS-1:0] acc_bank_en;  // accumulation banks that may be written
    logic                 acc_accumulate;  // add to what is in the accumulation unit
    logic [CNT_W-1:0] n_tiles;   // outer loop
    logic [CNT_W-1:0] n_inner;   // IA vectors per tile (WS/IS) or reduction length (OS)
    logic [UM_AW-1:0] ia_base, ia_tile_stride;
    logic [UM_AW-1:0] ib_base, ib_tile_stride;
    logic [ACC_AW-1:0] acc_base, acc_tile_stride;
    // ---- vector fields
    vop_e              vop;
    bf16_t             scalar;
    logic              to_dram;    // 1: send to the DRAM port, 0: write unified memory
    logic [UM_AW-1:0]  b_base;     // second vector operand in unified memory
    logic [UM_AW-1:0]  dst_base;   // destination row in unified memory
  } instr_t;

  // Per-cycle control of all CEs (they run in lock step).
  typedef struct packed {
    dataflow_e df;
    ib_dir_e   ib_dir;
    logic ia_valid;   // IA word valid (stationary: one IA vector; OS: one k step)
    logic ib_load;    // shift one IB word into the shadow registers (stationary)
    logic ib_swap;    // make the shadow IB registers the active ones
    logic first;      // OS: first k of a tile
    logic last;       // OS: last k of a tile
  } ce_ctrl_t;

  // ---------------------------------------------------------- arithmetic
  function automatic bf16_t bf16_mul(bf16_t a, bf16_t b);
    logic        s;
    logic [9:0]  e;      // signed headroom
    logic [15:0] p;
    bf16_t       r;
    s = a[15] ^ b[15];
    if (a[14:7] == 8'd0 || b[14:7] == 8'd0) return {s, 15'd0};
    p = {1'b1, a[6:0]} * {1'b1, b[6:0]};
    e = {2'b00, a[14:7]} + {2'b00, b[14:7]} - 10'd127;
    if (p[15]) begin
      e = e + 10'd1;
      p = p >> 1;
    end
    r = {s, 8'h00, p[13:7]};
    if (e[9] || e == 10'd0) return {s, 15'd0};              // underflow
    if (e >= 10'd255) return {s, 8'hFE, 7'h7F};              // saturate
    r[14:7] = e[7:0];
    return r;
  endfunction

  function automatic bf16_t bf16_add(bf16_t a, bf16_t b);
    bf16_t       x, y;
    logic [7:0]  d;
    logic [10:0] mx, my;   // 1.7 significand plus 3 guard bits
    logic [11:0] sum;
    logic        sticky;
    logic [8:0]  e;
    int          lz;
    if (a[14:7] == 8'd0) return (b[14:7] == 8'd0) ? 16'h0000 : b;
    if (b[14:7] == 8'd0) return a;
    // x gets the larger magnitude
    if (a[14:0] >= b[14:0]) begin x = a; y = b; end else begin x = b; y = a; end
    d  = x[14:7] - y[14:7];
    mx = {1'b1, x[6:0], 3'b000};
    my = {1'b1, y[6:0], 3'b000};
    if (d > 8'd11) begin
      my = 11'd0; sticky = 1'b1;
    end else begin
      sticky = |(my & ((11'd1 << d) - 11'd1));
      my = my >> d;
    end
    e = {1'b0, x[14:7]};
    if (x[15] == y[15]) begin
      sum = {1'b0, mx} + {1'b0, my};
      if (sum[11]) begin
        sum = sum >> 1;
        e = e + 9'd1;
      end
    end else begin
      // subtracting the sticky remainder only lowers the truncated value
      // when the guard bits are exactly zero
      sum = {1'b0, mx} - {1'b0, my} - {11'd0, sticky};
      if (sum == 12'd0) return 16'h0000;
      lz = 0;
      for (int i = 10; i >= 0; i--) begin
        if (sum[i]) break;
        lz++;
      end
      sum = sum << lz;
      if ({23'd0, e} <= lz) return {x[15], 15'd0};
      e = e - 9'(lz);
    end
    if (e >= 9'd255) return {x[15], 8'hFE, 7'h7F};
    return {x[15], e[7:0], sum[9:3]};
  endfunction

  function automatic bf16_t bf16_mac(bf16_t acc, bf16_t a, bf16_t b);
    return bf16_add(acc, bf16_mul(a, b));
  endfunction

  function automatic word_t word_add(word_t a, word_t b);
    word_t r;
    for (int i = 0; i < CE_DIM; i++) r[i] = bf16_add(a[i], b[i]);
    return r;
  endfunction

  // Transpose partner of an index in a square sqrt(N) x sqrt(N) grid:
  // index {row, col} becomes {col, row}.
  function automatic int unsigned tpos(int unsigned i, int unsigned logn);
    int unsigned h;
    int unsigned row, col;
    h   = logn / 2;
    row = i >> h;
    col = i & ((1 << h) - 1);
    return (col << h) | row;
  endfunction

endpackage
