// fetta_vector_unit: 64-lane BF16 element-wise unit.
//
// Takes one row of the accumulation unit (a: 16 banks x 4 = 64 values),
// optionally a second row from the unified memory (b) and a scalar s, and
// produces y = op(a, b, s) one cycle later:
//   VOP_PASS      y = a                 (write results back unchanged)
//   VOP_RELU      y = max(a, 0)         (activation, forward pass)
//   VOP_RELU_BWD  y = (b > 0) ? a : 0   (gradient through a ReLU; b = forward input)
//   VOP_SCALE     y = s * a
//   VOP_AXPY      y = s * a + b         (SGD update with s = -learning rate)
// The lane count (64 floating-point units) is that of the accelerator
// description, which says only that this unit processes non-linear
// functions; the operation set is this design's choice.
module fetta_vector_unit
  import fetta_pkg::*;
#(
  parameter int unsigned LANES = 64
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  input  vop_e                   op,
  input  bf16_t                  scalar,
  input  bf16_t [LANES-1:0]      a,
  input  bf16_t [LANES-1:0]      b,
  output bf16_t [LANES-1:0]      y,
  output logic                   y_valid
);

  bf16_t [LANES-1:0] r;

  always_comb begin
    for (int i = 0; i < LANES; i++) begin
      unique case (op)
        VOP_RELU:     r[i] = (a[i][15] || a[i][14:7] == 8'd0) ? 16'h0000 : a[i];
        VOP_RELU_BWD: r[i] = (b[i][15] || b[i][14:7] == 8'd0) ? 16'h0000 : a[i];
        VOP_SCALE:    r[i] = bf16_mul(scalar, a[i]);
        VOP_AXPY:     r[i] = bf16_add(bf16_mul(scalar, a[i]), b[i]);
        default:      r[i] = a[i];
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      y       <= '0;
      y_valid <= 1'b0;
    end else begin
      y_valid <= in_valid;
      if (in_valid) y <= r;
    end
  end

endmodule
