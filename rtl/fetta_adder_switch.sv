// fetta_adder_switch: 2-input 2-output switch of the reduction network.
//
// Four modes, chosen by a 2-bit control:
//   SW_PASS      A -> left,  B -> right
//   SW_SWAP      B -> left,  A -> right
//   SW_ADD_LEFT  A+B -> left,  right empty
//   SW_ADD_RIGHT A+B -> right, left empty
// An empty port carries a zero word with its valid bit cleared. When only one
// input is valid an add mode forwards that input unchanged. Each port is a
// word of four BF16 values and adds element-wise with four BF16 adders.
// The four modes are those of the accelerator description; the 2-bit
// encoding and the handling of the empty port are this design's.
// Combinational; the registers between levels live in fetta_red_net.
module fetta_adder_switch
  import fetta_pkg::*;
(
  input  sw_mode_e mode,
  input  word_t    a,
  input  logic     a_valid,
  input  word_t    b,
  input  logic     b_valid,
  output word_t    l,
  output logic     l_valid,
  output word_t    r,
  output logic     r_valid
);

  word_t sum;
  logic  s_valid;

  always_comb begin
    if (a_valid && b_valid) sum = word_add(a, b);
    else if (a_valid)       sum = a;
    else if (b_valid)       sum = b;
    else                    sum = '0;
  end
  assign s_valid = a_valid | b_valid;

  always_comb begin
    l = '0; l_valid = 1'b0;
    r = '0; r_valid = 1'b0;
    unique case (mode)
      SW_PASS:      begin l = a;   l_valid = a_valid; r = b; r_valid = b_valid; end
      SW_SWAP:      begin l = b;   l_valid = b_valid; r = a; r_valid = a_valid; end
      SW_ADD_LEFT:  begin l = sum; l_valid = s_valid; end
      SW_ADD_RIGHT: begin r = sum; r_valid = s_valid; end
    endcase
  end

endmodule
