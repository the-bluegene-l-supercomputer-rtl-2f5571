// tree_alu: combining function of the global tree network.
//
// y = a OP b for the reductions the tree performs on its way up: integer sum
// (two's complement, wrapping), signed integer maximum, and bitwise AND, OR and
// XOR. A broadcast word is not combined: y = a. Combinational. The set of
// operations is the paper's; the 32-bit operand width, wrapping sum and
// signed max are this design's choices.
module tree_alu
  import bgl_pkg::*;
#(
  parameter int W = TW
) (
  input  tree_op_e       op,
  input  logic [W-1:0]   a,
  input  logic [W-1:0]   b,
  output logic [W-1:0]   y
);
  always_comb
    unique case (op)
      TOP_ADD: y = a + b;
      TOP_MAX: y = ($signed(a) > $signed(b)) ? a : b;
      TOP_AND: y = a & b;
      TOP_OR:  y = a | b;
      TOP_XOR: y = a ^ b;
      default: y = a;
    endcase
endmodule
