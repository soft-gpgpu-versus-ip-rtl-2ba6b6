// int_alu: integer unit of an SP.
//
// Used for address generation (for example digit-reversed output
// addresses), for register moves (x + 0) and for FP operations that are
// exact bit manipulations, such as negation by XOR with 80000000.
// Operations: add, subtract, and, or, xor, shift left and logical shift
// right by b[4:0], and the low 32 bits of a product.  Combinational; the SP
// registers its result.  The paper names add, xor and moves; the rest of the
// set is this design's choice.
module int_alu
  import egpu_pkg::*;
(
  input  int_op_e     op,
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] y
);

  always_comb begin
    case (op)
      INT_ADD: y = a + b;
      INT_SUB: y = a - b;
      INT_AND: y = a & b;
      INT_OR:  y = a | b;
      INT_XOR: y = a ^ b;
      INT_SHL: y = a << b[4:0];
      INT_SHR: y = a >> b[4:0];
      INT_MUL: y = a * b;
      default: y = a;
    endcase
  end

endmodule
