// pe_alu: the arithmetic logic unit inside every FlexiSAGA processing element.
//
// It executes one operation per cycle on three register-file operands a, b, c:
// move (y = a), add (y = a + b), multiply (y = a * b), multiply-accumulate
// (y = a * b + c) and clear (y = 0). The operation set follows the paper
// (move, multiply, addition, multiply-accumulate); clear is this design's way of
// resetting partial sums. The paper's ALU supports floating-point and integer
// operations: `fp` = 1 selects IEEE-754 binary32 arithmetic (see fp32_pkg; the
// multiply-accumulate rounds after the multiply and after the add), `fp` = 0
// selects 32-bit two's-complement integer arithmetic that wraps on overflow.
// The unit is purely combinational; the PE registers its result.
module pe_alu
  import flexisaga_pkg::*;
  import fp32_pkg::*;
(
  input  alu_op_e op,
  input  logic    fp,
  input  word_t   a,
  input  word_t   b,
  input  word_t   c,
  output word_t   y
);
  word_t prod;

  always_comb begin
    prod = fp ? fp32_mul(a, b) : a * b;
    unique case (op)
      ALU_MOV: y = a;
      ALU_ADD: y = fp ? fp32_add(a, b) : a + b;
      ALU_MUL: y = prod;
      ALU_MAC: y = fp ? fp32_add(prod, c) : prod + c;
      default: y = '0;  // ALU_NOP, ALU_CLR
    endcase
  end
endmodule
