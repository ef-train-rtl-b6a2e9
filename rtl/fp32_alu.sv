// fp32_alu -- scalar single-precision unit: add, multiply, divide, square root.
//
// The batch-normalization kernel needs division and square root once per
// channel (the reciprocal standard deviation and the reciprocal element
// count), and plain add/multiply for its running sums; this unit gives all of
// them behind one operation select. The arithmetic itself is in fp32_pkg
// (round to nearest even, subnormals flushed to zero).
//
// Interface: op selects the operation, a and b are the operands (b is ignored
// by SQRT), y is the result. The unit is purely combinational; the caller
// registers y.
module fp32_alu
  import fp32_pkg::*;
(
  input  fp_op_e op,
  input  fp32_t  a,
  input  fp32_t  b,
  output fp32_t  y
);
  always_comb begin
    unique case (op)
      FP_ADD:  y = fp_add(a, b);
      FP_SUB:  y = fp_sub(a, b);
      FP_MUL:  y = fp_mul(a, b);
      FP_DIV:  y = fp_div(a, b);
      FP_SQRT: y = fp_sqrt(a);
      default: y = FP_ZERO;
    endcase
  end
endmodule
