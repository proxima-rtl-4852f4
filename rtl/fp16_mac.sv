// fp16_mac: one FP16 multiply-accumulate unit.
//
// The PQ module holds 32 of these and every search queue holds one. The unit
// is combinational; the caller registers the result. It performs one of four
// operations per cycle: a+b, a-b, a*b, or acc+a*b (the multiply-accumulate).
// A Euclidean term (q-x)^2 therefore takes three passes through the unit
// (subtract, square, accumulate), an inner-product term a single MAC pass.
// Arithmetic follows proxima_pkg: subnormals flush to zero, results are
// truncated, overflow saturates. The paper gives the unit's name, count and
// FP16 format; the operation set and rounding are this design's choice.
module fp16_mac
  import proxima_pkg::*;
(
  input  mac_op_e op,
  input  fp16_t   a,
  input  fp16_t   b,
  input  fp16_t   acc,
  output fp16_t   y
);
  fp16_t prod;
  always_comb begin
    prod = fp16_mul(a, b);
    unique case (op)
      OP_ADD:  y = fp16_add(a, b);
      OP_SUB:  y = fp16_add(a, fp16_neg(b));
      OP_MUL:  y = prod;
      default: y = fp16_add(acc, prod);
    endcase
  end
endmodule
