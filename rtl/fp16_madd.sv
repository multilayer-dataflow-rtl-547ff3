// fp16_madd: one SIMD lane of the Cal unit.
//
// Combinational fp16 arithmetic on three operands a (X), b (W), c (Y):
//   OP 0 MADD : y = c + a*b   (product rounded, then sum rounded)
//   OP 1 MUL  : y = a*b
//   OP 2 ADD  : y = a + b
//   OP 3 SUB  : y = a - b
// The paper's butterfly micro code is written with MADD (Fig. 11); the
// other three operations and the two-rounding MADD are this design's
// choice. Rounding rules are those of fp16_pkg. No clock, no latency.
module fp16_madd
  import fp16_pkg::*;
(
  input  logic [1:0] op,
  input  fp16_t      a,
  input  fp16_t      b,
  input  fp16_t      c,
  output fp16_t      y
);
  fp16_t prod;

  always_comb begin
    prod = fp16_mul(a, b);
    unique case (op)
      2'd0:    y = fp16_add(c, prod);
      2'd1:    y = prod;
      2'd2:    y = fp16_add(a, b);
      default: y = fp16_add(a, {~b[15], b[14:0]});
    endcase
  end
endmodule
