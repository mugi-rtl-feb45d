// m_proc: input field split for one BF16 value (phase 1 of VLP approximation).
//
// Splits a BF16 input into sign, a 3-bit mantissa and the unbiased exponent. The 7-bit
// mantissa is rounded to 3 bits (round half up, as in the paper's "round (R)" box); a
// rounding carry wraps the mantissa to 0 and raises the exponent by one, so the value
// (1 + m/8) * 2^e stays the nearest representable one. The class (normal, zero/subnormal,
// infinity, NaN) travels with it for the post-processing block. The sign goes to the
// temporal converter or post processing, the exponent to the E-proc, as in the paper.
// Purely combinational.
module m_proc
  import mugi_pkg::*;
(
  input  bf16_t   x,
  output row_op_t op
);
  logic [3:0] mr;   // rounded mantissa, one extra bit for the carry

  always_comb begin
    mr       = 4'({1'b0, x[6:4]}) + 4'(x[3]);
    op.s     = x[15];
    op.cls   = bf16_cls(x);
    op.raw   = x;
    op.m     = mr[3] ? 3'd0 : mr[2:0];
    op.e     = 10'($signed({2'b00, x[14:7]}) - 10'sd127) + (mr[3] ? 10'sd1 : 10'sd0);
  end
endmodule
