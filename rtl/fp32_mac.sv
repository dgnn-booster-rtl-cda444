// fp32_mac: combinational single-precision multiply-add, y = a*b + c.
//
// The product is rounded to single precision before the addition (not a
// fused MAC), both with round-to-nearest-even; subnormals are flushed to zero
// and overflow gives infinity. This is the arithmetic every processing element
// of the accelerator uses; the paper states only that weights and embeddings
// are 32-bit floating point, the rounding and special-value handling are this
// design's choice. mul_only returns a*b without the addition.
module fp32_mac
  import dgnn_pkg::*;
(
  input  fp32_t a,
  input  fp32_t b,
  input  fp32_t c,
  output fp32_t prod,
  output fp32_t y
);
  always_comb begin
    prod = fp_mul(a, b);
    y    = fp_add(prod, c);
  end
endmodule
