// pasta_vecadd: element-wise modular addition of two T-word vectors (the
// VecAdd stage, "M . X + V"), used to add an affine layer's round constants
// to a matrix product.
//
// Purely combinational: y[j] = (a[j] + b[j]) mod p for operands below p, one
// conditional subtraction per element. The register that takes `y` belongs
// to the lane controller.
//
// The paper names VecAdd and its operation; the structure is this design's
// choice.
module pasta_vecadd
  import pasta_pkg::*;
(
  input  vec_t a,
  input  vec_t b,
  output vec_t y
);

  always_comb begin
    for (int j = 0; j < T; j++) y[j] = add_mod(a[j], b[j]);
  end

endmodule
