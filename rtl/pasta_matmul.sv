// pasta_matmul: modular matrix-vector product, one matrix row per clock (the
// MatMul stage, "M . X").
//
// Each cycle with `en` high computes the dot product of the matrix row on
// `row` with the state half `x` and writes it to element `idx` of the result
// `y`:  y[idx] <= sum_j row[j] * x[j]  (mod p). The T products are summed at
// full width and reduced once. Feeding the T rows produced by pasta_matgen with
// idx = 0..T-1 yields y = M . x after T cycles; `y` holds its value until the
// next write.
//
// The paper names MatMul and its operation; one row per cycle with a single
// reduction is this design's choice.
module pasta_matmul
  import pasta_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 en,
  input  logic [$clog2(T)-1:0] idx,
  input  vec_t                 row,
  input  vec_t                 x,
  output vec_t                 y
);

  localparam int unsigned ACCW = 2 * W + $clog2(T);

  logic [ACCW-1:0] acc;
  word_t           dot;

  always_comb begin
    acc = '0;
    for (int j = 0; j < T; j++)
      acc = acc + ACCW'(64'(row[j]) * 64'(x[j]));
    dot = word_t'(acc % ACCW'(P));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) y <= '0;
    else if (en) y[idx] <= dot;
  end

endmodule
