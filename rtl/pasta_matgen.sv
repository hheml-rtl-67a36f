// pasta_matgen: expands one random vector into the rows of an invertible
// T x T affine-layer matrix, one row per clock (the MatGen stage, "V -> M").
//
// How it works. The XOF supplies only the first row v (all elements non-zero).
// Every further row is the previous row shifted by one position with its last
// element fed back through v:
//     row_k[j] = row_{k-1}[T-1] * v[j] + row_{k-1}[j-1]   (mod p),
// with the shifted-in term taken as 0 for j = 0. This is the sequential matrix
// of the Pasta reference, i.e. a power of a companion matrix, and it is
// invertible; it is never stored, so the matrix costs T multipliers and two
// row registers instead of T*T words.
//
// Interface and timing: `load` takes `v_in` as row 0 (visible on `row` in the
// next cycle); every `step` advances `row` by one row at the clock edge.
//
// The paper names MatGen and shows it turning one XOF vector into one matrix
// (its Fig. 4); the recurrence follows the Pasta reference and is not printed
// in the paper.
module pasta_matgen
  import pasta_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic load,
  input  vec_t v_in,
  input  logic step,
  output vec_t row
);

  vec_t v, nxt;

  always_comb begin
    for (int j = 0; j < T; j++) begin
      nxt[j] = mul_mod(row[T-1], v[j]);
      if (j > 0) nxt[j] = add_mod(nxt[j], row[j-1]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v   <= '0;
      row <= '0;
    end else if (load) begin
      v   <= v_in;
      row <= v_in;
    end else if (step) begin
      row <= nxt;
    end
  end

endmodule
