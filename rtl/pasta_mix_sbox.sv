// pasta_mix_sbox: the mixing step that ends each Pasta affine layer and the
// S-box layer that follows it (the "Mix & S-box" stage, op(X_L, X_R)).
//
// Mix: with s = x_L + x_R, the halves become x_L + s and x_R + s (mod p), so
// each half receives the other. The S-box is then applied to each half:
//   SB_FEISTEL (S', all rounds but the last):  y_0 = x_0,
//                                              y_i = x_i + x_{i-1}^2, i > 0
//   SB_CUBE    (S, last round):                y_i = x_i^3
//   SB_NONE    (final affine layer):           y_i = x_i
// All arithmetic is mod p. Purely combinational.
//
// The S-box formulas are the paper's. Mixing the halves in this step follows
// the Pasta reference; the paper only shows a combined op(X_L, X_R) here.
module pasta_mix_sbox
  import pasta_pkg::*;
(
  input  vec_t       xl,
  input  vec_t       xr,
  input  sbox_e      sel,
  output vec_t       yl,
  output vec_t       yr
);

  vec_t ml, mr;

  function automatic vec_t sbox(vec_t x, sbox_e s);
    vec_t y;
    for (int i = 0; i < T; i++) begin
      case (s)
        SB_FEISTEL: y[i] = (i == 0) ? x[i] : add_mod(x[i], mul_mod(x[(i+T-1)%T], x[(i+T-1)%T]));
        SB_CUBE:    y[i] = mul_mod(mul_mod(x[i], x[i]), x[i]);
        default:    y[i] = x[i];
      endcase
    end
    return y;
  endfunction

  always_comb begin
    for (int i = 0; i < T; i++) begin
      word_t s;
      s     = add_mod(xl[i], xr[i]);
      ml[i] = add_mod(xl[i], s);
      mr[i] = add_mod(xr[i], s);
    end
    yl = sbox(ml, sel);
    yr = sbox(mr, sel);
  end

endmodule
