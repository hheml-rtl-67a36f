// pasta_pkg: constants, types and modular-arithmetic helpers shared by the
// Pasta keystream datapath.
//
// The cipher works on 32-bit words that hold elements of the prime field F_p.
// A block (one half of the permutation state) is T = 17 words, the packet size
// of the accelerator; the permutation has R = 4 rounds (Pasta-4), that is R+1
// affine layers. The prime is not given with the block size; the default
// p = 65537 is the usual Pasta plaintext modulus and is this design's choice.
// Elements are drawn from the XOF by masking a 64-bit XOF word to PBITS bits
// and rejecting values >= p.
package pasta_pkg;

  // Words per half state (= words per packet).
  parameter int unsigned T      = 17;
  // Rounds of Pasta-pi (Pasta-4): R+1 affine layers, R S-box layers.
  parameter int unsigned R      = 4;
  // Field prime and the bit width used for rejection sampling.
  parameter logic [31:0] P      = 32'd65537;
  parameter int unsigned PBITS  = 17;
  // Data word width on the streams.
  parameter int unsigned W      = 32;

  typedef logic [W-1:0] word_t;
  typedef word_t [T-1:0] vec_t;   // one half state, element 0 at index 0

  typedef enum logic { MODE_ENC = 1'b0, MODE_DEC = 1'b1 } mode_e;

  // S-box applied after the mix of an affine layer.
  typedef enum logic [1:0] {
    SB_FEISTEL = 2'd0,   // S', layers 0 .. R-2
    SB_CUBE    = 2'd1,   // S,  layer R-1
    SB_NONE    = 2'd2    // final layer R has no S-box
  } sbox_e;

  // (a + b) mod p for a, b < p
  function automatic word_t add_mod(word_t a, word_t b);
    logic [W:0] s;
    s = {1'b0, a} + {1'b0, b};
    if (s >= {1'b0, P}) s = s - {1'b0, P};
    return s[W-1:0];
  endfunction

  // (a - b) mod p for a, b < p
  function automatic word_t sub_mod(word_t a, word_t b);
    logic [W:0] s;
    s = {1'b0, a} + {1'b0, P} - {1'b0, b};
    if (s >= {1'b0, P}) s = s - {1'b0, P};
    return s[W-1:0];
  endfunction

  // (a * b) mod p for a, b < p
  function automatic word_t mul_mod(word_t a, word_t b);
    logic [2*W-1:0] prod;
    prod = 64'(a) * 64'(b);
    return word_t'(prod % 64'(P));
  endfunction

endpackage
