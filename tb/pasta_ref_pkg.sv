// pasta_ref_pkg: software reference model of the cipher for the testbenches.
//
// It is written independently of the RTL: Keccak-f[1600] works on a 5x5 lane
// array with the rho offsets and round constants generated by their defining
// recurrences (not copied tables), SHAKE128 absorbs and squeezes a byte
// stream, and the Pasta permutation builds each affine-layer matrix in full
// before multiplying. Conventions shared with the RTL (they are the cipher's
// definition, not its implementation): nonce and counter absorbed as 8-byte
// big-endian values, 8-byte big-endian draws masked to PBITS bits with
// rejection of values >= p (and of 0 for matrix rows), per affine layer the
// order left matrix row, right matrix row, left constants, right constants,
// and the mix x_L + s, x_R + s with s = x_L + x_R.
package pasta_ref_pkg;
  import pasta_pkg::*;

  typedef bit [63:0] lane_t;
  typedef int unsigned uvec_t [T];

  // ------------------------------------------------------------ Keccak
  function automatic lane_t rol(lane_t v, int n);
    n = n % 64;
    if (n == 0) return v;
    return (v << n) | (v >> (64 - n));
  endfunction

  function automatic void keccak_consts(output int rho [5][5], output lane_t rc [24]);
    int x, y, tmp;
    bit [7:0] lfsr;
    foreach (rho[i, j]) rho[i][j] = 0;
    x = 1; y = 0;
    for (int t = 0; t < 24; t++) begin
      rho[x][y] = ((t + 1) * (t + 2) / 2) % 64;
      tmp = y;
      y   = (2 * x + 3 * y) % 5;
      x   = tmp;
    end
    lfsr = 8'h01;
    for (int r = 0; r < 24; r++) begin
      rc[r] = '0;
      for (int j = 0; j < 7; j++) begin
        if (lfsr[0]) rc[r][(1 << j) - 1] = 1'b1;
        lfsr = lfsr[7] ? ((lfsr << 1) ^ 8'h71) : (lfsr << 1);
      end
    end
  endfunction

  // state indexed a[x][y]
  function automatic void keccak_f(ref lane_t a [5][5]);
    int    rho [5][5];
    lane_t rc [24];
    lane_t c [5], d [5], b [5][5];
    keccak_consts(rho, rc);
    for (int r = 0; r < 24; r++) begin
      for (int x = 0; x < 5; x++) c[x] = a[x][0] ^ a[x][1] ^ a[x][2] ^ a[x][3] ^ a[x][4];
      for (int x = 0; x < 5; x++) d[x] = c[(x + 4) % 5] ^ rol(c[(x + 1) % 5], 1);
      for (int x = 0; x < 5; x++) for (int y = 0; y < 5; y++) a[x][y] ^= d[x];
      for (int x = 0; x < 5; x++) for (int y = 0; y < 5; y++)
        b[y][(2 * x + 3 * y) % 5] = rol(a[x][y], rho[x][y]);
      for (int x = 0; x < 5; x++) for (int y = 0; y < 5; y++)
        a[x][y] = b[x][y] ^ (~b[(x + 1) % 5][y] & b[(x + 2) % 5][y]);
      a[0][0] ^= rc[r];
    end
  endfunction

  // flat-array view (index x + 5y) for comparing with the RTL
  function automatic void keccak_flat(input lane_t in [25], output lane_t out [25]);
    lane_t a [5][5];
    for (int i = 0; i < 25; i++) a[i % 5][i / 5] = in[i];
    keccak_f(a);
    for (int i = 0; i < 25; i++) out[i] = a[i % 5][i / 5];
  endfunction

  // ------------------------------------------------------------ SHAKE128
  class Shake128;
    lane_t a [5][5];
    int    pos;      // next byte of the rate to squeeze
    int    perms;    // permutations run so far

    function new(bit [63:0] nonce, bit [63:0] counter);
      byte unsigned blk [168];
      foreach (blk[i]) blk[i] = 8'h00;
      for (int i = 0; i < 8; i++) blk[i]     = nonce[8 * (7 - i) +: 8];
      for (int i = 0; i < 8; i++) blk[8 + i] = counter[8 * (7 - i) +: 8];
      blk[16]  = 8'h1F;
      blk[167] = blk[167] | 8'h80;
      foreach (a[x, y]) a[x][y] = '0;
      for (int i = 0; i < 168; i++)
        a[(i / 8) % 5][(i / 8) / 5][8 * (i % 8) +: 8] ^= blk[i];
      keccak_f(a);
      perms = 1;
      pos   = 0;
    endfunction

    function byte unsigned next_byte();
      byte unsigned v;
      if (pos == 168) begin
        keccak_f(a);
        perms++;
        pos = 0;
      end
      v = a[(pos / 8) % 5][(pos / 8) / 5][8 * (pos % 8) +: 8];
      pos++;
      return v;
    endfunction

    function bit [63:0] next_u64_be();
      bit [63:0] v = '0;
      for (int i = 0; i < 8; i++) v = (v << 8) | 64'(next_byte());
      return v;
    endfunction

    // one field element; `rejects` counts discarded draws
    function int unsigned next_elem(bit allow_zero, ref int rejects);
      bit [63:0] v;
      forever begin
        v = next_u64_be() & ((64'd1 << PBITS) - 1);
        if ((allow_zero || v != 0) && v < 64'(P)) return int'(v);
        rejects++;
      end
    endfunction
  endclass

  // ------------------------------------------------------------ field
  function automatic int unsigned fadd(int unsigned a, int unsigned b);
    return int'((longint'(a) + longint'(b)) % longint'(P));
  endfunction
  function automatic int unsigned fsub(int unsigned a, int unsigned b);
    return int'((longint'(a) + longint'(P) - longint'(b)) % longint'(P));
  endfunction
  function automatic int unsigned fmul(int unsigned a, int unsigned b);
    return int'((longint'(a) * longint'(b)) % longint'(P));
  endfunction

  // ------------------------------------------------------------ Pasta
  // full matrix from its first row (Pasta sequential matrix)
  function automatic void make_matrix(input uvec_t v, output int unsigned m [T][T]);
    for (int j = 0; j < T; j++) m[0][j] = v[j];
    for (int i = 1; i < T; i++)
      for (int j = 0; j < T; j++) begin
        m[i][j] = fmul(v[j], m[i - 1][T - 1]);
        if (j > 0) m[i][j] = fadd(m[i][j], m[i - 1][j - 1]);
      end
  endfunction

  function automatic void matvec(input int unsigned m [T][T], inout uvec_t x);
    uvec_t y;
    for (int i = 0; i < T; i++) begin
      longint unsigned acc = 0;
      for (int j = 0; j < T; j++) acc = (acc + longint'(m[i][j]) * longint'(x[j])) % longint'(P);
      y[i] = int'(acc);
    end
    x = y;
  endfunction

  function automatic void sbox_feistel(inout uvec_t x);
    uvec_t y;
    y[0] = x[0];
    for (int i = 1; i < T; i++) y[i] = fadd(x[i], fmul(x[i - 1], x[i - 1]));
    x = y;
  endfunction

  function automatic void sbox_cube(inout uvec_t x);
    for (int i = 0; i < T; i++) x[i] = fmul(x[i], fmul(x[i], x[i]));
  endfunction

  // Keystream block for (key, nonce, counter). Returns XOF statistics.
  function automatic void keystream(input uvec_t kl, input uvec_t kr,
                                    input bit [63:0] nonce, input bit [63:0] counter,
                                    output uvec_t ks, output int rejects, output int perms);
    Shake128     sh;
    uvec_t       xl, xr, v;
    int unsigned m [T][T];
    int unsigned s;
    sh = new(nonce, counter);
    rejects = 0;
    xl = kl;
    xr = kr;
    for (int layer = 0; layer <= R; layer++) begin
      for (int i = 0; i < T; i++) v[i] = sh.next_elem(1'b0, rejects);
      make_matrix(v, m);
      matvec(m, xl);
      for (int i = 0; i < T; i++) v[i] = sh.next_elem(1'b0, rejects);
      make_matrix(v, m);
      matvec(m, xr);
      for (int i = 0; i < T; i++) xl[i] = fadd(xl[i], sh.next_elem(1'b1, rejects));
      for (int i = 0; i < T; i++) xr[i] = fadd(xr[i], sh.next_elem(1'b1, rejects));
      for (int i = 0; i < T; i++) begin
        s     = fadd(xl[i], xr[i]);
        xl[i] = fadd(xl[i], s);
        xr[i] = fadd(xr[i], s);
      end
      if (layer < R - 1) begin
        sbox_feistel(xl);
        sbox_feistel(xr);
      end else if (layer == R - 1) begin
        sbox_cube(xl);
        sbox_cube(xr);
      end
    end
    ks    = xl;
    perms = sh.perms;
  endfunction

  function automatic uvec_t random_vec(bit nonzero);
    uvec_t v;
    for (int i = 0; i < T; i++) begin
      v[i] = $urandom_range(int'(P) - 1, 0);
      if (nonzero && v[i] == 0) v[i] = 1;
    end
    return v;
  endfunction

endpackage
