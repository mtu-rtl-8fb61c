// tb_ref_pkg: reference arithmetic for the MTU testbenches.
//
// Everything here is written independently of the RTL: field constants are
// derived with plain wide-integer arithmetic, the Montgomery product is the
// bit-serial (one bit of 2^-256 per step) form rather than the word-level REDC
// of the RTL, and the Keccak permutation derives its round constants from the
// FIPS 202 LFSR and its rotation offsets from the (x, y) recurrence instead of
// using tables. sha3_256 hashes byte strings of any length and is itself
// checked against the published digests of "" and "abc" by the testbenches.
package tb_ref_pkg;
  typedef logic [255:0] w_t;

  // BLS12-381 scalar field modulus (the field of HyperPlonk)
  localparam w_t P_BLS = 256'h73eda753299d7d483339d80809a1d80553bda402fffe5bfeffffffff00000001;
  // BN254 scalar field modulus, a second modulus for the multiplier tests
  localparam w_t P_BN  = 256'h30644e72e131a029b85045b68181585d2833e84879b9709143e1f593f0000001;

  // -p^-1 mod 2^256 by Newton iteration
  function automatic w_t neg_pinv(w_t p);
    w_t x = 256'd1;
    for (int i = 0; i < 9; i++) x = x * (256'd2 - p * x);
    return -x;
  endfunction

  function automatic w_t to_mont(w_t x, w_t p);
    logic [511:0] t;
    t = {x, 256'd0};
    return w_t'(t % {256'd0, p});
  endfunction

  function automatic w_t mont_one(w_t p);
    return to_mont(256'd1, p);
  endfunction

  // bit-serial Montgomery product a*b*2^-256 mod p
  function automatic w_t montmul(w_t a, w_t b, w_t p);
    logic [513:0] x;
    x = {258'd0, a} * {258'd0, b};
    for (int i = 0; i < 256; i++) begin
      if (x[0]) x = x + {258'd0, p};
      x = x >> 1;
    end
    if (x >= {258'd0, p}) x = x - {258'd0, p};
    return x[255:0];
  endfunction

  // 2^-256 mod p from the identity 2^256 * ((1 + p*n) / 2^256) = 1 + p*n,
  // n = -p^-1 mod 2^256
  function automatic w_t r_inv(w_t p);
    logic [511:0] t;
    t = {256'd0, p} * {256'd0, neg_pinv(p)} + 512'd1;
    return t[511:256];
  endfunction

  // Montgomery product by plain modular arithmetic: (a*b mod p) * 2^-256 mod p
  function automatic w_t montmul_fast(w_t a, w_t b, w_t p, w_t rinv);
    logic [511:0] t;
    t = ({256'd0, a} * {256'd0, b}) % {256'd0, p};
    t = ({256'd0, t[255:0]} * {256'd0, rinv}) % {256'd0, p};
    return t[255:0];
  endfunction

  function automatic w_t madd(w_t a, w_t b, w_t p);
    logic [256:0] s = {1'b0, a} + {1'b0, b};
    if (s >= {1'b0, p}) s = s - {1'b0, p};
    return s[255:0];
  endfunction

  function automatic w_t msub(w_t a, w_t b, w_t p);
    return (a >= b) ? a - b : a + (p - b);
  endfunction

  function automatic w_t rand_w();
    w_t x;
    for (int i = 0; i < 8; i++) x[32*i +: 32] = $urandom;
    return x;
  endfunction

  function automatic w_t rand_fe(w_t p);
    logic [511:0] t = {rand_w(), rand_w()};
    return w_t'(t % {256'd0, p});
  endfunction

  // ---------------------------------------------------------------- Keccak
  typedef logic [63:0] lane_t;
  typedef lane_t kst_t [5][5];   // [x][y]

  function automatic logic lfsr_rc(int t);
    logic [8:0] r = 9'd1;
    if (t % 255 == 0) return 1'b1;
    for (int i = 1; i <= t % 255; i++) begin
      r = r << 1;
      if (r[8]) r = r ^ 9'h171;    // bits 0, 4, 5, 6 and drop bit 8
    end
    return r[0];
  endfunction

  function automatic lane_t round_const(int ir);
    lane_t rc = '0;
    for (int j = 0; j < 7; j++) rc[(1 << j) - 1] = lfsr_rc(j + 7*ir);
    return rc;
  endfunction

  function automatic lane_t rol(lane_t v, int n);
    n = n % 64;
    return (n == 0) ? v : ((v << n) | (v >> (64 - n)));
  endfunction

  function automatic void keccak_f(ref kst_t a);
    int    off [5][5];
    int    x, y, t, nx;
    lane_t c [5];
    lane_t d [5];
    kst_t  b;
    off[0][0] = 0;
    x = 1; y = 0;
    for (t = 0; t < 24; t++) begin
      off[x][y] = ((t + 1) * (t + 2) / 2) % 64;
      nx = y; y = (2*x + 3*y) % 5; x = nx;
    end
    for (int ir = 0; ir < 24; ir++) begin
      for (int i = 0; i < 5; i++) c[i] = a[i][0] ^ a[i][1] ^ a[i][2] ^ a[i][3] ^ a[i][4];
      for (int i = 0; i < 5; i++) d[i] = c[(i+4)%5] ^ rol(c[(i+1)%5], 1);
      for (int i = 0; i < 5; i++) for (int j = 0; j < 5; j++) a[i][j] ^= d[i];
      for (int i = 0; i < 5; i++) for (int j = 0; j < 5; j++)
        b[j][(2*i + 3*j) % 5] = rol(a[i][j], off[i][j]);
      for (int i = 0; i < 5; i++) for (int j = 0; j < 5; j++)
        a[i][j] = b[i][j] ^ (~b[(i+1)%5][j] & b[(i+2)%5][j]);
      a[0][0] ^= round_const(ir);
    end
  endfunction

  // SHA3-256 of a byte string
  function automatic w_t sha3_256(byte unsigned msg []);
    byte unsigned m [];
    kst_t  s;
    int    n, nblk;
    w_t    dg;
    n    = msg.size();
    nblk = n / 136 + 1;
    m    = new[nblk * 136];
    foreach (m[i]) m[i] = (i < n) ? msg[i] : 8'h00;
    m[n]            = m[n] ^ 8'h06;
    m[nblk*136 - 1] = m[nblk*136 - 1] ^ 8'h80;
    for (int i = 0; i < 5; i++) for (int j = 0; j < 5; j++) s[i][j] = '0;
    for (int blk = 0; blk < nblk; blk++) begin
      for (int i = 0; i < 136; i++)
        s[(i/8) % 5][(i/8) / 5][8*(i%8) +: 8] ^= m[blk*136 + i];
      keccak_f(s);
    end
    for (int i = 0; i < 32; i++) dg[8*i +: 8] = s[(i/8) % 5][(i/8) / 5][8*(i%8) +: 8];
    return dg;
  endfunction

  // digest as the usual big-endian hex string value (byte 0 first)
  function automatic w_t digest_be(w_t d);
    w_t r;
    for (int i = 0; i < 32; i++) r[8*(31-i) +: 8] = d[8*i +: 8];
    return r;
  endfunction

  function automatic w_t hash_pair(w_t l, w_t r);
    byte unsigned m [];
    m = new[64];
    for (int i = 0; i < 32; i++) begin
      m[i]      = l[8*i +: 8];
      m[32 + i] = r[8*i +: 8];
    end
    return sha3_256(m);
  endfunction
endpackage
