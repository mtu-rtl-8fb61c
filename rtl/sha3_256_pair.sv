// sha3_256_pair: SHA3-256 digest of two 256-bit children, the node function of
// a Merkle tree.
//
// The message is the 64-byte string left || right, each word taken
// little-endian (byte i of a word is bits [8i+7:8i]), which is the byte order
// Keccak uses for its 64-bit lanes. 64 bytes fit into one 136-byte SHA3-256
// block, so a node costs exactly one Keccak-f[1600] permutation: lanes 0..3
// take the left child, lanes 4..7 the right child, the SHA3 domain/padding
// bits 0x06 and 0x80 go to byte 64 (lane 8) and byte 135 (lane 16), and the
// digest is lanes 0..3 of the permuted state, again little-endian.
// The 24 rounds are unrolled combinationally; the PE supplies the output
// register(s), so that a synthesis flow can spread rounds across stages and
// keep one hash per cycle per PE. The round constants and rotation offsets are
// those of FIPS 202.
module sha3_256_pair
  import mtu_pkg::*;
(
  input  word_t left,
  input  word_t right,
  output word_t digest
);
  typedef logic [63:0] lane_t;
  typedef lane_t state_t [25];   // lane (x, y) at index x + 5*y

  localparam lane_t RC [24] = '{
    64'h0000000000000001, 64'h0000000000008082, 64'h800000000000808A,
    64'h8000000080008000, 64'h000000000000808B, 64'h0000000080000001,
    64'h8000000080008081, 64'h8000000000008009, 64'h000000000000008A,
    64'h0000000000000088, 64'h0000000080008009, 64'h000000008000000A,
    64'h000000008000808B, 64'h800000000000008B, 64'h8000000000008089,
    64'h8000000000008003, 64'h8000000000008002, 64'h8000000000000080,
    64'h000000000000800A, 64'h800000008000000A, 64'h8000000080008081,
    64'h8000000000008080, 64'h0000000080000001, 64'h8000000080008008};

  // rotation offset of lane (x, y), index x + 5*y
  localparam int ROT [25] = '{
     0,  1, 62, 28, 27,
    36, 44,  6, 55, 20,
     3, 10, 43, 25, 39,
    41, 45, 15, 21,  8,
    18,  2, 61, 56, 14};

  function automatic lane_t rotl(lane_t v, int n);
    return (n == 0) ? v : ((v << n) | (v >> (64 - n)));
  endfunction

  function automatic state_t keccak_round(state_t s, lane_t rc);
    lane_t  c [5];
    lane_t  d [5];
    state_t bt;
    state_t o;
    for (int x = 0; x < 5; x++)
      c[x] = s[x] ^ s[x+5] ^ s[x+10] ^ s[x+15] ^ s[x+20];
    for (int x = 0; x < 5; x++)
      d[x] = c[(x+4)%5] ^ rotl(c[(x+1)%5], 1);
    // theta, rho and pi: lane (x, y) moves to (y, 2x + 3y)
    for (int x = 0; x < 5; x++)
      for (int y = 0; y < 5; y++)
        bt[y + 5*((2*x + 3*y) % 5)] = rotl(s[x + 5*y] ^ d[x], ROT[x + 5*y]);
    // chi
    for (int x = 0; x < 5; x++)
      for (int y = 0; y < 5; y++)
        o[x + 5*y] = bt[x + 5*y] ^ (~bt[(x+1)%5 + 5*y] & bt[(x+2)%5 + 5*y]);
    // iota
    o[0] = o[0] ^ rc;
    return o;
  endfunction

  state_t st;

  always_comb begin
    for (int i = 0; i < 25; i++) st[i] = '0;
    for (int i = 0; i < 4; i++) begin
      st[i]   = left[64*i +: 64];
      st[i+4] = right[64*i +: 64];
    end
    st[8]  = 64'h0000000000000006;
    st[16] = 64'h8000000000000000;
    for (int r = 0; r < 24; r++) st = keccak_round(st, RC[r]);
    digest = {st[3], st[2], st[1], st[0]};
  end
endmodule
