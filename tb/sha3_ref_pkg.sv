// sha3_ref_pkg -- software reference model of Keccak-f[1600], SHA-3 and SHAKE
// for the testbenches.
//
// Written independently of the RTL: a lane array A[x][y], the round constants
// and rho offsets as the fixed tables published with FIPS 202 (the RTL computes
// them from their LFSR and walk definitions), and a conventional
// absorb-then-squeeze sponge over a byte queue (the RTL rotates the rate in
// place one byte at a time).
package sha3_ref_pkg;

  typedef logic [63:0] lane_t;
  typedef lane_t       st_t [5][5];   // [x][y]
  typedef byte unsigned bytes_t [$];

  localparam lane_t RC [24] = '{
    64'h0000000000000001, 64'h0000000000008082, 64'h800000000000808A, 64'h8000000080008000,
    64'h000000000000808B, 64'h0000000080000001, 64'h8000000080008081, 64'h8000000000008009,
    64'h000000000000008A, 64'h0000000000000088, 64'h0000000080008009, 64'h000000008000000A,
    64'h000000008000808B, 64'h800000000000008B, 64'h8000000000008089, 64'h8000000000008003,
    64'h8000000000008002, 64'h8000000000000080, 64'h000000000000800A, 64'h800000008000000A,
    64'h8000000080008081, 64'h8000000000008080, 64'h0000000080000001, 64'h8000000080008008};

  // rho offsets r[x][y]
  localparam int R [5][5] = '{
    '{ 0, 36,  3, 41, 18},
    '{ 1, 44, 10, 45,  2},
    '{62,  6, 43, 15, 61},
    '{28, 55, 25, 21, 56},
    '{27, 20, 39,  8, 14}};

  function automatic lane_t rol(lane_t v, int n);
    return (n == 0) ? v : ((v << n) | (v >> (64 - n)));
  endfunction

  function automatic st_t unpack(logic [1599:0] s);
    st_t a;
    for (int x = 0; x < 5; x++)
      for (int y = 0; y < 5; y++)
        a[x][y] = s[64*(5*y+x) +: 64];
    return a;
  endfunction

  function automatic logic [1599:0] pack(st_t a);
    logic [1599:0] s;
    for (int x = 0; x < 5; x++)
      for (int y = 0; y < 5; y++)
        s[64*(5*y+x) +: 64] = a[x][y];
    return s;
  endfunction

  function automatic st_t round_f(st_t a, int ir);
    lane_t c [5], d [5];
    st_t b, o;
    for (int x = 0; x < 5; x++) c[x] = a[x][0] ^ a[x][1] ^ a[x][2] ^ a[x][3] ^ a[x][4];
    for (int x = 0; x < 5; x++) d[x] = c[(x+4)%5] ^ rol(c[(x+1)%5], 1);
    for (int x = 0; x < 5; x++) for (int y = 0; y < 5; y++) a[x][y] ^= d[x];
    for (int x = 0; x < 5; x++) for (int y = 0; y < 5; y++)
      b[y][(2*x+3*y)%5] = rol(a[x][y], R[x][y]);
    for (int x = 0; x < 5; x++) for (int y = 0; y < 5; y++)
      o[x][y] = b[x][y] ^ ((~b[(x+1)%5][y]) & b[(x+2)%5][y]);
    o[0][0] ^= RC[ir];
    return o;
  endfunction

  function automatic logic [1599:0] round_vec(logic [1599:0] s, int ir);
    return pack(round_f(unpack(s), ir));
  endfunction

  function automatic logic [1599:0] keccak_f(logic [1599:0] s);
    st_t a = unpack(s);
    for (int i = 0; i < 24; i++) a = round_f(a, i);
    return pack(a);
  endfunction

  // column sums C[x,z] packed as [64*x+z]
  function automatic logic [319:0] c_plane(logic [1599:0] s);
    st_t a = unpack(s);
    logic [319:0] c;
    for (int x = 0; x < 5; x++) c[64*x +: 64] = a[x][0] ^ a[x][1] ^ a[x][2] ^ a[x][3] ^ a[x][4];
    return c;
  endfunction

  // lane sums F[x,y] packed as [5*y+x]
  function automatic logic [24:0] f_slice(logic [1599:0] s);
    st_t a = unpack(s);
    logic [24:0] f;
    for (int x = 0; x < 5; x++) for (int y = 0; y < 5; y++) f[5*y+x] = ^a[x][y];
    return f;
  endfunction

  // mode: 0..3 = SHA3-224/256/384/512, 4 = SHAKE128, 5 = SHAKE256
  function automatic int rate_of(int mode);
    case (mode)
      0: return 144; 1: return 136; 2: return 104; 3: return 72; 4: return 168;
      default: return 136;
    endcase
  endfunction

  function automatic int digest_of(int mode);
    case (mode) 0: return 28; 1: return 32; 2: return 48; 3: return 64; default: return 0; endcase
  endfunction

  function automatic bytes_t hash(int mode, bytes_t msg, int outlen);
    bytes_t p = msg;
    bytes_t out;
    logic [1599:0] s = '0;
    int rate = rate_of(mode);
    p.push_back((mode >= 4) ? 8'h1F : 8'h06);
    while (p.size() % rate != 0) p.push_back(8'h00);
    p[p.size()-1] = p[p.size()-1] | 8'h80;
    for (int blk = 0; blk < p.size() / rate; blk++) begin
      for (int i = 0; i < rate; i++) s[8*i +: 8] ^= p[blk*rate + i];
      s = keccak_f(s);
    end
    if (mode < 4) outlen = digest_of(mode);
    while (out.size() < outlen) begin
      for (int i = 0; i < rate && out.size() < outlen; i++) out.push_back(s[8*i +: 8]);
      if (out.size() < outlen) s = keccak_f(s);
    end
    return out;
  endfunction

endpackage
