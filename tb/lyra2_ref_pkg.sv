// lyra2_ref_pkg: behavioural reference of the Lyra2REv2 instance of Lyra2,
// written straight from the algorithm (no knowledge of the hardware
// schedule), for the testbenches. Word i of every vector is bits
// [64i+63:64i]. lyra2() also reports the pseudo-random rows picked in the
// Wandering phase, so a testbench can tell when row0 and row1 collide.
package lyra2_ref_pkg;

  typedef logic [63:0] w64_t;
  typedef w64_t st_t [16];

  function automatic w64_t rr(input w64_t x, input int n);
    return (x >> n) | (x << (64 - n));
  endfunction

  function automatic void g(ref st_t v, input int a, input int b, input int c, input int d);
    v[a] = v[a] + v[b]; v[d] = rr(v[d] ^ v[a], 32);
    v[c] = v[c] + v[d]; v[b] = rr(v[b] ^ v[c], 24);
    v[a] = v[a] + v[b]; v[d] = rr(v[d] ^ v[a], 16);
    v[c] = v[c] + v[d]; v[b] = rr(v[b] ^ v[c], 63);
  endfunction

  function automatic void g4(input w64_t ai, input w64_t bi, input w64_t ci, input w64_t di,
                             output w64_t ao, output w64_t bo, output w64_t co, output w64_t do_);
    st_t v;
    v[0] = ai; v[1] = bi; v[2] = ci; v[3] = di;
    g(v, 0, 1, 2, 3);
    ao = v[0]; bo = v[1]; co = v[2]; do_ = v[3];
  endfunction

  function automatic void rnd(ref st_t v);
    g(v, 0, 4,  8, 12); g(v, 1, 5,  9, 13); g(v, 2, 6, 10, 14); g(v, 3, 7, 11, 15);
    g(v, 0, 5, 10, 15); g(v, 1, 6, 11, 12); g(v, 2, 7,  8, 13); g(v, 3, 4,  9, 14);
  endfunction

  function automatic logic [1023:0] pack(input st_t v);
    logic [1023:0] r;
    for (int i = 0; i < 16; i++) r[64*i +: 64] = v[i];
    return r;
  endfunction

  function automatic void unpack(input logic [1023:0] r, output st_t v);
    for (int i = 0; i < 16; i++) v[i] = r[64*i +: 64];
  endfunction

  function automatic logic [1023:0] round_vec(input logic [1023:0] x);
    st_t v;
    unpack(x, v);
    rnd(v);
    return pack(v);
  endfunction

  localparam w64_t IV [8] = '{64'h6a09e667f3bcc908, 64'hbb67ae8584caa73b,
                              64'h3c6ef372fe94f82b, 64'ha54ff53a5f1d36f1,
                              64'h510e527fade682d1, 64'h9b05688c2b3e6c1f,
                              64'h1f83d9abfb41bd6b, 64'h5be0cd19137e2179};

  // K = Lyra2(pwd, pwd), T=1, R=4, C=4, k=256; rowa[r] = row1 of wander row r
  function automatic logic [255:0] lyra2(input logic [255:0] pwd, output int rowa [4]);
    st_t s;
    w64_t m [4][4][12];
    w64_t p [4];
    w64_t par [8];
    int ra, prev;
    logic [255:0] k;
    for (int i = 0; i < 4; i++) p[i] = pwd[64*i +: 64];
    par = '{64'd32, 64'd32, 64'd32, 64'd1, 64'd4, 64'd4, 64'h80, 64'h0100000000000000};
    for (int i = 0; i < 8; i++) begin s[i] = '0; s[8+i] = IV[i]; end
    for (int i = 0; i < 8; i++) s[i] ^= p[i % 4];
    for (int r = 0; r < 12; r++) rnd(s);
    for (int i = 0; i < 8; i++) s[i] ^= par[i];
    for (int r = 0; r < 12; r++) rnd(s);
    for (int c = 0; c < 4; c++) begin
      for (int i = 0; i < 12; i++) m[0][3-c][i] = s[i];
      rnd(s);
    end
    for (int c = 0; c < 4; c++) begin
      for (int i = 0; i < 12; i++) s[i] ^= m[0][c][i];
      rnd(s);
      for (int i = 0; i < 12; i++) m[1][3-c][i] = m[0][c][i] ^ s[i];
    end
    for (int row = 2; row < 4; row++) begin
      prev = row - 1; ra = row - 2;
      for (int c = 0; c < 4; c++) begin
        for (int i = 0; i < 12; i++) s[i] ^= m[prev][c][i] + m[ra][c][i];
        rnd(s);
        for (int i = 0; i < 12; i++) m[row][3-c][i] = m[prev][c][i] ^ s[i];
        for (int i = 0; i < 12; i++) m[ra][c][i] ^= s[(i + 11) % 12];
      end
    end
    prev = 3;
    for (int row = 0; row < 4; row++) begin
      ra = int'(s[0][1:0]);
      rowa[row] = ra;
      for (int c = 0; c < 4; c++) begin
        for (int i = 0; i < 12; i++) s[i] ^= m[prev][c][i] + m[ra][c][i];
        rnd(s);
        for (int i = 0; i < 12; i++) m[row][c][i] ^= s[i];
        for (int i = 0; i < 12; i++) m[ra][c][i] ^= s[(i + 11) % 12];
      end
      prev = row;
    end
    for (int i = 0; i < 12; i++) s[i] ^= m[ra][0][i];
    for (int r = 0; r < 12; r++) rnd(s);
    for (int i = 0; i < 4; i++) k[64*i +: 64] = s[i];
    return k;
  endfunction

endpackage
