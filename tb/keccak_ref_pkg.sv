// keccak_ref_pkg: an independent software model of Keccak-f[1600] and
// SHA-3 for the testbenches.
//
// It is written apart from the RTL on purpose: the state is a 5x5 array
// a[x][y], the round constants come from the degree-8 LFSR of FIPS 202 and
// the rho offsets from the (x,y) -> (y, 2x+3y) walk, instead of the tables
// the RTL uses. sha3() runs the whole sponge (pad10*1 with the SHA-3 domain
// bits 01, absorb, permute, squeeze) on a byte queue.
package keccak_ref_pkg;

  typedef logic [63:0] lane_t;
  typedef lane_t       st_t [5][5];        // st[x][y]
  typedef logic [24:0][63:0] flat_t;       // flat[x+5y], same as RTL

  function automatic lane_t rol(lane_t v, int n);
    n = n % 64;
    if (n == 0) return v;
    return (v << n) | (v >> (64 - n));
  endfunction

  function automatic bit lfsr_rc(int t);
    logic [8:0] r;
    int m;
    m = t % 255;
    r = 9'h001;
    for (int i = 1; i <= m; i++) begin
      r = {r[7:0], 1'b0};
      if (r[8]) r = r ^ 9'h171;   // taps at 0, 4, 5, 6 (and drop bit 8)
    end
    return r[0];
  endfunction

  function automatic lane_t ref_rc(int ir);
    lane_t c = '0;
    for (int j = 0; j <= 6; j++)
      c[(1 << j) - 1] = lfsr_rc(j + 7*ir);
    return c;
  endfunction

  function automatic int ref_rho_off(int x, int y);
    int cx, cy, nx;
    if (x == 0 && y == 0) return 0;
    cx = 1; cy = 0;
    for (int t = 0; t < 24; t++) begin
      if (cx == x && cy == y) return ((t+1)*(t+2)/2) % 64;
      nx = cy; cy = (2*cx + 3*cy) % 5; cx = nx;
    end
    return -1;
  endfunction

  function automatic st_t unflat(flat_t f);
    st_t s;
    for (int x = 0; x < 5; x++) for (int y = 0; y < 5; y++) s[x][y] = f[x+5*y];
    return s;
  endfunction

  function automatic flat_t flat(st_t s);
    flat_t f;
    for (int x = 0; x < 5; x++) for (int y = 0; y < 5; y++) f[x+5*y] = s[x][y];
    return f;
  endfunction

  function automatic flat_t ref_theta(flat_t f);
    st_t a = unflat(f);
    st_t o;
    lane_t c [5];
    for (int x = 0; x < 5; x++) begin
      c[x] = '0;
      for (int y = 0; y < 5; y++) c[x] ^= a[x][y];
    end
    for (int x = 0; x < 5; x++)
      for (int y = 0; y < 5; y++)
        o[x][y] = a[x][y] ^ c[(x+4)%5] ^ rol(c[(x+1)%5], 1);
    return flat(o);
  endfunction

  function automatic flat_t ref_rho_pi(flat_t f);
    st_t a = unflat(f);
    st_t b;
    for (int x = 0; x < 5; x++)
      for (int y = 0; y < 5; y++)
        b[y][(2*x+3*y)%5] = rol(a[x][y], ref_rho_off(x, y));
    return flat(b);
  endfunction

  function automatic flat_t ref_chi(flat_t f);
    st_t b = unflat(f);
    st_t a;
    for (int x = 0; x < 5; x++)
      for (int y = 0; y < 5; y++)
        a[x][y] = b[x][y] ^ ((~b[(x+1)%5][y]) & b[(x+2)%5][y]);
    return flat(a);
  endfunction

  function automatic flat_t ref_iota(flat_t f, int ir);
    f[0] ^= (ir < 24) ? ref_rc(ir) : '0;
    return f;
  endfunction

  function automatic flat_t ref_round(flat_t f, int ir);
    return ref_iota(ref_chi(ref_rho_pi(ref_theta(f))), ir);
  endfunction

  function automatic flat_t ref_permute(flat_t f);
    for (int ir = 0; ir < 24; ir++) f = ref_round(f, ir);
    return f;
  endfunction

  // SHA3 with digest length dbytes (28, 32, 48, 64); rate = 200 - 2*dbytes.
  function automatic void sha3(input byte unsigned msg[$], input int dbytes,
                               output byte unsigned dig[$]);
    int rate = 200 - 2*dbytes;
    byte unsigned p[$];
    flat_t s = '0;
    p = msg;
    p.push_back(8'h06);
    while (p.size() % rate != 0) p.push_back(8'h00);
    p[p.size()-1] |= 8'h80;
    for (int blk = 0; blk < p.size(); blk += rate) begin
      for (int i = 0; i < rate; i++)
        s[i/8][8*(i%8) +: 8] ^= p[blk+i];
      s = ref_permute(s);
    end
    dig.delete();
    for (int i = 0; i < dbytes; i++) dig.push_back(s[i/8][8*(i%8) +: 8]);
  endfunction

  function automatic flat_t rand_state();
    flat_t f;
    for (int i = 0; i < 25; i++) f[i] = {$urandom(), $urandom()};
    return f;
  endfunction

endpackage
