// keccak_ref_pkg: straightforward reference model of Keccak-f[1600] and of
// the SHA3 sponge absorb step, used by the testbenches to check the
// accelerator. It is written directly from the SHA3 standard and shares no
// code with the RTL: the rho offsets are generated by the standard's
// (x, y) -> (y, 2x + 3y) walk, and the round constants are listed.
//
// State layout: st[x + 5y] is lane (x, y); bit z of a lane is bit z of the
// state's 64-bit word, i.e. the standard's little-endian bit order.
package keccak_ref_pkg;

  typedef logic [24:0][63:0] kstate_t;

  localparam logic [63:0] RC_LIST [24] = '{
    64'h0000000000000001, 64'h0000000000008082, 64'h800000000000808A, 64'h8000000080008000,
    64'h000000000000808B, 64'h0000000080000001, 64'h8000000080008081, 64'h8000000000008009,
    64'h000000000000008A, 64'h0000000000000088, 64'h0000000080008009, 64'h000000008000000A,
    64'h000000008000808B, 64'h800000000000008B, 64'h8000000000008089, 64'h8000000000008003,
    64'h8000000000008002, 64'h8000000000000080, 64'h000000000000800A, 64'h800000008000000A,
    64'h8000000080008081, 64'h8000000000008080, 64'h0000000080000001, 64'h8000000080008008};

  function automatic logic [63:0] rol(logic [63:0] v, int n);
    n = n % 64;
    if (n == 0) return v;
    return (v << n) | (v >> (64 - n));
  endfunction

  // Rho offset of lane index x + 5y by the standard's walk.
  function automatic int ref_rho_off(int x, int y);
    int cx, cy, t, nx;
    if (x == 0 && y == 0) return 0;
    cx = 1; cy = 0;
    for (t = 0; t < 24; t++) begin
      if (cx == x && cy == y) return ((t + 1) * (t + 2) / 2) % 64;
      nx = cy;
      cy = (2 * cx + 3 * cy) % 5;
      cx = nx;
    end
    return -1;
  endfunction

  function automatic kstate_t ref_theta(kstate_t a);
    logic [63:0] c [5];
    logic [63:0] d [5];
    kstate_t r;
    for (int x = 0; x < 5; x++) c[x] = a[x] ^ a[x+5] ^ a[x+10] ^ a[x+15] ^ a[x+20];
    for (int x = 0; x < 5; x++) d[x] = c[(x+4)%5] ^ rol(c[(x+1)%5], 1);
    for (int i = 0; i < 25; i++) r[i] = a[i] ^ d[i%5];
    return r;
  endfunction

  function automatic kstate_t ref_rho_pi(kstate_t a);
    kstate_t r;
    for (int x = 0; x < 5; x++)
      for (int y = 0; y < 5; y++)
        r[y + 5*((2*x + 3*y) % 5)] = rol(a[x + 5*y], ref_rho_off(x, y));
    return r;
  endfunction

  function automatic kstate_t ref_chi(kstate_t a);
    kstate_t r;
    for (int x = 0; x < 5; x++)
      for (int y = 0; y < 5; y++)
        r[x + 5*y] = a[x + 5*y] ^ (~a[(x+1)%5 + 5*y] & a[(x+2)%5 + 5*y]);
    return r;
  endfunction

  function automatic kstate_t ref_round(kstate_t a, int ir);
    kstate_t r;
    r = ref_chi(ref_rho_pi(ref_theta(a)));
    r[0] = r[0] ^ RC_LIST[ir];
    return r;
  endfunction

  function automatic kstate_t keccak_f(kstate_t a);
    for (int ir = 0; ir < 24; ir++) a = ref_round(a, ir);
    return a;
  endfunction

  // Absorb one block of rate_lanes lanes (blk[i] is lane i) into st.
  function automatic kstate_t absorb(kstate_t st, kstate_t blk, int rate_lanes);
    for (int i = 0; i < rate_lanes; i++) st[i] = st[i] ^ blk[i];
    return keccak_f(st);
  endfunction

endpackage
