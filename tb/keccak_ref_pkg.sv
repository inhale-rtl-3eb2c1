// keccak_ref_pkg: plain software model of Keccak-f[1600] used as the reference by the
// testbenches. Written straight from the FIPS 202 step definitions, lane-wise, with the
// round constants as literals and the rho offsets walked from r = (t+1)(t+2)/2, so it
// shares no code with the RTL.
package keccak_ref_pkg;

  typedef logic [24:0][63:0] kstate_t;  // lane x + 5y

  localparam logic [63:0] RC_REF [24] = '{
    64'h0000000000000001, 64'h0000000000008082, 64'h800000000000808A, 64'h8000000080008000,
    64'h000000000000808B, 64'h0000000080000001, 64'h8000000080008081, 64'h8000000000008009,
    64'h000000000000008A, 64'h0000000000000088, 64'h0000000080008009, 64'h000000008000000A,
    64'h000000008000808B, 64'h800000000000008B, 64'h8000000000008089, 64'h8000000000008003,
    64'h8000000000008002, 64'h8000000000000080, 64'h000000000000800A, 64'h800000008000000A,
    64'h8000000080008081, 64'h8000000000008080, 64'h0000000080000001, 64'h8000000080008008
  };

  function automatic logic [63:0] rotl(logic [63:0] v, int unsigned n);
    n = n % 64;
    if (n == 0) return v;
    return (v << n) | (v >> (64 - n));
  endfunction

  // rho offset of lane (x, y): walk (x,y) <- (y, 2x+3y) from (1,0) for t = 0..23
  function automatic int unsigned rho_ref(int unsigned lx, int unsigned ly);
    int unsigned x, y, nx;
    if (lx == 0 && ly == 0) return 0;
    x = 1; y = 0;
    for (int t = 0; t < 24; t++) begin
      if (x == lx && y == ly) return ((t + 1) * (t + 2) / 2) % 64;
      nx = y;
      y  = (2 * x + 3 * y) % 5;
      x  = nx;
    end
    return 0;
  endfunction

  function automatic kstate_t keccak_round(kstate_t a, int unsigned rnd);
    logic [63:0] c [5];
    logic [63:0] d [5];
    kstate_t b, o;
    for (int x = 0; x < 5; x++)
      c[x] = a[x] ^ a[x+5] ^ a[x+10] ^ a[x+15] ^ a[x+20];
    for (int x = 0; x < 5; x++)
      d[x] = c[(x+4)%5] ^ rotl(c[(x+1)%5], 1);
    for (int y = 0; y < 5; y++)
      for (int x = 0; x < 5; x++)
        a[x+5*y] = a[x+5*y] ^ d[x];
    // rho and pi: B[y, 2x+3y] = rot(A[x,y], r(x,y))
    for (int y = 0; y < 5; y++)
      for (int x = 0; x < 5; x++)
        b[y + 5*((2*x+3*y)%5)] = rotl(a[x+5*y], rho_ref(x, y));
    for (int y = 0; y < 5; y++)
      for (int x = 0; x < 5; x++)
        o[x+5*y] = b[x+5*y] ^ (~b[(x+1)%5+5*y] & b[(x+2)%5+5*y]);
    o[0] = o[0] ^ RC_REF[rnd];
    return o;
  endfunction

  function automatic kstate_t keccak_f(kstate_t a, int unsigned nr);
    for (int r = 0; r < int'(nr); r++) a = keccak_round(a, r);
    return a;
  endfunction

  function automatic logic [63:0] rand64();
    return {$urandom(), $urandom()};
  endfunction

endpackage
