// tb_ref_pkg -- reference models used by the testbenches, written apart from
// the RTL: BCH(15,7) codewords found by enumerating the multiples q(x)*g(x)
// of the generator, and SHA3-256 with its round constants generated by the
// FIPS 202 LFSR and its rotation offsets generated by the (x,y) walk rather
// than taken from tables.
package tb_ref_pkg;

  // carry-less product of a 7-bit q(x) and g(x) = x^8+x^7+x^6+x^4+1
  function automatic logic [14:0] clmul_g(input logic [6:0] q);
    logic [14:0] p;
    p = '0;
    for (int i = 0; i < 7; i++)
      if (q[i]) p ^= 15'(9'b1_1101_0001) << i;
    return p;
  endfunction

  // systematic codeword whose 7 message bits (top bits) equal m
  function automatic logic [14:0] bch_cw(input logic [6:0] m);
    for (int q = 0; q < 128; q++) begin
      logic [14:0] c;
      c = clmul_g(7'(q));
      if (c[14:8] == m) return c;
    end
    return '0;
  endfunction

  function automatic bit rc_bit(input int t);
    logic [7:0] r;
    if (t % 255 == 0) return 1'b1;
    r = 8'h80;
    for (int i = 1; i <= t % 255; i++) begin
      logic [8:0] rr;
      rr = {1'b0, r};           // R = 0 || R (bit 0 is the leftmost in FIPS 202)
      // FIPS 202 uses bit strings R[0..8]; here R[k] is rr[8-k]
      rr[8]   = rr[8] ^ rr[0];
      rr[4]   = rr[4] ^ rr[0];
      rr[3]   = rr[3] ^ rr[0];
      rr[2]   = rr[2] ^ rr[0];
      r = rr[8:1];
    end
    return r[7];
  endfunction

  function automatic logic [63:0] rc(input int ir);
    logic [63:0] v;
    v = '0;
    for (int j = 0; j <= 6; j++) v[(1 << j) - 1] = rc_bit(j + 7 * ir);
    return v;
  endfunction

  typedef logic [63:0] st_t [5][5];   // [x][y]

  function automatic logic [63:0] rot(input logic [63:0] v, input int n);
    n = n % 64;
    return (n == 0) ? v : ((v << n) | (v >> (64 - n)));
  endfunction

  function automatic void keccak_f(ref st_t a);
    int off [5][5];
    int x, y, t0;
    logic [63:0] c [5], d [5];
    st_t b;
    off[0][0] = 0;
    x = 1; y = 0;
    for (int t = 0; t < 24; t++) begin
      off[x][y] = ((t + 1) * (t + 2) / 2) % 64;
      t0 = y;
      y  = (2 * x + 3 * y) % 5;
      x  = t0;
    end
    for (int ir = 0; ir < 24; ir++) begin
      for (int i = 0; i < 5; i++) c[i] = a[i][0] ^ a[i][1] ^ a[i][2] ^ a[i][3] ^ a[i][4];
      for (int i = 0; i < 5; i++) d[i] = c[(i + 4) % 5] ^ rot(c[(i + 1) % 5], 1);
      for (int i = 0; i < 5; i++) for (int j = 0; j < 5; j++) a[i][j] ^= d[i];
      for (int i = 0; i < 5; i++) for (int j = 0; j < 5; j++)
        b[j][(2 * i + 3 * j) % 5] = rot(a[i][j], off[i][j]);
      for (int i = 0; i < 5; i++) for (int j = 0; j < 5; j++)
        a[i][j] = b[i][j] ^ (~b[(i + 1) % 5][j] & b[(i + 2) % 5][j]);
      a[0][0] ^= rc(ir);
    end
  endfunction

  // SHA3-256 of an 8-byte message (byte 0 in bits [7:0]); returns digest
  // bytes 0..7 packed the same way
  function automatic logic [63:0] sha3_256_first8(input logic [63:0] m);
    st_t a;
    for (int i = 0; i < 5; i++) for (int j = 0; j < 5; j++) a[i][j] = '0;
    a[0][0] = m;                 // bytes 0-7
    a[1][0] = 64'h06;            // byte 8: domain bits 01 + first pad bit
    a[1][3] = 64'h8000_0000_0000_0000;  // byte 135 = lane 16 = (x=1,y=3), last pad bit
    keccak_f(a);
    return a[0][0];
  endfunction

endpackage
