// keccak_ref_pkg: behavioural reference model of Keccak-f[1600] and of the
// SHA-3 / SHAKE sponge, for testbenches only.
// It is written independently of the RTL: round constants come from the
// degree-8 LFSR rc(t) of FIPS 202, rotation offsets from the (t+1)(t+2)/2
// walk over (x, y) -> (y, 2x+3y), and the sponge works byte by byte.
package keccak_ref_pkg;

  typedef logic [63:0] lanes_t [25];

  function automatic bit rc_bit(int t);
    logic [7:0] r = 8'h01;
    if (t % 255 == 0) return 1'b1;
    for (int i = 1; i <= t % 255; i++) begin
      logic b8;
      b8 = r[7];
      r = {r[6:0], 1'b0};
      if (b8) r = r ^ 8'h71;
    end
    return r[0];
  endfunction

  function automatic logic [63:0] rot(logic [63:0] v, int n);
    n = n % 64;
    if (n == 0) return v;
    return (v << n) | (v >> (64 - n));
  endfunction

  function automatic void permute(ref lanes_t a, input int nrounds = 24);
    int roff [25];
    int x, y, tmp;
    logic [63:0] c [5], d [5], b [25];
    roff[0] = 0;
    x = 1; y = 0;
    for (int t = 0; t < 24; t++) begin
      roff[x + 5*y] = ((t + 1) * (t + 2) / 2) % 64;
      tmp = y; y = (2*x + 3*y) % 5; x = tmp;
    end
    for (int ir = 0; ir < nrounds; ir++) begin
      logic [63:0] rc = '0;
      for (int xx = 0; xx < 5; xx++) c[xx] = a[xx] ^ a[xx+5] ^ a[xx+10] ^ a[xx+15] ^ a[xx+20];
      for (int xx = 0; xx < 5; xx++) d[xx] = c[(xx+4)%5] ^ rot(c[(xx+1)%5], 1);
      for (int i = 0; i < 25; i++) a[i] ^= d[i%5];
      for (int xx = 0; xx < 5; xx++)
        for (int yy = 0; yy < 5; yy++)
          b[yy + 5*((2*xx + 3*yy) % 5)] = rot(a[xx + 5*yy], roff[xx + 5*yy]);
      for (int i = 0; i < 25; i++)
        a[i] = b[i] ^ (~b[(i%5+1)%5 + 5*(i/5)] & b[(i%5+2)%5 + 5*(i/5)]);
      for (int j = 0; j <= 6; j++)
        if (rc_bit(j + 7*ir)) rc[(1 << j) - 1] = 1'b1;
      a[0] ^= rc;
    end
  endfunction

  // sponge: rate in bytes, domain byte (0x1F SHAKE, 0x06 SHA-3)
  function automatic void sponge(input byte unsigned msg [$], input int rate,
                                 input byte unsigned dom, input int outlen,
                                 output byte unsigned out [$]);
    lanes_t s;
    byte unsigned blk [$];
    for (int i = 0; i < 25; i++) s[i] = '0;
    blk = msg;
    blk.push_back(dom);
    while (blk.size() % rate != 0) blk.push_back(8'h00);
    blk[blk.size() - 1] = blk[blk.size() - 1] ^ 8'h80;
    for (int p = 0; p < blk.size(); p += rate) begin
      for (int i = 0; i < rate; i++) s[i/8][8*(i%8) +: 8] ^= blk[p + i];
      permute(s);
    end
    out = {};
    while (out.size() < outlen) begin
      for (int i = 0; i < rate && out.size() < outlen; i++) out.push_back(s[i/8][8*(i%8) +: 8]);
      if (out.size() < outlen) permute(s);
    end
  endfunction

endpackage
