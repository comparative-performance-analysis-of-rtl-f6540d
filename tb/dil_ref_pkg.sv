// dil_ref_pkg: behavioural reference of the Dilithium ring arithmetic, for
// testbenches only: modular reduction with '%', the twiddles
// zeta^brv8(k) mod q by repeated multiplication, the forward NTT loop of the
// Dilithium reference code (plain domain), and uniform rejection sampling of
// a byte string (23-bit candidates, or eta-bounded nibbles).
package dil_ref_pkg;

  localparam longint QL = 8380417;

  function automatic longint md(longint x);
    return ((x % QL) + QL) % QL;
  endfunction

  function automatic int rev8(int k);
    int r = 0;
    for (int i = 0; i < 8; i++) if ((k & (1 << i)) != 0) r |= 1 << (7 - i);
    return r;
  endfunction

  function automatic longint zeta_tab(int k);
    longint p = 1;
    for (int i = 0; i < rev8(k); i++) p = md(p * 1753);
    return p;
  endfunction

  function automatic void ntt_fwd(ref longint a [256]);
    int k = 0;
    longint t, z;
    for (int len = 128; len > 0; len >>= 1)
      for (int st = 0; st < 256; st += 2 * len) begin
        k++;
        z = zeta_tab(k);
        for (int j = st; j < st + len; j++) begin
          t = md(z * a[j + len]);
          a[j + len] = md(a[j] - t);
          a[j] = md(a[j] + t);
        end
      end
  endfunction

  // first 256 accepted 23-bit candidates of a byte stream; returns how many
  // candidates were rejected on the way
  function automatic int sample_uniform(input byte unsigned s [$], ref longint a [256]);
    int n = 0, pos = 0, rej = 0;
    while (n < 256) begin
      longint t;
      t = longint'({s[pos + 2], s[pos + 1], s[pos]}) & 64'h7FFFFF;
      pos += 3;
      if (t < QL) a[n++] = t;
      else rej++;
    end
    return rej;
  endfunction

  // first 256 accepted nibble candidates (low nibble first) for eta = 2 or 4
  function automatic int sample_eta(input byte unsigned s [$], input int eta, ref longint a [256]);
    int n = 0, pos = 0, rej = 0;
    while (n < 256) begin
      int t;
      t = (pos % 2 == 0) ? (s[pos / 2] & 15) : (s[pos / 2] >> 4);
      pos++;
      if (eta == 2 && t < 15) a[n++] = md(longint'(2 - t % 5));
      else if (eta == 4 && t < 9) a[n++] = md(longint'(4 - t));
      else rej++;
    end
    return rej;
  endfunction

endpackage
