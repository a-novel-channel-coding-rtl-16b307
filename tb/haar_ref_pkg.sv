// haar_ref_pkg: reference models used by the testbenches, written apart from
// the RTL: integer Haar transforms on int arrays (floor division done with
// plain integer arithmetic), a Hamming encoder/decoder built from the parity
// coverage rule, and small helpers. Arrays are sized for edges up to MAXN.
package haar_ref_pkg;

  localparam int MAXN = 32;
  typedef int line_t [MAXN];
  typedef int blk_t  [MAXN][MAXN];

  // floor(s / 2) for any sign
  function automatic int fdiv2(input int s);
    if (s >= 0) return s / 2;
    return -((-s + 1) / 2);
  endfunction

  function automatic line_t fwd1d(input line_t x, input int n, input int levels);
    line_t v, t;
    int len;
    v = x;
    len = n;
    for (int l = 0; l < levels; l++) begin
      t = v;
      for (int i = 0; i < len / 2; i++) begin
        int m;
        m = fdiv2(v[2*i] + v[2*i+1]);
        t[i] = m;
        t[len/2 + i] = v[2*i] - m;
      end
      v = t;
      len = len / 2;
    end
    return v;
  endfunction

  function automatic line_t inv1d(input line_t x, input int n, input int levels);
    line_t v, t;
    int len;
    v = x;
    len = n >> (levels - 1);
    for (int l = 0; l < levels; l++) begin
      t = v;
      for (int i = 0; i < len / 2; i++) begin
        t[2*i]   = v[i] + v[len/2 + i];
        t[2*i+1] = v[i] - v[len/2 + i];
      end
      v = t;
      len = len * 2;
    end
    return v;
  endfunction

  // rows first, then columns
  function automatic blk_t fwd2d(input blk_t b, input int n, input int levels);
    blk_t o;
    line_t ln;
    o = b;
    for (int r = 0; r < n; r++) begin
      for (int i = 0; i < n; i++) ln[i] = o[r][i];
      ln = fwd1d(ln, n, levels);
      for (int i = 0; i < n; i++) o[r][i] = ln[i];
    end
    for (int c = 0; c < n; c++) begin
      for (int i = 0; i < n; i++) ln[i] = o[i][c];
      ln = fwd1d(ln, n, levels);
      for (int i = 0; i < n; i++) o[i][c] = ln[i];
    end
    return o;
  endfunction

  // columns first, then rows, then clamp to 0..pmax
  function automatic blk_t inv2d(input blk_t b, input int n, input int levels, input int pmax);
    blk_t o;
    line_t ln;
    o = b;
    for (int c = 0; c < n; c++) begin
      for (int i = 0; i < n; i++) ln[i] = o[i][c];
      ln = inv1d(ln, n, levels);
      for (int i = 0; i < n; i++) o[i][c] = ln[i];
    end
    for (int r = 0; r < n; r++) begin
      for (int i = 0; i < n; i++) ln[i] = o[r][i];
      ln = inv1d(ln, n, levels);
      for (int i = 0; i < n; i++) o[r][i] = ln[i];
    end
    for (int r = 0; r < n; r++)
      for (int c = 0; c < n; c++)
        o[r][c] = (o[r][c] < 0) ? 0 : (o[r][c] > pmax) ? pmax : o[r][c];
    return o;
  endfunction

  // Hamming(k): number of parity bits
  function automatic int ham_r(input int k);
    int r;
    for (r = 0; (2 ** r) < k + r + 1; r++) ;
    return r;
  endfunction

  // codeword as an int with bit (p-1) = position p
  function automatic longint ham_enc(input int k, input longint data);
    int r, n, di;
    longint cw;
    r = ham_r(k);
    n = k + r;
    cw = 0;
    di = 0;
    for (int p = 1; p <= n; p++) begin
      if ((p & (p - 1)) != 0) begin
        if (((data >> di) & 1) != 0) cw |= (64'(1) << (p - 1));
        di++;
      end
    end
    for (int j = 0; j < r; j++) begin
      int par;
      par = 0;
      for (int p = 1; p <= n; p++)
        if ((p & (1 << j)) != 0 && p != (1 << j)) par ^= int'((cw >> (p - 1)) & 1);
      if (par != 0) cw |= (64'(1) << ((1 << j) - 1));
    end
    return cw;
  endfunction

  function automatic int ham_syn(input int k, input longint cw);
    int r, n, s;
    r = ham_r(k);
    n = k + r;
    s = 0;
    for (int p = 1; p <= n; p++)
      if (((cw >> (p - 1)) & 1) != 0) s ^= p;
    return s;
  endfunction

  // data bits after single-error correction (no correction if the syndrome
  // points outside the codeword)
  function automatic longint ham_dec(input int k, input longint cw);
    int r, n, s, di;
    longint d, w;
    r = ham_r(k);
    n = k + r;
    s = ham_syn(k, cw);
    w = cw;
    if (s != 0 && s <= n) w ^= (64'(1) << (s - 1));
    d = 0;
    di = 0;
    for (int p = 1; p <= n; p++) begin
      if ((p & (p - 1)) != 0) begin
        if (((w >> (p - 1)) & 1) != 0) d |= (64'(1) << di);
        di++;
      end
    end
    return d;
  endfunction

endpackage
