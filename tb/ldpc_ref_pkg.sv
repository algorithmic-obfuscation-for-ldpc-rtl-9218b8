// ldpc_ref_pkg: bit-exact behavioural reference for the decoder testbenches.
//
// decode() runs the ordinary min-sum algorithm (no secret vector, flooding
// schedule, c2v from the previous iteration's v2c) with the same fixed-point
// rules as the RTL: 4-bit sign-magnitude messages, alpha = floor(3m/4),
// saturation to 15, a zero sum taking the channel sign. It forms t = zH^T, adds
// p (the syndrome the obfuscated decoder sees is t xor p) and applies the stop
// function of the chosen scheme to that, written here from its equations. So it
// predicts the decoded word and the iteration count of the obfuscated decoder
// for any key, assuming the obfuscation is transparent as claimed.
package ldpc_ref_pkg;

  typedef struct {
    int q, jb, kb, imax, scheme, hk, g, lr;
  } cfg_t;

  function automatic int shift(int b, int j, int q);
    return ((b + 1) * (j + 1)) % q;
  endfunction

  // Column of H connected to row r of block row b in block column j.
  function automatic int col_of(cfg_t c, int b, int r, int j);
    return j * c.q + (r + shift(b, j, c.q)) % c.q;
  endfunction

  // p = vH^T for v = pattern w repeated every q bits.
  function automatic void calc_p(input cfg_t c, input bit w[], output bit p[]);
    p = new[c.jb * c.q];
    for (int b = 0; b < c.jb; b++)
      for (int r = 0; r < c.q; r++) begin
        p[b*c.q + r] = 1'b0;
        for (int j = 0; j < c.kb; j++)
          p[b*c.q + r] ^= w[(r + shift(b, j, c.q)) % c.q];
      end
  endfunction

  // Stop function f2 or f4 on the observed syndrome ts.
  function automatic bit stop_fn(cfg_t c, bit ts[], bit key[], bit p[]);
    int h = c.jb * c.q;
    if (c.scheme == 1) begin
      for (int i = 0; i < h; i++)
        if (ts[i] != ((i < c.hk) ? key[i] : p[i])) return 1'b0;
      return 1'b1;
    end else begin
      int  gl = c.g * c.lr;
      bit  f2 = 1'b1, f3 = 1'b1, fh = 1'b0;
      for (int i = 0; i < h; i++)
        if (ts[i] != ((i < gl) ? key[i] : p[i])) f2 = 1'b0;
      for (int i = 0; i < c.lr; i++) begin
        bit ri = 1'b0, kp = 1'b0;
        for (int x = 0; x < c.g; x++) begin
          ri ^= ts[i*c.g + x];
          kp ^= key[i*c.g + x];
        end
        if (ri != key[gl + i]) f3 = 1'b0;
        if (ri != kp) fh = 1'b1;
      end
      return f3 && (f2 || fh);
    end
  endfunction

  // Correct key: scheme 1 = first hk bits of p; scheme 2 = [r(p) || p[0:g*lr-1]].
  function automatic void right_key(input cfg_t c, input bit p[], output bit key[]);
    if (c.scheme == 1) begin
      key = new[c.hk];
      for (int i = 0; i < c.hk; i++) key[i] = p[i];
    end else begin
      int gl = c.g * c.lr;
      key = new[gl + c.lr];
      for (int i = 0; i < gl; i++) key[i] = p[i];
      for (int i = 0; i < c.lr; i++) begin
        key[gl + i] = 1'b0;
        for (int x = 0; x < c.g; x++) key[gl + i] ^= p[i*c.g + x];
      end
    end
  endfunction

  function automatic int sat(int x);
    return (x > 15) ? 15 : x;
  endfunction

  function automatic void syndrome(input cfg_t c, input bit z[], input bit p[], output bit ts[]);
    ts = new[c.jb * c.q];
    for (int b = 0; b < c.jb; b++)
      for (int r = 0; r < c.q; r++) begin
        bit acc = p[b*c.q + r];
        for (int j = 0; j < c.kb; j++) acc ^= z[col_of(c, b, r, j)];
        ts[b*c.q + r] = acc;
      end
  endfunction

  // gs/gm: channel sign and magnitude per codeword bit.
  function automatic void decode(input cfg_t c, input bit gs[], input int gm[],
                                 input bit key[], input bit p[],
                                 output bit z[], output int iters, output bit success);
    int h = c.jb * c.q, n = c.kb * c.q;
    int uval [][];    // v2c value per edge [row][block column]
    int vval [][];    // c2v value per edge
    int tot  [];
    bit ts   [];
    uval = new[h]; vval = new[h];
    foreach (uval[m]) begin uval[m] = new[c.kb]; vval[m] = new[c.kb]; end
    tot = new[n]; z = new[n];
    // initialisation
    for (int b = 0; b < c.jb; b++)
      for (int r = 0; r < c.q; r++)
        for (int j = 0; j < c.kb; j++) begin
          int nn = col_of(c, b, r, j);
          uval[b*c.q + r][j] = gs[nn] ? gm[nn] : -gm[nn];
        end
    for (int i = 0; i < n; i++) z[i] = gs[i];
    syndrome(c, z, p, ts);
    if (stop_fn(c, ts, key, p)) begin iters = 0; success = 1'b1; return; end
    for (int it = 1; it <= c.imax; it++) begin
      // check nodes; the sign of a zero v2c value is kept separately below
      for (int m = 0; m < h; m++) begin
        int mn1 = 99, mn2 = 99, idx = 0; bit s = 1'b0;
        for (int j = 0; j < c.kb; j++) begin
          int a = uval[m][j] < 0 ? -uval[m][j] : uval[m][j];
          s ^= usgn(c, uval[m][j], m, j, gs);
          if (a < mn1) begin mn2 = mn1; mn1 = a; idx = j; end
          else if (a < mn2) mn2 = a;
        end
        for (int j = 0; j < c.kb; j++) begin
          int mag = ((j == idx ? mn2 : mn1) * 3) / 4;
          bit sg  = s ^ usgn(c, uval[m][j], m, j, gs);
          vval[m][j] = sg ? mag : -mag;
        end
      end
      // variable nodes
      for (int i = 0; i < n; i++) tot[i] = gs[i] ? gm[i] : -gm[i];
      for (int m = 0; m < h; m++)
        for (int j = 0; j < c.kb; j++) tot[col_of(c, m / c.q, m % c.q, j)] += vval[m][j];
      for (int m = 0; m < h; m++)
        for (int j = 0; j < c.kb; j++) begin
          int nn = col_of(c, m / c.q, m % c.q, j);
          int x  = tot[nn] - vval[m][j];
          int a  = x < 0 ? -x : x;
          // keep sign information of a zero extrinsic sum: encode as +/-0 via tie
          uval[m][j] = (x > 0) ? sat(a) : (x < 0) ? -sat(a) : 0;
        end
      for (int i = 0; i < n; i++) z[i] = (tot[i] > 0) ? 1'b1 : (tot[i] < 0) ? 1'b0 : gs[i];
      syndrome(c, z, p, ts);
      if (stop_fn(c, ts, key, p)) begin iters = it; success = 1'b1; return; end
    end
    iters = c.imax; success = 1'b0;
  endfunction

  // Sign bit of a v2c value; a zero value carries the channel sign (the tie rule).
  function automatic bit usgn(cfg_t c, int val, int m, int j, bit gs[]);
    if (val > 0) return 1'b1;
    if (val < 0) return 1'b0;
    return gs[col_of(c, m / c.q, m % c.q, j)];
  endfunction

endpackage
