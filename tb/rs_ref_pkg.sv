// rs_ref_pkg: reference Reed-Solomon arithmetic for the testbenches.
//
// Written independently of the design: multiplication goes through log and
// antilog tables built from x^8+x^4+x^3+x^2+1, and encoding is plain
// polynomial long division.  Codewords are arrays indexed by transmission
// order: element 0 is the highest-degree coefficient c_(N-1).
package rs_ref_pkg;

  int unsigned exp_t [512];
  int unsigned log_t [256];
  bit          ready = 0;

  function automatic void init();
    int unsigned x;
    x = 1;
    for (int i = 0; i < 255; i++) begin
      exp_t[i]       = x;
      exp_t[i + 255] = x;
      log_t[x]       = i;
      x = x << 1;
      if ((x & 'h100) != 0) x = x ^ 'h11D;
    end
    ready = 1;
  endfunction

  function automatic byte unsigned mul(byte unsigned a, byte unsigned b);
    if (!ready) init();
    if (a == 0 || b == 0) return 0;
    return byte'(exp_t[log_t[a] + log_t[b]]);
  endfunction

  function automatic byte unsigned apow(int e);
    if (!ready) init();
    return byte'(exp_t[((e % 255) + 255) % 255]);
  endfunction

  // Codeword (N symbols, transmission order) from data (N-npar symbols).
  function automatic void encode(input byte unsigned data[], input int npar, input int n,
                                 output byte unsigned cw[]);
    byte unsigned g[];
    byte unsigned rem[];
    byte unsigned fb;
    g = new[npar + 1];
    foreach (g[i]) g[i] = 0;
    g[0] = 1;
    for (int j = 0; j < npar; j++) begin
      // g = g * (x + alpha^j)
      for (int k = npar; k > 0; k--) g[k] = g[k-1] ^ mul(g[k], apow(j));
      g[0] = mul(g[0], apow(j));
    end
    rem = new[npar > 0 ? npar : 1];
    foreach (rem[i]) rem[i] = 0;
    cw = new[n];
    for (int i = 0; i < n - npar; i++) begin
      cw[i] = data[i];
      if (npar > 0) begin
        // rem holds coefficients of degree npar-1 .. 0 as rem[npar-1] .. rem[0]
        fb = data[i] ^ rem[npar-1];
        for (int k = npar - 1; k > 0; k--) rem[k] = rem[k-1] ^ mul(fb, g[k]);
        rem[0] = mul(fb, g[0]);
      end
    end
    for (int i = 0; i < npar; i++) cw[n - npar + i] = rem[npar - 1 - i];
  endfunction

  // r(alpha^j) for a received word in transmission order.
  function automatic byte unsigned eval_at(input byte unsigned cw[], input int j);
    byte unsigned s;
    s = 0;
    foreach (cw[i]) s = mul(s, apow(j)) ^ cw[i];
    return s;
  endfunction

endpackage
