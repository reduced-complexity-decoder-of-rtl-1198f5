// tb_gf_pkg: reference GF(2^12) arithmetic and Reed-Solomon helpers for the
// testbenches, written independently of the RTL (log / antilog tables, the
// textbook sum-of-products syndrome, systematic encoding by polynomial
// division). Field polynomial x^12 + x^6 + x^4 + x + 1, alpha = x.
package tb_gf_pkg;

  localparam int Q = 4095;
  localparam int POLY = 'h1053;

  int gexp [2*Q];
  int glog [Q+1];

  function automatic void init_tables();
    int v;
    v = 1;
    for (int e = 0; e < Q; e++) begin
      gexp[e]     = v;
      gexp[e + Q] = v;
      glog[v]     = e;
      v = v << 1;
      if ((v & 'h1000) != 0) v = v ^ POLY;
    end
    glog[0] = -1;
  endfunction

  function automatic int mul(int a, int b);
    if (a == 0 || b == 0) return 0;
    return gexp[glog[a] + glog[b]];
  endfunction

  function automatic int apow(int e);
    return gexp[((e % Q) + Q) % Q];
  endfunction

  // S_j = sum_i r_i alpha^(i*j), i < n, j < nsyn, by Horner's rule in alpha^j.
  function automatic void syndromes(input int r [], input int n, input int nsyn,
                                    output int s []);
    s = new[nsyn];
    for (int j = 0; j < nsyn; j++) begin
      int acc, a;
      acc = 0;
      a = apow(j);
      for (int i = n - 1; i >= 0; i--) acc = mul(acc, a) ^ r[i];
      s[j] = acc;
    end
  endfunction

  // Systematic codeword of length n with nsyn parity symbols and roots
  // alpha^0..alpha^(nsyn-1): c = x^nsyn m(x) + (x^nsyn m(x) mod g(x)).
  function automatic void encode(input int msg [], input int n, input int nsyn,
                                 output int c []);
    int g [];
    int rem [];
    g = new[nsyn + 1];
    foreach (g[i]) g[i] = 0;
    g[0] = 1;
    for (int j = 0; j < nsyn; j++) begin
      // g(x) *= (x + alpha^j)
      for (int i = j + 1; i > 0; i--) g[i] = g[i-1] ^ mul(g[i], apow(j));
      g[0] = mul(g[0], apow(j));
    end
    rem = new[nsyn];
    foreach (rem[i]) rem[i] = 0;
    for (int i = n - nsyn - 1; i >= 0; i--) begin
      int fb;
      fb = msg[i] ^ rem[nsyn-1];
      for (int k = nsyn - 1; k > 0; k--) rem[k] = rem[k-1] ^ mul(fb, g[k]);
      rem[0] = mul(fb, g[0]);
    end
    c = new[n];
    for (int i = 0; i < nsyn; i++) c[i] = rem[i];
    for (int i = 0; i < n - nsyn; i++) c[i + nsyn] = msg[i];
  endfunction

endpackage
