// rs_ref_pkg: reference arithmetic for the testbenches, written
// independently of the RTL. GF(2^32) products use shift-and-add with
// reduction by P(x) = 1 + x + x^3 + x^31 + x^32; codewords are built as
// C(z) = D(z) * G(z) with G(z) = prod_{i=0}^{n-k-1} (z + alpha^i), so that
// C(alpha^i) = 0 for i = 0..n-k-1 (m0 = 0).
package rs_ref_pkg;

  localparam logic [31:0] POLY = 32'h8000_000B;

  function automatic logic [31:0] gmul(logic [31:0] a, logic [31:0] b);
    logic [31:0] r;
    r = '0;
    for (int i = 31; i >= 0; i--) begin
      r = r[31] ? ((r << 1) ^ POLY) : (r << 1);
      if (b[i]) r = r ^ a;
    end
    return r;
  endfunction

  function automatic logic [31:0] gpow(logic [31:0] a, int unsigned e);
    logic [31:0] r;
    r = 32'd1;
    for (int i = 0; i < int'(e); i++) r = gmul(r, a);
    return r;
  endfunction

  // Inverse by exhaustive Fermat exponent 2^32-2 (square-and-multiply).
  function automatic logic [31:0] ginv(logic [31:0] a);
    logic [31:0] r, b;
    logic [31:0] ex;
    r  = 32'd1;
    b  = a;
    ex = 32'hFFFF_FFFE;
    for (int i = 0; i < 32; i++) begin
      if (ex[i]) r = gmul(r, b);
      b = gmul(b, b);
    end
    return r;
  endfunction

  // Random codeword of RS(n,k): coefficients c[0..n-1].
  function automatic void make_codeword(int n, int k, ref logic [31:0] c []);
    logic [31:0] g [];
    logic [31:0] root;
    g = new[n - k + 1];
    foreach (g[i]) g[i] = '0;
    g[0] = 32'd1;
    root = 32'd1;
    for (int i = 0; i < n - k; i++) begin
      // g(z) <- g(z) * (z + root)
      for (int t = i + 1; t >= 1; t--) g[t] = g[t-1] ^ gmul(g[t], root);
      g[0] = gmul(g[0], root);
      root = gmul(root, 32'd2);
    end
    c = new[n];
    foreach (c[i]) c[i] = '0;
    for (int d = 0; d < k; d++) begin
      logic [31:0] dv;
      dv = $urandom;
      for (int t = 0; t <= n - k; t++) c[d + t] = c[d + t] ^ gmul(dv, g[t]);
    end
  endfunction

  // Evaluate r(z) at x.
  function automatic logic [31:0] geval(logic [31:0] c [], logic [31:0] x);
    logic [31:0] acc;
    acc = '0;
    for (int i = c.size() - 1; i >= 0; i--) acc = gmul(acc, x) ^ c[i];
    return acc;
  endfunction

endpackage
