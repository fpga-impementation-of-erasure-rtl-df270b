// gf_mult: single-cycle (purely combinational) GF(2^M) multiplier.
//
// c = a*b mod P(x) is computed as the matrix-vector product c = Z(a) * b
// over GF(2). Column j of Z holds the bits of a(x)*x^j mod P(x):
//   f[i][0] = a[i]
//   f[i][j] = u[i-j]*a[i-j] + sum_{t=0..j-1} q[j-1-t][i] * a[M-1-t]
// where row r of the Q matrix holds the bits of x^(M+r) mod P(x),
// r = 0..M-2. Q depends only on the polynomial and is computed at
// elaboration time, so every output bit becomes a fixed XOR/AND network of
// the a and b bits. This is the construction of the paper; the default
// polynomial 1 + x + x^3 + x^31 + x^32 is the one the paper selects.
// Interface: a, b, c are M-bit polynomial-basis field elements (bit i is
// the coefficient of x^i). No clock; the result is valid in the same cycle.
module gf_mult #(
  parameter int unsigned M    = rs_pkg::GF_M,
  parameter logic [M-1:0] POLY = M'(rs_pkg::GF_POLY)  // P(x) without the x^M term
) (
  input  logic [M-1:0] a,
  input  logic [M-1:0] b,
  output logic [M-1:0] c
);

  typedef logic [M-1:0] qmat_t [M-1];

  // Q matrix of eq. (4): row r = x^(M+r) mod P(x).
  function automatic qmat_t make_q();
    qmat_t q;
    logic [M-1:0] v;
    v = POLY;                         // x^M mod P(x)
    for (int r = 0; r < M - 1; r++) begin
      q[r] = v;
      v = v[M-1] ? ((v << 1) ^ POLY) : (v << 1);
    end
    return q;
  endfunction

  localparam qmat_t Q = make_q();

  logic [M-1:0] f [M];  // f[j] = column j of Z (bit i = entry (i, j))

  // Column j: u[i-j]*a[i-j] is a shifted left by j; each a[M-1-t] that
  // leaves the top contributes row j-1-t of Q.
  for (genvar j = 0; j < int'(M); j++) begin : g_col
    always_comb begin
      f[j] = a << j;
      for (int t = 0; t < j; t++)
        f[j] = f[j] ^ (Q[j-1-t] & {M{a[M-1-t]}});
    end
  end

  always_comb begin
    c = '0;
    for (int j = 0; j < int'(M); j++)
      c = c ^ (f[j] & {M{b[j]}});
  end

endmodule
