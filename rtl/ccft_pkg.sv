// ccft_pkg: constants, types and elaboration-time functions shared by the
// partial-CCFT syndrome calculator.
//
// The received vector of the (2720, 2550) shortened Reed-Solomon code over
// GF(2^12) is treated as the first 2720 time-domain elements of a 4095-point
// DFT whose first 170 frequency components are the syndromes
// S_j = sum_i r_i alpha^(i*j), 0 <= j < 170. The 4095-point DFT is split with
// the prime-factor (Good-Thomas) algorithm into 63 x 65 sub-DFTs: because
// gcd(63, 65) = 1 no twiddle factors are needed.
//
//   input  index  n = (N2*n1 + N1*n2) mod N          (Ruritanian map)
//   output index  k = CRT(k1 = k mod N1, k2 = k mod N2)
//   tier 1: G[k1][n2] = sum_n1 alpha^(N2*n1*k1) r[n(n1,n2)]   (65 DFTs of 63 points)
//   tier 2: S[k]      = sum_n2 alpha^(N1*n2*k2) G[k1][n2]     (63 DFTs of 65 points)
//
// Code sizes, field size and the 63 x 65 split follow the paper. The field
// polynomial x^12 + x^6 + x^4 + x + 1 is this design's choice (the paper does
// not name one); any primitive degree-12 polynomial works after changing POLY.
//
// The functions below are used only with constant arguments, to build the
// binary matrices of constant multipliers while elaborating; none of them
// becomes hardware on its own.
package ccft_pkg;

  localparam int unsigned M       = 12;          // bits per symbol
  localparam logic [M:0]  POLY    = 13'h1053;    // x^12+x^6+x^4+x+1
  localparam int unsigned N       = 4095;        // DFT length 2^12 - 1
  localparam int unsigned N1      = 63;          // tier-1 sub-DFT length
  localparam int unsigned N2      = 65;          // tier-2 sub-DFT length
  localparam int unsigned N_SHORT = 2720;        // shortened code length n'
  localparam int unsigned N_SYN   = 170;         // 2t = n' - k'

  typedef logic [M-1:0] sym_t;

  // Multiplication by alpha (one shift and conditional reduction).
  function automatic sym_t gf_xtime(sym_t a);
    return a[M-1] ? ((a << 1) ^ POLY[M-1:0]) : (a << 1);
  endfunction

  // Antilog table: ALPHA_EXP[e] = alpha^e, 0 <= e < N.
  typedef sym_t exp_table_t [N];
  function automatic exp_table_t gf_exp_table();
    exp_table_t t;
    t[0] = sym_t'(1);
    for (int unsigned e = 1; e < N; e++) t[e] = gf_xtime(t[e-1]);
    return t;
  endfunction

  localparam exp_table_t ALPHA_EXP = gf_exp_table();

  // Product in GF(2^12), polynomial basis. In the sub-DFTs one operand is
  // always an elaboration-time constant, so synthesis reduces each call to a
  // fixed XOR network (a constant multiplier).
  function automatic sym_t gf_mul(sym_t a, sym_t b);
    sym_t acc, sh;
    acc = '0;
    sh  = a;
    for (int i = 0; i < M; i++) begin
      if (b[i]) acc ^= sh;
      sh = gf_xtime(sh);
    end
    return acc;
  endfunction

  // Time-domain index of input n1 of tier-1 sub-DFT n2 (Ruritanian input map).
  function automatic int unsigned pfa_in_index(int unsigned n1, int unsigned n2);
    return (N2 * n1 + N1 * n2) % N;
  endfunction

  // Frequency index k with k mod N1 = k1 and k mod N2 = k2 (CRT output map).
  function automatic int unsigned crt_index(int unsigned k1, int unsigned k2);
    int unsigned k;
    k = k1;
    for (int i = 0; i < N2; i++) begin
      if (k % N2 == k2) return k;
      k += N1;
    end
    return N;  // not reached for k1 < N1, k2 < N2
  endfunction


endpackage
