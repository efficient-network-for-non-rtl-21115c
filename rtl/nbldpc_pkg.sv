// nbldpc_pkg: shared constants and constant functions of the non-binary
// QC-LDPC decoder.
//
// GF(2^m) arithmetic is done on polynomial-basis bit vectors (bit i is the
// coefficient of alpha^i), so addition is XOR and multiplication is a
// shift-and-reduce loop by the primitive polynomial.  The functions below are
// used both at elaboration time (to build the fixed wiring and the coefficient
// and control tables) and, for gf_mul only, inside clocked logic.
//
// The Class-II code construction follows the paper: q = 2^m, n = 2^t,
// c = 2^(m-t); beta_k and delta_i are subset sums of alpha^0..alpha^(t-1) and
// alpha^t..alpha^(m-1), numbered by the "index assignment of surjective
// function" (fewer terms first, then the lower exponent list first).  A layer
// is one row of circulant permutation matrices (the paper's Layer-I choice).
// The primitive polynomials are this design's choice; the paper names none.
package nbldpc_pkg;

  localparam int unsigned MAX_M = 6;

  // Primitive polynomial of GF(2^m), including the x^m term.
  function automatic int unsigned prim_poly(input int unsigned m);
    case (m)
      2:       return 'b111;
      3:       return 'b1011;
      4:       return 'b10011;
      5:       return 'b100101;
      default: return 'b1000011;
    endcase
  endfunction

  // Product of two GF(2^m) elements.
  function automatic logic [MAX_M-1:0] gf_mul(input logic [MAX_M-1:0] a,
                                              input logic [MAX_M-1:0] b,
                                              input int unsigned m);
    logic [MAX_M:0]   acc;
    logic [MAX_M:0]   sh;
    logic [MAX_M:0]   pp;
    pp  = (MAX_M+1)'(prim_poly(m));
    acc = '0;
    sh  = {1'b0, a};
    for (int i = 0; i < MAX_M; i++) begin
      if (i < int'(m)) begin
        if (b[i]) acc = acc ^ sh;
        sh = sh << 1;
        if (sh[m]) sh = sh ^ pp;
      end
    end
    return acc[MAX_M-1:0];
  endfunction

  // alpha^e for 0 <= e.
  function automatic logic [MAX_M-1:0] gf_alpha_pow(input int unsigned e,
                                                    input int unsigned m);
    logic [MAX_M-1:0] x;
    x = 1;
    for (int unsigned i = 0; i < e % ((1 << m) - 1); i++) x = gf_mul(x, 2, m);
    return x;
  endfunction

  // Discrete logarithm of a non-zero element (0 for the zero element).
  function automatic int unsigned gf_log(input logic [MAX_M-1:0] x,
                                         input int unsigned m);
    logic [MAX_M-1:0] p;
    p = 1;
    for (int unsigned i = 0; i < (1 << m) - 1; i++) begin
      if (p == x) return i;
      p = gf_mul(p, 2, m);
    end
    return 0;
  endfunction

  // Multiplicative inverse (0 maps to 0).
  function automatic logic [MAX_M-1:0] gf_inv(input logic [MAX_M-1:0] x,
                                              input int unsigned m);
    if (x == 0) return 0;
    return gf_alpha_pow(((1 << m) - 1 - gf_log(x, m)) % ((1 << m) - 1), m);
  endfunction

  // True when subset u precedes subset v in the paper's index assignment:
  // fewer elements first; equal size compares the ascending exponent lists
  // element by element.
  function automatic bit idx_before(input int unsigned u, input int unsigned v,
                                    input int unsigned bits);
    int unsigned pu, pv, ku, kv;
    int unsigned lu [MAX_M];
    int unsigned lv [MAX_M];
    pu = $countones(u);
    pv = $countones(v);
    if (pu != pv) return pu < pv;
    ku = 0;
    kv = 0;
    for (int unsigned i = 0; i < MAX_M; i++) begin
      lu[i] = 0;
      lv[i] = 0;
    end
    for (int unsigned i = 0; i < bits; i++) begin
      if (u[i]) begin lu[ku] = i; ku++; end
      if (v[i]) begin lv[kv] = i; kv++; end
    end
    for (int unsigned l = 0; l < MAX_M; l++) begin
      if (l < ku) begin
        if (lu[l] < lv[l]) return 1'b1;
        if (lu[l] > lv[l]) return 1'b0;
      end
    end
    return 1'b0;
  endfunction

  // Subset (bit vector over `bits` exponents) that carries index idx.
  function automatic int unsigned idx_to_vec(input int unsigned idx,
                                             input int unsigned bits);
    int unsigned rank;
    for (int unsigned v = 0; v < (1 << bits); v++) begin
      rank = 0;
      for (int unsigned u = 0; u < (1 << bits); u++)
        if (idx_before(u, v, bits)) rank++;
      if (rank == idx) return v;
    end
    return 0;
  endfunction

  // Index carried by subset vector v.
  function automatic int unsigned vec_to_idx(input int unsigned v,
                                             input int unsigned bits);
    int unsigned rank;
    rank = 0;
    for (int unsigned u = 0; u < (1 << bits); u++)
      if (idx_before(u, v, bits)) rank++;
    return rank;
  endfunction

  // INDEX^(n) entry (Eq. 12): index of beta_i + beta_j.
  function automatic int unsigned index_entry(input int unsigned i,
                                              input int unsigned j,
                                              input int unsigned t);
    return vec_to_idx(idx_to_vec(i, t) ^ idx_to_vec(j, t), t);
  endfunction

  // Field vector of block row / block column number k = i*n + l:
  // delta_i in bits [m-1:t], beta_l in bits [t-1:0].
  function automatic int unsigned class2_vec(input int unsigned k,
                                             input int unsigned m,
                                             input int unsigned t);
    return (idx_to_vec(k >> t, m - t) << t) | idx_to_vec(k % (1 << t), t);
  endfunction

  // Block column number whose field vector is v (inverse of class2_vec).
  function automatic int unsigned class2_col(input int unsigned v,
                                             input int unsigned m,
                                             input int unsigned t);
    return (vec_to_idx(v >> t, m - t) << t) | vec_to_idx(v % (1 << t), t);
  endfunction

  // Benes stage s of a 2^k-port network switches port pairs that differ in
  // this bit: 0, 1, ..., k-1, ..., 1, 0.
  function automatic int unsigned benes_bit(input int unsigned s,
                                            input int unsigned k);
    return (s < k) ? s : (2 * k - 2 - s);
  endfunction

  // Lower port of switch j in a stage that pairs ports differing in bit b.
  function automatic int unsigned benes_lo(input int unsigned j,
                                           input int unsigned b);
    return ((j >> b) << (b + 1)) | (j & ((1 << b) - 1));
  endfunction

endpackage
