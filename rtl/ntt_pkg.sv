// ntt_pkg: constants, types and elaboration-time table generators shared by
// the NTT polynomial multiplier.
//
// The ring is Z_Q[x]/(x^N + 1) with Q = 1049089 = 2^20 + 2^9 + 1 (21 bits) and
// N = 256, the configuration the design is built for. Q - 1 = 512 * 2049, so a
// primitive 2N-th root of unity exists for every N up to 256. The weighting
// factor phi is taken as GEN^((Q-1)/2N) with GEN = 7, which for N = 256 gives
// phi = 207929, a primitive 512th root of unity; the NTT root is w = phi^2.
// These particular roots are this design's choice; any primitive root would do.
//
// All tables (powers of phi, twiddle factors) are computed here by constant
// functions, so the ROMs are plain constant arrays after elaboration and no
// data files are needed. Table index formulas are documented at each function.
package ntt_pkg;

  localparam int unsigned CW       = 21;        // coefficient width
  localparam int unsigned Q        = 1049089;   // modulus M = 2^20 + 2^9 + 1
  localparam int unsigned MAX_LOGN = 8;         // largest N with a 2N-th root mod Q
  localparam int unsigned MAX_N    = 1 << MAX_LOGN;
  localparam int unsigned GEN      = 7;         // generator used to derive the roots

  typedef logic [CW-1:0] coef_t;
  typedef coef_t         table_t [MAX_N];       // constant table, up to N entries

  // (a * b) mod Q with 64-bit intermediate
  function automatic longint unsigned mulmod(longint unsigned a, longint unsigned b);
    return (a * b) % 64'(Q);
  endfunction

  function automatic longint unsigned powmod(longint unsigned b, longint unsigned e);
    longint unsigned r = 1;
    longint unsigned x = b % 64'(Q);
    while (e != 0) begin
      if (e[0]) r = mulmod(r, x);
      x = mulmod(x, x);
      e = e >> 1;
    end
    return r;
  endfunction

  function automatic longint unsigned invmod(longint unsigned a);
    return powmod(a, 64'(Q) - 2);   // Q is prime
  endfunction

  // bit reversal of the low 'bits' bits of x
  function automatic int unsigned bitrev(int unsigned x, int unsigned bits);
    int unsigned r = 0;
    for (int unsigned i = 0; i < bits; i++)
      if (x[i]) r |= 1 << (bits - 1 - i);
    return r;
  endfunction

  // primitive 2N-th root of unity, N = 2^logn
  function automatic longint unsigned phi_root(int unsigned logn);
    return powmod(64'(GEN), (64'(Q) - 1) >> (logn + 1));
  endfunction

  // Weight table for step 1 (inverse = 0): T[i] = phi^i mod Q.
  // Unweight table for step 5 (inverse = 1): T[i] = N^-1 * phi^-i mod Q
  // (the 1/N scaling of the inverse NTT is folded into this table).
  function automatic table_t phi_table(int unsigned logn, bit inverse);
    table_t t;
    longint unsigned p   = phi_root(logn);
    longint unsigned s   = 1;
    longint unsigned stp = inverse ? invmod(p) : p;
    if (inverse) s = invmod(1 << logn);
    for (int unsigned i = 0; i < MAX_N; i++) begin
      t[i] = coef_t'(s);
      s = mulmod(s, stp);
    end
    return t;
  endfunction

  // Twiddle table of one butterfly stage, indexed by the stage's
  // group / position index g (see fifo_stage):
  //   forward stage s : T[g] = w^(bitrev(g, s-1) * N/2^s),  g < 2^(s-1)
  //   inverse stage s : T[g] = w^(-g * N/2^s),               g < 2^(s-1)
  // with w = phi^2 the primitive N-th root of unity.
  function automatic table_t twiddle_table(int unsigned logn, int unsigned stage, bit inverse);
    table_t t;
    longint unsigned w = mulmod(phi_root(logn), phi_root(logn));
    if (inverse) w = invmod(w);
    for (int unsigned g = 0; g < MAX_N; g++) begin
      if (g < (1 << (stage - 1))) begin
        if (inverse) t[g] = coef_t'(powmod(w, g * ((1 << logn) >> stage)));
        else         t[g] = coef_t'(powmod(w, bitrev(g, stage - 1) * ((1 << logn) >> stage)));
      end else begin
        t[g] = '0;
      end
    end
    return t;
  endfunction

endpackage
