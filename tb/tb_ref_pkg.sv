// tb_ref_pkg: reference models for the testbenches, written directly from the
// mathematical definitions (not from the RTL structure).
//   ntt_ref      Y[p] = sum_j x_j * w^(j * bitrev(p))          (bit-reversed order)
//   intt_ref     x[i] = sum_p Y[p] * w^(-i * bitrev(p))         (no 1/N scale)
//   negacyclic   c = a * b mod (x^N + 1), schoolbook
//   stage_ref    one butterfly stage of the pipelined transform
package tb_ref_pkg;
  import ntt_pkg::*;

  typedef longint unsigned vec_t [MAX_N];

  function automatic longint unsigned omega(int unsigned logn);
    return mulmod(phi_root(logn), phi_root(logn));
  endfunction

  function automatic vec_t ntt_ref(vec_t x, int unsigned logn);
    vec_t y;
    int unsigned n = 1 << logn;
    longint unsigned w = omega(logn);
    for (int unsigned p = 0; p < n; p++) begin
      longint unsigned wp = powmod(w, bitrev(p, logn));
      longint unsigned acc = 0, f = 1;
      for (int unsigned j = 0; j < n; j++) begin
        acc = (acc + mulmod(x[j], f)) % 64'(Q);
        f = mulmod(f, wp);
      end
      y[p] = acc;
    end
    return y;
  endfunction

  function automatic vec_t intt_ref(vec_t y, int unsigned logn);
    vec_t x;
    int unsigned n = 1 << logn;
    longint unsigned wi = invmod(omega(logn));
    for (int unsigned i = 0; i < n; i++) begin
      longint unsigned acc = 0;
      for (int unsigned p = 0; p < n; p++)
        acc = (acc + mulmod(y[p], powmod(wi, (i * bitrev(p, logn)) % n))) % 64'(Q);
      x[i] = acc;
    end
    return x;
  endfunction

  function automatic vec_t negacyclic(vec_t a, vec_t b, int unsigned logn);
    vec_t c;
    int unsigned n = 1 << logn;
    for (int unsigned i = 0; i < MAX_N; i++) c[i] = 0;
    for (int unsigned i = 0; i < n; i++)
      for (int unsigned j = 0; j < n; j++) begin
        longint unsigned pr = mulmod(a[i], b[j]);
        if (i + j < n) c[i+j]   = (c[i+j] + pr) % 64'(Q);
        else           c[i+j-n] = (c[i+j-n] + 64'(Q) - pr) % 64'(Q);
      end
    return c;
  endfunction

  // One stage applied in place: forward stage s pairs k with k + N/2^s and
  // uses w^(bitrev(k / (2*dst), s-1) * dst); inverse stage s pairs k with
  // k + 2^(s-1) and uses w^(-(k mod dst) * N/2^s).
  function automatic vec_t stage_ref(vec_t x, int unsigned logn, int unsigned s, bit inverse);
    vec_t y = x;
    int unsigned n    = 1 << logn;
    int unsigned dst = inverse ? (1 << (s - 1)) : (n >> s);
    longint unsigned w = omega(logn);
    if (inverse) w = invmod(w);
    for (int unsigned k = 0; k < n; k++) begin
      if ((k & dst) == 0) begin
        longint unsigned tw, t;
        if (inverse) tw = powmod(w, (k % dst) * (n >> s));
        else         tw = powmod(w, bitrev(k / (2 * dst), s - 1) * dst);
        t = mulmod(tw, x[k + dst]);
        y[k]        = (x[k] + t) % 64'(Q);
        y[k + dst] = (x[k] + 64'(Q) - t) % 64'(Q);
      end
    end
    return y;
  endfunction

  // insert a 0 bit at position pos of v
  function automatic int unsigned insert0(int unsigned v, int unsigned pos);
    int unsigned lo = v & ((1 << pos) - 1);
    return ((v >> pos) << (pos + 1)) | lo;
  endfunction
endpackage
