// mkpc_ref_pkg -- behavioural reference model used by the testbenches.
//
// Written from the decoding equations, independently of the RTL structure:
// LLRs are kept as Q-bit sign-magnitude words in plain ints, sums are done
// in integer arithmetic and then saturated, decisions are taken as the sign
// of the exact kernel LLR (ties resolved toward the sign of the second term,
// as the decision equations of the size-2 and size-3 codes do), and the
// encoder multiplies by the Kronecker product of the kernel matrices
//   T2 = [1 0; 1 1]     T3 = [1 1 1; 1 0 1; 0 1 1].
// Kernel sequences use the RTL's (depth, tern) encoding: bit i of tern set
// when kernel i (0 = root) is T3.
package mkpc_ref_pkg;

  typedef int   ivec_t[];
  typedef bit   bvec_t[];

  function automatic int sgn(int w, int q);  return (w >> (q-1)) & 1;         endfunction
  function automatic int mag(int w, int q);  return w & ((1 << (q-1)) - 1);   endfunction
  function automatic int mk(int s, int m, int q); return (s << (q-1)) | m;    endfunction
  function automatic int val(int w, int q);  return sgn(w,q) ? -mag(w,q) : mag(w,q); endfunction
  function automatic int flip(int w, int b, int q); return w ^ ((b & 1) << (q-1)); endfunction

  function automatic int sat(int v, int q);
    int mx = (1 << (q-1)) - 1;
    int m  = (v < 0) ? -v : v;
    if (m > mx) m = mx;
    return mk(v < 0, m, q);
  endfunction

  function automatic int imin(int a, int b); return a < b ? a : b; endfunction

  // f^b, g^b, f^t, g1^t, g2^t on single elements
  function automatic int f2(int a, int b, int q);
    return mk(sgn(a,q) ^ sgn(b,q), imin(mag(a,q), mag(b,q)), q);
  endfunction
  function automatic int g2(int a, int b, int beta, int q);
    return sat(val(flip(a, beta, q), q) + val(b, q), q);
  endfunction
  function automatic int f3(int a, int b, int c, int q);
    return mk(sgn(a,q) ^ sgn(b,q) ^ sgn(c,q), imin(imin(mag(a,q), mag(b,q)), mag(c,q)), q);
  endfunction
  function automatic int g1t(int a, int b, int c, int bl, int q);
    return sat(val(flip(a, bl, q), q) + val(f2(b, c, q), q), q);
  endfunction
  function automatic int g2t(int a, int b, int c, int bl, int bc, int q);
    return sat(val(flip(b, bl, q), q) + val(flip(c, bl ^ bc, q), q), q);
  endfunction

  // Hard decision on the exact sum t1 + t2 of two sign-magnitude terms;
  // a zero sum takes the sign of the term named by tie.
  function automatic int hd(int t1, int t2, int tie, int q);
    int v = val(t1, q) + val(t2, q);
    if (v > 0) return 0;
    if (v < 0) return 1;
    return sgn(tie, q);
  endfunction

  // Size-2 decision: u0 = sign of f, u1 = sign of (1-2u0)a0 + a1.
  function automatic bvec_t dec2(ivec_t al, bvec_t fz, int q);
    bvec_t u = new[2];
    u[0] = bit'(sgn(f2(al[0], al[1], q), q)) & fz[0];
    u[1] = bit'(hd(flip(al[0], u[0], q), al[1], al[1], q)) & fz[1];
    return u;
  endfunction

  // Size-3 decision: signs of f^t, g1^t, g2^t without saturation.
  function automatic bvec_t dec3(ivec_t al, bvec_t fz, int q);
    bvec_t u = new[3];
    int ta, tb;
    u[0] = bit'(sgn(f3(al[0], al[1], al[2], q), q)) & fz[0];
    ta   = flip(al[0], u[0], q);
    tb   = f2(al[1], al[2], q);
    // a tie (|a0| equal to the smaller of |a1|,|a2|) follows the a0 term
    u[1] = bit'(hd(ta, tb, ta, q)) & fz[1];
    ta   = flip(al[1], u[0], q);
    tb   = flip(al[2], u[0] ^ u[1], q);
    u[2] = bit'(hd(ta, tb, ta, q)) & fz[2];
    return u;
  endfunction

  function automatic int code_len(int depth, int tern);
    int n = 1;
    for (int i = 0; i < depth; i++) n *= ((tern >> i) & 1) ? 3 : 2;
    return n;
  endfunction

  // Encoder x = u * (T(k0) x T(k1) x ...), written as kernel 0 acting on
  // the sub-codewords of the rest of the sequence.
  function automatic bvec_t encode(bvec_t u, int depth, int tern);
    int    n = u.size();
    int    k = (tern & 1) ? 3 : 2;
    int    m = n / k;
    bvec_t x = new[n];
    bvec_t c[3];
    bit    t2[2][2] = '{'{1,0}, '{1,1}};
    bit    t3[3][3] = '{'{1,1,1}, '{1,0,1}, '{0,1,1}};
    for (int j = 0; j < k; j++) begin
      bvec_t uj = new[m];
      for (int i = 0; i < m; i++) uj[i] = u[j*m + i];
      c[j] = (depth > 1) ? encode(uj, depth - 1, tern >> 1) : uj;
    end
    for (int t = 0; t < k; t++)
      for (int i = 0; i < m; i++) begin
        bit s = 0;
        for (int j = 0; j < k; j++) s ^= (k == 3 ? t3[j][t] : t2[j][t]) & c[j][i];
        x[t*m + i] = s;
      end
    return x;
  endfunction

  // Successive-cancellation decoder returning the estimated codeword.
  function automatic bvec_t sc(ivec_t al, bvec_t fz, int depth, int tern, int q);
    int    n = al.size();
    int    k = (tern & 1) ? 3 : 2;
    int    m = n / k;
    bvec_t x = new[n];
    bvec_t c[3];
    if (depth == 1) begin
      bvec_t u = (k == 2) ? dec2(al, fz, q) : dec3(al, fz, q);
      bvec_t z = encode(u, 1, tern);
      return z;
    end
    for (int j = 0; j < k; j++) begin
      ivec_t ch = new[m];
      bvec_t fj = new[m];
      for (int i = 0; i < m; i++) begin
        fj[i] = fz[j*m + i];
        if (k == 2) ch[i] = (j == 0) ? f2(al[i], al[i+m], q) : g2(al[i], al[i+m], c[0][i], q);
        else case (j)
          0: ch[i] = f3(al[i], al[i+m], al[i+2*m], q);
          1: ch[i] = g1t(al[i], al[i+m], al[i+2*m], c[0][i], q);
          default: ch[i] = g2t(al[i], al[i+m], al[i+2*m], c[0][i], c[1][i], q);
        endcase
      end
      c[j] = sc(ch, fj, depth - 1, tern >> 1, q);
    end
    // combine through the kernel matrix
    for (int t = 0; t < k; t++)
      for (int i = 0; i < m; i++) begin
        bit s = 0;
        if (k == 2) s = (t == 0) ? c[0][i] ^ c[1][i] : c[1][i];
        else case (t)
          0: s = c[0][i] ^ c[1][i];
          1: s = c[0][i] ^ c[2][i];
          default: s = c[0][i] ^ c[1][i] ^ c[2][i];
        endcase
        x[t*m + i] = s;
      end
    return x;
  endfunction

  // Random Q-bit LLR word, including -0 now and then.
  function automatic int rand_llr(int q);
    int w = int'($urandom_range((1 << q) - 1, 0));
    return w;
  endfunction

  // One test frame of a (depth, tern) code.
  //   mode 0: noiseless BPSK, magnitudes 1..max (any decoder must return x)
  //   mode 1: BPSK plus approximately Gaussian noise, quantized to Q bits
  //   mode 2: arbitrary LLR words
  // The information set is random with a random size k (random rate);
  // fz[i] = 1 marks an information position. x is the transmitted codeword.
  function automatic void gen_frame(int depth, int tern, int q, int mode,
                                    output ivec_t llr, output bvec_t fz,
                                    output bvec_t x, output int k);
    int    n  = code_len(depth, tern);
    int    mx = (1 << (q-1)) - 1;
    int    perm[] = new[n];
    bvec_t u  = new[n];
    llr = new[n];
    fz  = new[n];
    k   = int'($urandom_range(n, 0));
    for (int i = 0; i < n; i++) perm[i] = i;
    for (int i = n - 1; i > 0; i--) begin
      int j = int'($urandom_range(i, 0));
      int t = perm[i]; perm[i] = perm[j]; perm[j] = t;
    end
    for (int i = 0; i < n; i++) begin fz[i] = 0; u[i] = 0; end
    for (int i = 0; i < k; i++) begin fz[perm[i]] = 1; u[perm[i]] = bit'($urandom); end
    x = encode(u, depth, tern);
    for (int i = 0; i < n; i++) begin
      case (mode)
        0: llr[i] = mk(int'(x[i]), int'($urandom_range(mx, 1)), q);
        1: begin
          int v = x[i] ? -4 : 4;
          for (int r = 0; r < 4; r++) v += int'($urandom_range(6, 0)) - 3;
          llr[i] = sat(v, q);
          if (v == 0 && $urandom_range(1, 0) == 1) llr[i] = mk(1, 0, q);
        end
        default: llr[i] = rand_llr(q);
      endcase
    end
  endfunction

endpackage
