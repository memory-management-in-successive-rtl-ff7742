// mk_tb_ref_pkg: software reference for the multi-kernel SC decoder tests.
//
// Everything here is written from the definitions, not from the RTL:
//  * tker(): the kernel matrices T2 = [1 0; 1 1], T3 = [1 1 1; 1 0 1; 0 1 1].
//  * encode(): x = u * (T_k0 x T_k1 x ...), applying each kernel along its
//    digit of the natural index (k0 is the most significant digit).
//  * kfun(): min-sum kernel LLR functions, derived from x = u*T_p.
//  * sc_ref(): textbook SC decoding in natural order: for each bit it
//    recomputes the LLR chain from the channel vector, re-encoding the
//    previously decided sub-blocks for the partial sums. It keeps no reduced
//    memory structure, so it is independent of the design's data layout.
package mk_tb_ref_pkg;

  function automatic int lmax(input int q);
    return (1 << (q - 1)) - 1;
  endfunction

  function automatic int sat(input int v, input int q);
    if (v > lmax(q))  return lmax(q);
    if (v < -lmax(q)) return -lmax(q);
    return v;
  endfunction

  function automatic int iabs(input int v);
    return (v < 0) ? -v : v;
  endfunction

  function automatic int bp(input int a, input int b, input int q);
    int m;
    m = (iabs(a) < iabs(b)) ? iabs(a) : iabs(b);
    if ((a < 0) != (b < 0)) m = -m;
    return sat(m, q);
  endfunction

  function automatic bit tker(input int p, input int r, input int c);
    bit t2 [2][2] = '{'{1, 0}, '{1, 1}};
    bit t3 [3][3] = '{'{1, 1, 1}, '{1, 0, 1}, '{0, 1, 1}};
    return (p == 2) ? t2[r][c] : t3[r][c];
  endfunction

  // LLR of u_b of a size-p kernel, given output LLRs L and decided bits u
  function automatic int kfun(input int p, input int b, input int L[3], input bit u[3], input int q);
    if (p == 2) begin
      if (b == 0) return bp(L[0], L[1], q);
      return sat(L[1] + (u[0] ? -L[0] : L[0]), q);
    end
    case (b)
      0:       return bp(bp(L[0], L[1], q), L[2], q);
      1:       return sat((u[0] ? -L[0] : L[0]) + bp(L[1], L[2], q), q);
      default: return sat((u[0] ? -L[1] : L[1]) + ((u[0] ^ u[1]) ? -L[2] : L[2]), q);
    endcase
  endfunction

  // x = u * (T_ks[0] x ... x T_ks[$]); length of u is the product of ks
  function automatic void encode(input int ks[$], input bit u[$], output bit x[$]);
    int len, stride, d;
    bit v [3];
    bit w [3];
    x = u;
    len = x.size();
    stride = len;
    foreach (ks[t]) begin
      stride = stride / ks[t];
      for (int idx = 0; idx < len; idx++) begin
        d = (idx / stride) % ks[t];
        if (d == 0) begin
          for (int c = 0; c < ks[t]; c++) v[c] = x[idx + c * stride];
          for (int c = 0; c < ks[t]; c++) begin
            w[c] = 0;
            for (int r = 0; r < ks[t]; r++) w[c] ^= v[r] & tker(ks[t], r, c);
          end
          for (int c = 0; c < ks[t]; c++) x[idx + c * stride] = w[c];
        end
      end
    end
  endfunction

  // SC decoding of channel LLRs y (natural order); u returns the decisions
  function automatic void sc_ref(input int ks[$], input int y[$], input bit frozen[$],
                                 input int q, output bit u[$]);
    int n, s, mj, base, rem, pj, bj;
    int v[$];
    int w[$];
    int dig[$];
    int sub[$];
    bit seg[$];
    bit cw[$];
    bit ucw [3][$];
    int L [3];
    bit up [3];
    n = y.size();
    s = ks.size();
    u = {};
    for (int i = 0; i < n; i++) u.push_back(1'b0);
    for (int i = 0; i < n; i++) begin
      // mixed-radix digits of i, most significant first
      dig = {};
      rem = i;
      for (int t = s - 1; t >= 0; t--) begin
        dig.push_front(rem % ks[t]);
        rem = rem / ks[t];
      end
      v = y;
      base = 0;
      mj = n;
      for (int j = 0; j < s; j++) begin
        pj = ks[j];
        bj = dig[j];
        mj = mj / pj;
        sub = {};
        for (int t = j + 1; t < s; t++) sub.push_back(ks[t]);
        for (int c = 0; c < bj; c++) begin
          seg = {};
          for (int r = 0; r < mj; r++) seg.push_back(u[base + c * mj + r]);
          encode(sub, seg, cw);
          ucw[c] = cw;
        end
        w = {};
        for (int r = 0; r < mj; r++) begin
          for (int c = 0; c < 3; c++) begin
            L[c]  = (c < pj) ? v[c * mj + r] : 0;
            up[c] = (c < bj) ? ucw[c][r] : 1'b0;
          end
          w.push_back(kfun(pj, bj, L, up, q));
        end
        base = base + bj * mj;
        v = w;
      end
      u[i] = frozen[i] ? 1'b0 : (v[0] < 0);
    end
  endfunction

endpackage
