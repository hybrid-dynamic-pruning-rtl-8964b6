// hdp_ref_pkg: reference arithmetic for the HDP testbenches.
//
// Written from the algorithm, not from the RTL: plain integer arithmetic on
// 64-bit values. The fixed-point conventions are those documented in the
// RTL (Q8.8 data split toward zero into integer and fraction; scores in Q.8;
// probabilities in Q8.8) so that results can be compared bit for bit.
package hdp_ref_pkg;

  // integer part truncated toward zero, and the signed remainder
  function automatic longint ip(longint x);
    return (x < 0) ? -((-x) / 256) : x / 256;
  endfunction
  function automatic longint fp(longint x);
    return x - ip(x) * 256;
  endfunction

  // e^s for a Q.8 score s, as 2^t = 2^z * (1 + f*(168 + 88 f)/2^16), Q.16
  function automatic longint exp_q16(longint s);
    longint t, z, f, p;
    t = (s * 369);
    t = (t >= 0) ? t / 256 : -((-t + 255) / 256);   // floor
    if (t < -4096) t = -4096;
    if (t > 4095)  t = 4095;
    z = (t >= 0) ? t / 256 : -((-t + 255) / 256);
    f = t - z * 256;
    p = 65536 + (f * (168 * 256 + 88 * f)) / 256;
    if (z >= 0) return p << z;
    else        return p >> (-z);
  endfunction

  // 1/sum as (recip Q.16, shift): prob = e*recip >> shift
  function automatic void recip_of(longint sum, output longint recip, output int shift);
    int msb;
    longint m;
    msb = 0;
    for (int i = 0; i < 48; i++) if ((sum >> i) & 1) msb = i;
    if (msb >= 15) m = sum >> (msb - 15);
    else           m = sum << (15 - msb);
    m = m & 65535;
    recip = 185042 - ((123362 * m) >> 16);
    shift = msb + 9;
  endfunction

  function automatic longint prob_of(longint e, longint recip, int shift);
    longint p;
    p = (e * recip) >> shift;
    return (p > 256) ? 256 : p;
  endfunction

  // Random Q, K, V of one head. kind 0: values in (-3, 3) with a few larger
  // ones; kind 1: Q only in (-1, 1), so every integer part is zero and the
  // head has no importance at all (it is pruned by any tau_H > 0).
  function automatic void gen_head(input int L, input int D, input int kind,
                                   ref longint q[], ref longint k[], ref longint v[]);
    q = new[L * D]; k = new[L * D]; v = new[L * D];
    for (int i = 0; i < L * D; i++) begin
      q[i] = longint'($urandom_range(0, 1536)) - 768;
      k[i] = longint'($urandom_range(0, 1536)) - 768;
      v[i] = longint'($urandom_range(0, 4096)) - 2048;
      if ($urandom_range(0, 15) == 0) q[i] = longint'($urandom_range(0, 8192)) - 4096;
      if (kind == 1) q[i] = longint'($urandom_range(0, 510)) - 255;
    end
  endfunction

  // One attention head with hybrid dynamic pruning, from the algorithm:
  // q, k, v are L x D Q8.8 values, flattened [token*D + dim]. Returns the
  // Q8.8 output [row*D + dim] (all zero for a pruned head), the block mask
  // [bi*(L/2) + bj], whether the head is pruned and how many blocks are kept.
  function automatic void attention_head(
      input  int L, input int D, input longint rho, input longint tau,
      input  int scale_shift,
      ref    longint q[], ref longint k[], ref longint v[],
      ref    longint out[], ref bit mask[],
      output bit pruned, output int kept);
    int nb;
    longint iatt [];
    longint th [];
    longint thead;
    nb = L / 2;
    iatt = new[L * L];
    th   = new[nb * nb];
    out  = new[L * D];
    mask = new[nb * nb];
    for (int r = 0; r < L; r++)
      for (int c = 0; c < L; c++) begin
        longint s;
        s = 0;
        for (int d = 0; d < D; d++) s += ip(q[r*D+d]) * ip(k[c*D+d]);
        iatt[r*L+c] = s;
      end
    thead = 0;
    kept = 0;
    for (int bi = 0; bi < nb; bi++) begin
      longint mn, mx, sm, thr;
      for (int bj = 0; bj < nb; bj++) begin
        longint t;
        t = 0;
        for (int x = 0; x < 4; x++) begin
          longint e;
          e = iatt[(2*bi + x/2)*L + 2*bj + x%2];
          t += (e < 0) ? -e : e;
        end
        th[bi*nb+bj] = t;
        thead += t;
      end
      mn = th[bi*nb]; mx = th[bi*nb]; sm = 0;
      for (int bj = 0; bj < nb; bj++) begin
        if (th[bi*nb+bj] < mn) mn = th[bi*nb+bj];
        if (th[bi*nb+bj] > mx) mx = th[bi*nb+bj];
        sm += th[bi*nb+bj];
      end
      if (rho >= 0) thr = (rho * mx + (256 - rho) * (sm / nb)) / 256;
      else          thr = ((-rho) * mn + (256 + rho) * (sm / nb)) / 256;
      for (int bj = 0; bj < nb; bj++) begin
        mask[bi*nb+bj] = !(th[bi*nb+bj] < thr);
        kept += mask[bi*nb+bj];
      end
    end
    pruned = (thead < tau);
    for (int i = 0; i < L * D; i++) out[i] = 0;
    if (pruned) begin
      kept = 0;
      return;
    end
    for (int r = 0; r < L; r++) begin
      longint sc [];
      longint ex [];
      longint sum, rc, acc;
      int sh;
      sc = new[L];
      ex = new[L];
      sum = 0;
      for (int c = 0; c < L; c++) begin
        if (mask[(r/2)*nb + c/2]) begin
          longint f;
          f = 0;
          for (int d = 0; d < D; d++)
            f += ip(q[r*D+d]) * fp(k[c*D+d]) + fp(q[r*D+d]) * ip(k[c*D+d]);
          sc[c] = (iatt[r*L+c] * 256 + f) >>> scale_shift;
          ex[c] = exp_q16(sc[c]);
          sum += ex[c];
        end else ex[c] = 0;
      end
      recip_of(sum, rc, sh);
      for (int c = 0; c < L; c++) ex[c] = prob_of(ex[c], rc, sh);
      for (int d = 0; d < D; d++) begin
        acc = 0;
        for (int c = 0; c < L; c++) acc += ex[c] * v[c*D+d];
        acc = acc >>> 8;
        if (acc > 32767) acc = 32767;
        if (acc < -32768) acc = -32768;
        out[r*D+d] = acc;
      end
    end
  endfunction

endpackage
