// ausn_ref_pkg: reference models for the AUSN testbenches. They work on real
// numbers and lists of exponents, written from the definitions of the code,
// the superposition algorithm and the rounding scheme, not from the RTL.
package ausn_ref_pkg;

  // Value of a code relative to 2^power_j.
  function automatic real ref_value(int code, int sb);
    int  d, p0, p1, s;
    real v;
    s  = (code >> 5) & 1;
    d  = code % 32;
    p0 = d / (2 ** sb);
    p1 = d % (2 ** sb);
    if (p0 == 0) return 0.0;
    v = 2.0 ** (-p0);
    if (p1 != 0) v = v + (2.0 ** (-p0)) * (2.0 ** (-p1));
    return s ? -v : v;
  endfunction

  // Superposition algorithm, two tiers, round down at each tier.
  function automatic int ref_quant(real v, int sb);
    int  p0, p1, p0max, p1max, s;
    real rem;
    s     = (v < 0.0);
    rem   = s ? -v : v;
    p0max = 2 ** (5 - sb) - 1;
    p1max = 2 ** sb - 1;
    p0 = 0;
    for (int p = 1; p <= p0max; p++)
      if (2.0 ** (-p) <= rem) begin p0 = p; break; end
    if (p0 == 0) return 0;
    rem = rem / (2.0 ** (-p0)) - 1.0;
    p1 = 0;
    for (int p = 1; p <= p1max; p++)
      if (2.0 ** (-p) <= rem) begin p1 = p; break; end
    return s * 32 + p0 * (2 ** sb) + p1;
  endfunction

  // Rounding scheme on a list of exponents (terms 2^n); returns the kept
  // exponents, largest first.
  function automatic void ref_round(input int exps[$], input int bsub,
                                    output int kept[$], output int st1, output int st2, output int st3);
    int cnt[int];
    int lst[$];
    int n, m;
    bit changed;
    st1 = 0; st2 = 0; st3 = 0;
    foreach (exps[i]) if (cnt.exists(exps[i])) cnt[exps[i]]++; else cnt[exps[i]] = 1;
    // Step 1: maximal runs of present exponents of length >= bsub + 2.
    lst.delete();
    foreach (cnt[k]) lst.push_back(k);
    lst.sort();
    begin
      int i;
      i = 0;
      while (i < lst.size()) begin
        int j;
        j = i;
        while (j + 1 < lst.size() && lst[j+1] == lst[j] + 1) j++;
        if (j - i + 1 >= bsub + 2) begin
          n = lst[i]; m = lst[j];
          for (int k = n; k <= m; k++) cnt[k]--;
          if (cnt.exists(m + 1)) cnt[m+1]++; else cnt[m+1] = 1;
          st1++;
        end
        i = j + 1;
      end
    end
    // Step 2: merge equal pairs until none is left.
    do begin
      changed = 0;
      foreach (cnt[k]) if (cnt[k] >= 2) begin
        cnt[k] -= 2;
        if (cnt.exists(k + 1)) cnt[k+1]++; else cnt[k+1] = 1;
        changed = 1; st2++;
        break;
      end
    end while (changed);
    lst.delete();
    foreach (cnt[k]) if (cnt[k] > 0) lst.push_back(k);
    lst.rsort();
    // Steps 3/4: drop the smallest while more than bsub + 1 remain.
    while (lst.size() >= bsub + 2) begin
      void'(lst.pop_back());
      st3++;
    end
    kept = lst;
  endfunction

  // One power-domain lane: product terms, rounding scheme, code for the next
  // layer. Reports which rounding steps acted and whether the result clipped.
  function automatic int ref_lane(input int a, input int w, input int asb, input int wsb,
                                  input int osb, input int ps,
                                  output int s1, output int s2, output int s3, output bit sat);
    int da, dw, a0, a1, w0, w1, sg;
    int ns[$];
    int kept[$];
    real v;
    s1 = 0; s2 = 0; s3 = 0; sat = 0;
    da = a % 32; dw = w % 32;
    a0 = da / (2 ** asb); a1 = da % (2 ** asb);
    w0 = dw / (2 ** wsb); w1 = dw % (2 ** wsb);
    sg = ((a >> 5) & 1) ^ ((w >> 5) & 1);
    if (a0 == 0 || w0 == 0) return 0;
    ns.push_back(127 - (a0 + w0));
    if (w1 != 0) ns.push_back(127 - (a0 + w0 + w1));
    if (a1 != 0) ns.push_back(127 - (a0 + a1 + w0));
    if (a1 != 0 && w1 != 0) ns.push_back(127 - (a0 + a1 + w0 + w1));
    ref_round(ns, (osb != 0) ? 1 : 0, kept, s1, s2, s3);
    v = 0.0;
    foreach (kept[i]) v += 2.0 ** (kept[i] - 127);
    v = v * (2.0 ** (-ps));
    sat = (v >= 1.0);
    return ref_quant(sg ? -v : v, osb);
  endfunction

endpackage
