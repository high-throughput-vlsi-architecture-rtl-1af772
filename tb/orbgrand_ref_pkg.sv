// orbgrand_ref_pkg: behavioural reference model of the ORBGRAND decoder, for testbenches.
//
// ref_decode() decodes one frame with plain loops over integer partitions, in the same
// test order as the hardware schedule: hard decision first; then all 1-bit patterns of
// rank <= min(LW_max, n); then for LW = 3..LW_max: the 2-part partitions (lambda_2
// ascending), the 3-part ones (lambda_3, then lambda_2 ascending), and the partitions
// with 4..P_max parts, grouped by their smallest parts lambda_4 > .. > lambda_P
// (lambda_P slowest).  It returns the corrected word, the success flag, the number of
// flipped bits and the cycle count the hardware must report: 1 for a hard-decision hit,
// otherwise log2(n) cycles (check plus sorting) plus the number of steps up to and
// including the one that hits (or all steps when the frame is abandoned).  Reliability
// ranks are taken from the magnitudes with ties broken by the bit index.
package orbgrand_ref_pkg;

  typedef struct {
    bit          ok;
    int          hw;
    int          cycles;
    bit          c [];
    int          parts [$];   // reliability ranks of the flipped bits
  } ref_result_t;

  function automatic ref_result_t ref_decode(input int n, input int lwmax, input int pmax,
                                             input bit sgn [], input int mag [],
                                             input longint unsigned hcol []);
    ref_result_t      res;
    int               pos [];
    longint unsigned  s [];
    longint unsigned  syn, sc;
    int               logn, step, one, key_a, key_b, tmp;
    bit               found;
    int               l [$];

    res.c = new [n];
    for (int i = 0; i < n; i++) res.c[i] = sgn[i];
    res.ok = 0; res.hw = 0; res.cycles = 0;
    syn = 0;
    for (int i = 0; i < n; i++) if (sgn[i]) syn ^= hcol[i];
    if (syn == 0) begin
      res.ok = 1; res.cycles = 1;
      return res;
    end
    logn = $clog2(n);
    // insertion sort by (magnitude, index)
    pos = new [n];
    for (int i = 0; i < n; i++) pos[i] = i;
    for (int i = 1; i < n; i++) begin
      for (int j = i; j > 0; j--) begin
        key_a = mag[pos[j-1]] * 4096 + pos[j-1];
        key_b = mag[pos[j]] * 4096 + pos[j];
        if (key_a > key_b) begin tmp = pos[j]; pos[j] = pos[j-1]; pos[j-1] = tmp; end
      end
    end
    s = new [n + 1];
    s[0] = 0;
    for (int j = 1; j <= n; j++) s[j] = hcol[pos[j-1]];

    found = 0;
    step  = 1;
    one   = (lwmax < n) ? lwmax : n;
    for (int i = 1; i <= one && !found; i++) begin
      if ((syn ^ s[i]) == 0) begin found = 1; l.push_back(i); end
    end
    for (int lw = 3; lw <= lwmax && !found; lw++) begin
      // step: sizes 2 and 3
      step++;
      for (int l2 = 1; lw - l2 > l2 && !found; l2++)
        if ((syn ^ s[lw-l2] ^ s[l2]) == 0) begin found = 1; l = '{lw - l2, l2}; end
      for (int l3 = 1; l3 < lw && !found; l3++)
        for (int l2 = l3 + 1; lw - l3 - l2 > l2 && !found; l2++)
          if ((syn ^ s[lw-l3-l2] ^ s[l2] ^ s[l3]) == 0) begin
            found = 1; l = '{lw - l3 - l2, l2, l3};
          end
      // steps: sizes 4..pmax
      for (int p = 4; p <= pmax && !found; p++) begin
        for (int l6 = (p >= 6 ? 1 : 0); l6 <= (p >= 6 ? lw : 0) && !found; l6++)
        for (int l5 = (p >= 5 ? l6 + 1 : 0); l5 <= (p >= 5 ? lw : 0) && !found; l5++)
        for (int l4 = l5 + 1; l4 <= lw && !found; l4++) begin
          int sum, t;
          sum = l4 + l5 + l6;
          if (lw - sum < 3 * l4 + 6) continue;
          step++;
          t  = lw - sum;
          sc = syn ^ s[l4] ^ s[l5] ^ s[l6];
          for (int l3 = l4 + 1; l3 < t && !found; l3++)
            for (int l2 = l3 + 1; t - l3 - l2 > l2 && !found; l2++)
              if ((sc ^ s[t-l3-l2] ^ s[l2] ^ s[l3]) == 0) begin
                found = 1; l = '{t - l3 - l2, l2, l3, l4};
                if (l5 > 0) l.push_back(l5);
                if (l6 > 0) l.push_back(l6);
              end
        end
      end
    end
    res.cycles = logn + step;
    if (found) begin
      res.ok = 1;
      res.hw = l.size();
      res.parts = l;
      foreach (l[q]) res.c[pos[l[q]-1]] = !res.c[pos[l[q]-1]];
    end
    return res;
  endfunction

endpackage
