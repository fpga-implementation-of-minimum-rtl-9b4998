// mmbebhe_ref_pkg: software reference model of the MMBEBHE engine, used by
// the testbenches to work out expected results independently of the RTL.
// Everything is computed with 64-bit integers and plain loops, one function
// per stage, following the same arithmetic rules as the hardware:
//   SMBE of an absent level = 0x7fffffff, the running value only moves on
//   levels present in the image, first present level uses
//   L*(n - f) - 2*sum, later ones prev + n - L*f (or, for the every-level
//   variant, the closed form n*(L + k) - L*C(k) - 2*sum);
//   threshold = lowest level of smallest |SMBE|;
//   map[k] = l + floor(D*c/n) + (D*c mod n > n/2), D = h - l, 0 if n = 0.
package mmbebhe_ref_pkg;

  localparam int L = 256;

  typedef longint     arr_t [L];

  function automatic void ref_hist(input byte unsigned img [], input int n,
                                   output arr_t freq, output longint sum);
    sum = 0;
    for (int k = 0; k < L; k++) freq[k] = 0;
    for (int i = 0; i < n; i++) begin
      freq[img[i]]++;
      sum += img[i];
    end
  endfunction

  // every_level = 0: running value only on present levels (default hardware)
  // every_level = 1: closed form of recursion (7) over every level,
  //                  SMBE(k) = n*(L + k) - L*C(k) - 2*sum, C = cumulative count
  function automatic void ref_smbe(input arr_t freq, input longint n, input longint sum,
                                   output arr_t smbe, input bit every_level = 0);
    bit     seen = 0;
    longint prev = 0;
    longint c    = 0;
    for (int k = 0; k < L; k++) begin
      c += freq[k];
      if (every_level) begin
        smbe[k] = (freq[k] == 0) ? 64'h7fff_ffff : n * (L + k) - L * c - 2 * sum;
      end else if (freq[k] == 0) begin
        smbe[k] = 64'h7fff_ffff;
      end else begin
        if (!seen) prev = L * (n - freq[k]) - 2 * sum;
        else       prev = prev + n - L * freq[k];
        seen    = 1;
        smbe[k] = prev;
      end
    end
  endfunction

  function automatic int ref_threshold(input arr_t smbe);
    longint best = 64'h7fff_ffff;
    int     t    = 0;
    for (int k = 0; k < L; k++) begin
      longint a = (smbe[k] < 0) ? -smbe[k] : smbe[k];
      if (a < best) begin
        best = a;
        t    = k;
      end
    end
    return t;
  endfunction

  function automatic void ref_cumu(input arr_t freq, input int l, input int h,
                                   inout arr_t cumu);
    longint run = 0;
    for (int k = l; k <= h; k++) begin
      run    += freq[k];
      cumu[k] = run;
    end
  endfunction

  function automatic void ref_map(input arr_t cumu, input int l, input int h, input longint n,
                                  inout arr_t map);
    for (int k = l; k <= h; k++) begin
      longint p = longint'(h - l) * cumu[k];
      if (n == 0) map[k] = l;
      else        map[k] = l + p / n + (((p % n) > (n / 2)) ? 1 : 0);
    end
  endfunction

  // whole engine: image -> threshold and map
  function automatic void ref_mmbebhe(input byte unsigned img [], input int n,
                                      output int t, output arr_t map,
                                      input bit every_level = 0);
    arr_t   freq, smbe, cumu;
    longint sum;
    ref_hist(img, n, freq, sum);
    ref_smbe(freq, n, sum, smbe, every_level);
    t = ref_threshold(smbe);
    for (int k = 0; k < L; k++) begin
      cumu[k] = 0;
      map[k]  = 0;
    end
    ref_cumu(freq, 0, t, cumu);
    ref_cumu(freq, t + 1, L - 1, cumu);
    ref_map(cumu, 0, t, cumu[t], map);
    ref_map(cumu, t + 1, L - 1, cumu[L-1], map);
  endfunction

endpackage
