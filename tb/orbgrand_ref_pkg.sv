// orbgrand_ref_pkg: behavioural reference model of the ORBGRAND decoder, used by
// the testbenches.
//
// It decodes one word the slow, obvious way: sort the bits by (|y|, position), with
// the segmented interleaving when S > 1, then walk through the test error patterns
// in the decoder's schedule and return the first whose syndrome cancels s_c.  The
// schedule is written here as plain nested loops over the partition parts
// lambda_PMAX .. lambda_4, with the Lemma-1 upper bound in its division form
// floor((2R - i(i-1)) / 2i); the RTL instead steps an odometer with a
// multiplication-only bound.  The model also counts the decoder's clock cycles:
// 1 for a codeword, log2(N/S) + 1 for the single-bit step, plus one per later step.
package orbgrand_ref_pkg;

  localparam int MAXN = 128;

  typedef bit [63:0] syn_t;

  typedef struct {
    bit        found;
    int        hw;
    bit [MAXN-1:0] c_hat;
    int        latency;
    int        lam [8];        // 1-based ranks of the flipped bits, 0 = unused
  } ref_result_t;

  function automatic int clog2(input int v);
    int r;
    r = 0;
    while ((1 << r) < v) r++;
    return r;
  endfunction

  function automatic int lmax(input int r, input int i);
    int a;
    a = 2 * r - i * (i - 1);
    if (a < 2 * i) return 0;
    return a / (2 * i);
  endfunction

  // Reliability order: ind[j] = original position of rank j (0-based).
  function automatic void sort_order(input int n, input int s, input int mag [MAXN],
                                     output int ind [MAXN]);
    int sl;
    int seg [MAXN];
    sl = n / s;
    for (int g = 0; g < s; g++) begin
      for (int j = 0; j < sl; j++) seg[j] = g * sl + j;
      // insertion sort by (magnitude, position)
      for (int a = 1; a < sl; a++) begin
        int b, v;
        v = seg[a];
        b = a - 1;
        while (b >= 0 && (mag[seg[b]] > mag[v] || (mag[seg[b]] == mag[v] && seg[b] > v))) begin
          seg[b+1] = seg[b];
          b--;
        end
        seg[b+1] = v;
      end
      for (int j = 0; j < sl; j++) ind[j*s + g] = seg[j];
    end
  endfunction

  function automatic ref_result_t decode(input int n, input int lw, input int pmax, input int s,
                                         input syn_t hcol [MAXN], input bit [MAXN-1:0] yhat,
                                         input int mag [MAXN]);
    ref_result_t res;
    int   ind [MAXN];
    syn_t sy  [MAXN];
    syn_t sc;
    int   cyc;
    res.found = 0; res.hw = 0; res.c_hat = yhat; res.latency = 0;
    for (int i = 0; i < 8; i++) res.lam[i] = 0;
    sc = '0;
    for (int i = 0; i < n; i++) if (yhat[i]) sc ^= hcol[i];
    if (sc == '0) begin
      res.found = 1; res.latency = 1;
      return res;
    end
    sort_order(n, s, mag, ind);
    for (int j = 0; j < n; j++) sy[j] = hcol[ind[j]];
    cyc = clog2(n / s) + 1;
    for (int j = 0; j < n; j++) begin
      if (sy[j] == sc) begin
        res.found = 1; res.hw = 1; res.lam[0] = j + 1; res.latency = cyc;
        res.c_hat[ind[j]] ^= 1'b1;
        return res;
      end
    end
    for (int m = 3; m <= lw; m++) begin
      // ---- one step: P = 2 and P = 3
      cyc++;
      for (int l2 = 1; 2 * l2 < m; l2++) begin
        int l1;
        l1 = m - l2;
        if (l1 > l2 && l1 <= n && (sy[l1-1] ^ sy[l2-1] ^ sc) == '0) begin
          res.found = 1; res.hw = 2; res.lam[0] = l1; res.lam[1] = l2; res.latency = cyc;
          res.c_hat[ind[l1-1]] ^= 1'b1; res.c_hat[ind[l2-1]] ^= 1'b1;
          return res;
        end
      end
      if (check3(n, m, 1, sc, sy, ind, cyc, 3, res)) return res;
      // ---- P > 3: one step per (lambda_P .. lambda_4)
      for (int p = 4; p <= pmax; p++) begin
        int l [9];
        for (int i = 0; i < 9; i++) l[i] = 0;
        // nested loops over levels 8 .. 4; inactive levels (i > p) run once
        for (int l8 = (p >= 8) ? 1 : 0; l8 <= ((p >= 8) ? lmax(m, 8) : 0); l8++)
        for (int l7 = (p > 7) ? l8 + 1 : ((p == 7) ? 1 : 0);
             l7 <= ((p >= 7) ? lmax(m - l8, 7) : 0); l7++)
        for (int l6 = (p > 6) ? l7 + 1 : ((p == 6) ? 1 : 0);
             l6 <= ((p >= 6) ? lmax(m - l8 - l7, 6) : 0); l6++)
        for (int l5 = (p > 5) ? l6 + 1 : ((p == 5) ? 1 : 0);
             l5 <= ((p >= 5) ? lmax(m - l8 - l7 - l6, 5) : 0); l5++)
        for (int l4 = (p > 4) ? l5 + 1 : 1;
             l4 <= lmax(m - l8 - l7 - l6 - l5, 4); l4++) begin
          syn_t sx;
          int   rest;
          l[8] = l8; l[7] = l7; l[6] = l6; l[5] = l5; l[4] = l4;
          cyc++;
          sx   = sc;
          rest = m;
          for (int i = 4; i <= p; i++) begin
            sx ^= sy[l[i]-1];
            rest -= l[i];
          end
          if (check3(n, rest, l[4] + 1, sx, sy, ind, cyc, p, res)) begin
            for (int i = 4; i <= p; i++) begin
              res.lam[i-1] = l[i];
              res.c_hat[ind[l[i]-1]] ^= 1'b1;
            end
            return res;
          end
        end
      end
    end
    res.latency = cyc;
    return res;
  endfunction

  // All (l1 > l2 > l3 >= lo) with l1 + l2 + l3 = r, by l3 then l2 ascending.
  function automatic bit check3(input int n, input int r, input int lo, input syn_t sx,
                                input syn_t sy [MAXN], input int ind [MAXN], input int cyc,
                                input int hw, inout ref_result_t res);
    for (int l3 = lo; 3 * l3 + 3 <= r; l3++) begin
      for (int l2 = l3 + 1; r - l3 - l2 > l2; l2++) begin
        int l1;
        l1 = r - l3 - l2;
        if (l1 <= n && (sx ^ sy[l1-1] ^ sy[l2-1] ^ sy[l3-1]) == '0) begin
          res.found = 1; res.hw = hw; res.latency = cyc;
          res.lam[0] = l1; res.lam[1] = l2; res.lam[2] = l3;
          res.c_hat[ind[l1-1]] ^= 1'b1; res.c_hat[ind[l2-1]] ^= 1'b1; res.c_hat[ind[l3-1]] ^= 1'b1;
          return 1;
        end
      end
    end
    return 0;
  endfunction

endpackage
