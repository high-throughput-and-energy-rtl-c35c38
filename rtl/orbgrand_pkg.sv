// orbgrand_pkg: constants and helper functions shared by the ORBGRAND decoder.
//
// The default sizes are those of the decoder evaluated at n = 128: up to 32 parity
// rows (code rates 0.75 .. 1), 5-bit LLRs, logistic weights up to 96 and at most
// 8 flipped bits per test error pattern.  The functions below give the sizes of the
// shift registers and buses that follow from Lemma 1 of the design: for a partition
// of a residual weight R into i distinct ordered parts, the i-th (smallest) part
// x satisfies i*x + i*(i-1)/2 <= R.
// The *_DEF constants are the parameter defaults of every module; a linter that
// reads the package on its own reports them as unused.
package orbgrand_pkg;

  // Decoder-wide defaults.
  localparam int unsigned N_DEF        = 128;  // code length n
  localparam int unsigned NMK_DEF      = 32;   // maximum n-k (rate >= 0.75)
  localparam int unsigned Q_DEF        = 5;    // LLR bits (sign + 4 magnitude bits)
  localparam int unsigned LW_DEF       = 96;   // maximum logistic weight
  localparam int unsigned PMAX_DEF     = 8;    // maximum Hamming weight of a pattern
  localparam int unsigned SEGMENTS_DEF = 1;    // sorter segments S

  // Step modes of the decoder core.
  typedef enum logic [1:0] {
    MODE_HW1 = 2'd0,   // all Hamming-weight-1 patterns
    MODE_P23 = 2'd1,   // P = 2 bus plus P = 3 buses, s_comp = s_c
    MODE_PGT = 2'd2    // P > 3: P = 3 buses only, s_comp = s_c ^ s_l4 ^ ... ^ s_lP
  } step_mode_e;

  // Largest part lambda_i (i >= 2) of a distinct partition of r into i parts,
  // Lemma 1 written without division; 0 if r is too small for i parts.
  function automatic int lam_max(input int r, input int i);
    int x;
    x = (2 * r - i * (i - 1)) / (2 * i);
    if (2 * r - i * (i - 1) < 2 * i) return 0;
    return x;
  endfunction

  // Number of P = 3 buses: lambda3max at the largest logistic weight.
  function automatic int num_p3_buses(input int lw);
    return lam_max(lw, 3);
  endfunction

  // Candidates on P = 3 bus t (lambda_3 = lo + t) at the worst case mr = LW, lo = 1:
  // lambda_2 = lambda_3 + 1 + u with 2u < LW - 5 - 3t.
  function automatic int p3_bus_len(input int lw, input int t);
    int lim;
    lim = lw - 5 - 3 * t;
    if (lim <= 0) return 0;
    return (lim - 1) / 2 + 1;
  endfunction

  // Candidates on the P = 2 bus: lambda_2 = 1 + u with 2u < LW - 2.
  function automatic int p2_bus_len(input int lw);
    if (lw < 3) return 0;
    return (lw - 3) / 2 + 1;
  endfunction

  // Entries of SR1 / SR2: 2*(lambda3max+1) as in the architecture, or more if a
  // bus would reach beyond that (it does not for the default sizes).
  function automatic int sr12_len(input int lw);
    int need, t3;
    t3   = lam_max(lw, 3);
    need = 2 * (t3 + 1);
    if (p2_bus_len(lw) > need) need = p2_bus_len(lw);
    for (int t = 0; t < t3; t++) begin
      if (p3_bus_len(lw, t) > 0 && 2 * t + p3_bus_len(lw, t) + 2 > need)
        need = 2 * t + p3_bus_len(lw, t) + 2;
    end
    return need;
  endfunction

endpackage
