// aed_pkg -- constants, types and constant functions shared by the automorphism
// ensemble decoder (AED) for the polar code P(128,60).
//
// The code: length N = 2^7 = 128, K = 60 information bits.  Its information set is
// the one generated by the single minimal index 27 under the usual partial order of
// polar (decreasing monomial) codes: index j is an information bit iff, for every
// bit position t, j has at least as many ones in positions >= t as 27 has.  This
// yields exactly 60 indices.  A frozen mask bit is 1 for a frozen position.
//
// Automorphisms: block lower triangular affine (BLTA) maps z' = A z + b on the 7-bit
// binary index z (bit 0 = LSB), block profile (3,4): bits 0..2 form the first
// diagonal block, bits 3..6 the second, and A is zero above the block diagonal.
// The list BLTA_A holds 16 such matrices (row r of A as a 7-bit word, bit c = A[r][c]),
// picked once, offline, by the greedy data-driven selection described with the design
// (Eb/N0 = 3 dB, 600 noisy frames, 40 random candidates); entry 0 is the identity.
// An ensemble of M decoders uses the first M entries.  The offset b is 0 for all
// entries, because translations leave SC decoding unchanged.
//
// LLR and path-metric word widths are this implementation's choice: LLRs are 6-bit
// two's complement, saturated to the symmetric range +-31 after every f/g operation;
// path metrics are 12-bit unsigned and saturate at their maximum.
package aed_pkg;

  localparam int unsigned N_LOG = 7;
  localparam int unsigned N     = 1 << N_LOG;
  localparam int unsigned K     = 60;
  localparam int unsigned I_MIN = 27;
  localparam int unsigned M_MAX = 16;

  localparam int unsigned LLR_W = 6;
  localparam int unsigned PM_W  = 12;
  localparam int          LLR_MAX = (1 << (LLR_W - 1)) - 1;

  typedef logic signed [LLR_W-1:0] llr_t;
  typedef logic        [PM_W-1:0]  pm_t;

  // Node kinds of the pruned polar factor tree (Fast-SSC).
  typedef enum logic [2:0] {
    NK_SPLIT = 3'd0,   // ordinary node: f, left child, g, right child, combine
    NK_R0    = 3'd1,   // all bits frozen
    NK_R1    = 3'd2,   // no bit frozen
    NK_REP   = 3'd3,   // only the last bit is an information bit
    NK_SPC   = 3'd4    // only the first bit is frozen
  } node_kind_e;

  // ---------------------------------------------------------------- code set
  function automatic int unsigned popcount_from(input int unsigned v, input int unsigned t);
    int unsigned c = 0;
    for (int unsigned k = t; k < N_LOG; k++) c += (v >> k) & 1;
    return c;
  endfunction

  // 1 where index j is at or above I_MIN in the polar partial order.
  function automatic logic [N-1:0] info_mask();
    logic [N-1:0] m = '0;
    for (int unsigned j = 0; j < N; j++) begin
      m[j] = 1'b1;
      for (int unsigned t = 0; t < N_LOG; t++)
        if (popcount_from(j, t) < popcount_from(I_MIN, t)) m[j] = 1'b0;
    end
    return m;
  endfunction

  localparam logic [N-1:0] FROZEN_MASK = ~info_mask();

  // ------------------------------------------------------------ tree shape
  function automatic int unsigned count_ones(input int unsigned ns, input logic [N-1:0] m);
    int unsigned c = 0;
    for (int unsigned i = 0; i < ns; i++) c += int'(m[i]);
    return c;
  endfunction

  // Kind of a node of size ns whose frozen bits are m[ns-1:0].
  function automatic node_kind_e classify(input int unsigned ns, input logic [N-1:0] m);
    int unsigned nf = count_ones(ns, m);
    if (nf == ns)                          return NK_R0;
    if (nf == 0)                           return NK_R1;
    if (nf == ns - 1 && !m[ns-1])          return NK_REP;
    if (nf == 1 && m[0])                   return NK_SPC;
    return NK_SPLIT;
  endfunction

  // Pipeline latency (clock cycles) of a node: a Rate-0 node costs nothing (its
  // result is known); any other subtree of size <= reg_size, or any special node,
  // is evaluated in one cycle and registered; larger split nodes add their children.
  function automatic int unsigned node_lat(input int unsigned ns, input logic [N-1:0] m,
                                           input int unsigned reg_size);
    node_kind_e k = classify(ns, m);
    if (k == NK_R0) return 0;
    if (ns <= reg_size || k != NK_SPLIT) return 1;
    return node_lat(ns / 2, m, reg_size) + node_lat(ns / 2, m >> (ns / 2), reg_size);
  endfunction

  // ------------------------------------------------------------- LLR maths
  function automatic llr_t sat_llr(input int v);
    if (v >  LLR_MAX) return llr_t'(LLR_MAX);
    if (v < -LLR_MAX) return llr_t'(-LLR_MAX);
    return llr_t'(v);
  endfunction

  // min-sum f function: sign(a) sign(b) min(|a|,|b|)
  function automatic llr_t f_minsum(input llr_t a, input llr_t b);
    int ma = (a < 0) ? -int'(a) : int'(a);
    int mb = (b < 0) ? -int'(b) : int'(b);
    int mn = (ma < mb) ? ma : mb;
    return sat_llr(((a < 0) != (b < 0)) ? -mn : mn);
  endfunction

  // g function: (1-2c) a + b
  function automatic llr_t g_func(input llr_t a, input llr_t b, input logic c);
    return sat_llr(c ? int'(b) - int'(a) : int'(b) + int'(a));
  endfunction

  function automatic int unsigned abs_llr(input llr_t a);
    return (a < 0) ? int'(-int'(a)) : int'(a);
  endfunction

  function automatic pm_t pm_add(input pm_t pm, input int unsigned inc);
    int unsigned s = int'(pm) + inc;
    return (s > (1 << PM_W) - 1) ? '1 : pm_t'(s);
  endfunction

  // ------------------------------------------------------------ automorphisms
  localparam logic [6:0] BLTA_A [M_MAX][N_LOG] = '{
    '{7'h01, 7'h02, 7'h04, 7'h08, 7'h10, 7'h20, 7'h40},
    '{7'h04, 7'h01, 7'h02, 7'h5f, 7'h3b, 7'h6b, 7'h7f},
    '{7'h07, 7'h03, 7'h05, 7'h12, 7'h60, 7'h50, 7'h5d},
    '{7'h04, 7'h06, 7'h03, 7'h3e, 7'h1c, 7'h52, 7'h15},
    '{7'h02, 7'h05, 7'h01, 7'h5b, 7'h2e, 7'h6b, 7'h16},
    '{7'h01, 7'h04, 7'h06, 7'h3c, 7'h5a, 7'h2b, 7'h25},
    '{7'h06, 7'h03, 7'h07, 7'h41, 7'h5f, 7'h64, 7'h13},
    '{7'h05, 7'h03, 7'h01, 7'h62, 7'h1e, 7'h44, 7'h76},
    '{7'h06, 7'h02, 7'h07, 7'h12, 7'h5a, 7'h55, 7'h2b},
    '{7'h02, 7'h03, 7'h06, 7'h36, 7'h3a, 7'h61, 7'h14},
    '{7'h06, 7'h02, 7'h03, 7'h0e, 7'h42, 7'h28, 7'h10},
    '{7'h04, 7'h06, 7'h01, 7'h58, 7'h0e, 7'h2d, 7'h64},
    '{7'h04, 7'h02, 7'h07, 7'h6e, 7'h7d, 7'h33, 7'h39},
    '{7'h04, 7'h05, 7'h02, 7'h6e, 7'h59, 7'h39, 7'h41},
    '{7'h06, 7'h01, 7'h04, 7'h48, 7'h60, 7'h37, 7'h40},
    '{7'h06, 7'h01, 7'h02, 7'h6a, 7'h22, 7'h19, 7'h13}
  };

  // pi_m(z) = A_m z (over GF(2)); decoder m sees y'[pi_m(i)] = y[i].
  function automatic int unsigned blta_map(input int unsigned m, input int unsigned z);
    int unsigned zp = 0;
    for (int unsigned r = 0; r < N_LOG; r++)
      zp |= int'(^(BLTA_A[m][r] & 7'(z))) << r;
    return zp;
  endfunction

endpackage
