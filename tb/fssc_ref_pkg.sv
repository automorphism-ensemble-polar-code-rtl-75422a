// fssc_ref_pkg -- behavioural reference models for the testbenches.
//
// Written independently of the RTL's recursive structure: the Fast-SSC decoder is
// modelled as an iterative walk over the leaves of the pruned tree (alpha is
// recomputed from the root for each leaf, partial sums of completed left siblings
// are kept per stage), the information set is built by closing {27} under the two
// elementary moves of the polar partial order, and the polar encoder is the usual
// butterfly.  Only the automorphism list (aed_pkg::BLTA_A) and the word widths are
// shared with the RTL.
package fssc_ref_pkg;
  import aed_pkg::*;

  localparam int NMAX = 128;
  localparam int LMAX = 31;     // symmetric LLR range after f/g

  typedef int  llr_vec_t [NMAX];
  typedef bit  bit_vec_t [NMAX];

  function automatic int rsat(input int v);
    return v > LMAX ? LMAX : (v < -LMAX ? -LMAX : v);
  endfunction
  function automatic int rabs(input int v);
    return v < 0 ? -v : v;
  endfunction
  function automatic int rf(input int a, input int b);
    int m = rabs(a) < rabs(b) ? rabs(a) : rabs(b);
    return rsat(((a < 0) ^ (b < 0)) ? -m : m);
  endfunction
  function automatic int rg(input int a, input int b, input bit c);
    return rsat(c ? b - a : b + a);
  endfunction

  // information set of P(128,60): closure of {27} under "set a zero bit" and
  // "move a one bit up by one position"
  function automatic bit_vec_t ref_frozen();
    bit in_i [NMAX];
    bit_vec_t fr;
    bit changed = 1;
    foreach (in_i[j]) in_i[j] = (j == 27);
    while (changed) begin
      changed = 0;
      for (int j = 0; j < NMAX; j++) if (in_i[j])
        for (int b = 0; b < 7; b++) begin
          int s;
          if (!((j >> b) & 1)) begin
            s = j | (1 << b);
            if (!in_i[s]) begin in_i[s] = 1; changed = 1; end
          end
          if (b < 6 && ((j >> b) & 1) && !((j >> (b + 1)) & 1)) begin
            s = (j & ~(1 << b)) | (1 << (b + 1));
            if (!in_i[s]) begin in_i[s] = 1; changed = 1; end
          end
        end
    end
    foreach (fr[j]) fr[j] = !in_i[j];
    return fr;
  endfunction

  // x = u G, G = [1 0; 1 1]^(x n), over the first 2^nlog entries
  function automatic bit_vec_t polar_encode(input int nlog, input bit_vec_t u);
    bit_vec_t x = u;
    for (int s = 0; s < nlog; s++)
      for (int i = 0; i < (1 << nlog); i++)
        if (!((i >> s) & 1)) x[i] = x[i] ^ x[i + (1 << s)];
    return x;
  endfunction

  // pi_m(z) = A_m z over GF(2), bit by bit
  function automatic int ref_perm(input int m, input int z);
    int zp = 0;
    for (int r = 0; r < 7; r++) begin
      bit acc = 0;
      for (int c = 0; c < 7; c++) acc ^= BLTA_A[m][r][c] & ((z >> c) & 1);
      zp |= int'(acc) << r;
    end
    return zp;
  endfunction

  // kind of the node [lo, lo+ns): 0 split, 1 rate0, 2 rate1, 3 rep, 4 spc
  function automatic int ref_kind(input bit_vec_t fr, input int lo, input int ns);
    int nf = 0;
    for (int i = 0; i < ns; i++) nf += fr[lo+i];
    if (nf == ns) return 1;
    if (nf == 0) return 2;
    if (nf == ns - 1 && !fr[lo+ns-1]) return 3;
    if (nf == 1 && fr[lo]) return 4;
    return 0;
  endfunction

  // Fast-SSC decoding with path metric; counts of leaves that changed the PM are
  // accumulated into stats[kind] for coverage reporting.
  task automatic ref_decode(input int nlog, input bit_vec_t fr, input llr_vec_t llr,
                            output bit_vec_t x, output int pm, inout int stats [5]);
    int alpha [8][NMAX];
    bit bl    [8][NMAX];
    bit cur   [NMAX];
    bit nxt   [NMAX];
    int n = 1 << nlog;
    int lo = 0;
    pm = 0;
    x = '{default: 0};
    for (int i = 0; i < n; i++) alpha[nlog][i] = llr[i];
    while (lo < n) begin
      int s = nlog, k, ns, t, inc;
      while (s > 0 && (lo % (1 << s)) != 0) s--;
      while (s > 0 && ref_kind(fr, lo, 1 << s) == 0) s--;
      ns = 1 << s;
      for (t = nlog - 1; t >= s; t--)
        for (int i = 0; i < (1 << t); i++)
          alpha[t][i] = ((lo >> t) & 1) ? rg(alpha[t+1][i], alpha[t+1][i + (1 << t)], bl[t][i])
                                        : rf(alpha[t+1][i], alpha[t+1][i + (1 << t)]);
      k = ref_kind(fr, lo, ns);
      inc = 0;
      case (k)
        1: for (int i = 0; i < ns; i++) begin
             cur[i] = 0;
             if (alpha[s][i] < 0) inc += -alpha[s][i];
           end
        2: for (int i = 0; i < ns; i++) cur[i] = alpha[s][i] < 0;
        3: begin
             int sum = 0;
             for (int i = 0; i < ns; i++) sum += alpha[s][i];
             for (int i = 0; i < ns; i++) begin
               cur[i] = sum < 0;
               if ((alpha[s][i] < 0) != cur[i]) inc += rabs(alpha[s][i]);
             end
           end
        default: begin
             bit par = 0;
             int jm = 0;
             for (int i = 0; i < ns; i++) begin
               cur[i] = alpha[s][i] < 0;
               par ^= cur[i];
               if (rabs(alpha[s][i]) < rabs(alpha[s][jm])) jm = i;
             end
             if (par) begin cur[jm] = !cur[jm]; inc = rabs(alpha[s][jm]); end
           end
      endcase
      if (inc != 0) stats[k]++;
      pm += inc;
      t = s;
      while (t < nlog) begin
        if (((lo >> t) & 1) == 0) begin
          for (int i = 0; i < (1 << t); i++) bl[t][i] = cur[i];
          break;
        end
        for (int i = 0; i < (1 << t); i++) begin
          nxt[i] = bl[t][i] ^ cur[i];
          nxt[i + (1 << t)] = cur[i];
        end
        for (int i = 0; i < (2 << t); i++) cur[i] = nxt[i];
        t++;
      end
      if (t == nlog) for (int i = 0; i < n; i++) x[i] = cur[i];
      lo += ns;
    end
    if (pm > (1 << PM_W) - 1) pm = (1 << PM_W) - 1;
  endtask

  // one AED lane: permute, decode, unpermute
  task automatic ref_lane(input int m, input bit_vec_t fr, input llr_vec_t y,
                          output bit_vec_t x, output int pm, inout int stats [5]);
    llr_vec_t yp;
    bit_vec_t xp;
    for (int i = 0; i < NMAX; i++) yp[ref_perm(m, i)] = y[i];
    ref_decode(7, fr, yp, xp, pm, stats);
    for (int i = 0; i < NMAX; i++) x[i] = xp[ref_perm(m, i)];
  endtask

  // standard normal sample (Box-Muller)
  function automatic real gauss();
    real u1 = (real'($urandom) + 1.0) / 4294967297.0;
    real u2 = real'($urandom) / 4294967296.0;
    return $sqrt(-2.0 * $ln(u1)) * $cos(6.283185307179586 * u2);
  endfunction

  // BPSK over AWGN at Eb/N0 (dB), code rate r, quantised LLR: round(scale*2y/s^2)
  function automatic llr_vec_t channel(input bit_vec_t x, input real ebn0_db, input real r,
                                       input real scale);
    llr_vec_t q;
    real sig2 = 1.0 / (2.0 * r * (10.0 ** (ebn0_db / 10.0)));
    for (int i = 0; i < NMAX; i++) begin
      real yv = (x[i] ? -1.0 : 1.0) + $sqrt(sig2) * gauss();
      real l  = scale * 2.0 * yv / sig2;
      int  v  = int'(l);   // real-to-int conversion rounds to nearest
      q[i] = rsat(v);
    end
    return q;
  endfunction
endpackage
