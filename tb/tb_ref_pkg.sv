// tb_ref_pkg: reference models for the testbenches, written independently of the RTL.
//
// max* is computed here from its definitions: the log-MAP correction with $ln/$exp (rounded
// to 1/8), the constant and linear corrections from their thresholds and slopes. The trellis
// is enumerated branch by branch from the encoder equations of the 3GPP constituent code
// (feedback 1+D^2+D^3, parity 1+D+D^3), and the forward and backward recursions are written
// directly as the maxima over all branches into, or out of, a state.
package tb_ref_pkg;
  typedef int metrics_t [8];

  function automatic int corr_ref(input int d, input int mode);
    real z;
    case (mode)
      0: return 0;
      1: return (d <= 20) ? ((20 - d) * 64) / 256 : 0;          // 0.25*(2.5-|d|)
      2: return (d <= 12) ? 4 : 0;                               // 0.5 if |d|<=1.5
      default: begin
        z = 8.0 * $ln(1.0 + $exp(-real'(d) / 8.0));
        return $rtoi(z + 0.5);
      end
    endcase
  endfunction

  function automatic int mstar(input int x, input int y, input int mode);
    int d;
    d = (x > y) ? x - y : y - x;
    return ((x > y) ? x : y) + corr_ref(d, mode);
  endfunction

  function automatic int nxt_state(input int s, input int u);
    int r1, r2, r3, a;
    r1 = (s >> 2) & 1; r2 = (s >> 1) & 1; r3 = s & 1;
    a  = u ^ r2 ^ r3;
    return (a << 2) | (r1 << 1) | r2;
  endfunction
  function automatic int par_bit(input int s, input int u);
    int r1, r2, r3, a;
    r1 = (s >> 2) & 1; r2 = (s >> 1) & 1; r3 = s & 1;
    a  = u ^ r2 ^ r3;
    return a ^ r1 ^ r3;
  endfunction
  function automatic int gamma_ref(input int s, input int u, input int la, input int ls, input int lp);
    return (u ? 1 : -1) * (la + ls) + (par_bit(s, u) ? 1 : -1) * lp;
  endfunction

  function automatic metrics_t fwd_ref(input metrics_t a, input int la, input int ls, input int lp, input int mode);
    metrics_t r;
    int cand [8][$];
    for (int s = 0; s < 8; s++)
      for (int u = 0; u < 2; u++)
        cand[nxt_state(s, u)].push_back(a[s] + gamma_ref(s, u, la, ls, lp));
    for (int t = 0; t < 8; t++) r[t] = mstar(cand[t][0], cand[t][1], mode);
    return r;
  endfunction

  function automatic metrics_t bwd_ref(input metrics_t b, input int la, input int ls, input int lp, input int mode);
    metrics_t r;
    for (int s = 0; s < 8; s++)
      r[s] = mstar(b[nxt_state(s, 0)] + gamma_ref(s, 0, la, ls, lp),
                   b[nxt_state(s, 1)] + gamma_ref(s, 1, la, ls, lp), mode);
    return r;
  endfunction

  function automatic int max7_ref(input int x [7], input int mode);
    int acc;
    acc = x[6];
    for (int i = 5; i >= 0; i--) acc = mstar(x[i], acc, mode);
    return acc;
  endfunction

  function automatic int lat_ref(input int mode);
    case (mode)
      0: return 1;
      1: return 3;
      2: return 2;
      default: return 3;
    endcase
  endfunction
endpackage
