// maxdnn_ref_pkg: reference models used by the testbenches.
//
// Written from the defining rules, not from the RTL structure:
//   roup_ref   ROUP(A,B) = sum_{j>=P} round(A, r_j) * d_j * 4^j with d_j the
//              radix-4 digit of B, round(A,r) = (floor(A/2^r) + a_{r-1})*2^r
//              and r_j = min(max(R - 2j, 0), 7).
//   unit_ref   product of multiplier u (M1..M3) with the default P/R values.
//   map_ref    multiplier chosen for tap t under a layer configuration.
//   skip_ref   KLMS decision for one weight.
package maxdnn_ref_pkg;
  import maxdnn_pkg::*;

  localparam int DEF_P[3] = '{0, 1, 2};
  localparam int DEF_R[3] = '{3, 4, 6};

  function automatic int roup_ref(input int av, input int bv, input int pp, input int rr);
    int sum, r, ar, d, bb, abits;
    sum = 0;
    bb = bv & 32'hFF;
    abits = av & 32'hFF;
    for (int j = pp; j < 4; j++) begin
      r = rr - 2 * j;
      if (r < 0) r = 0;
      if (r > 7) r = 7;
      ar = av >>> r;
      if (r > 0) ar = ar + ((abits >> (r - 1)) & 1);
      ar = ar * (1 << r);
      d = -2 * ((bb >> (2 * j + 1)) & 1) + ((bb >> (2 * j)) & 1)
          + ((j == 0) ? 0 : ((bb >> (2 * j - 1)) & 1));
      sum += ar * d * (1 << (2 * j));
    end
    return sum;
  endfunction

  function automatic int unit_ref(input int u, input int av, input int bv);
    if (u < 0 || u > 2) return 0;
    return roup_ref(av, bv, DEF_P[u], DEF_R[u]);
  endfunction

  function automatic int grp3(input int idx, input int b1, input int b2);
    return (idx < b1) ? 0 : (idx < b2) ? 1 : 2;
  endfunction

  function automatic int map_ref(input layer_cfg_t c, input int filt, input int chan, input int t);
    case (c.approach)
      APPR_LLAM:      return int'(c.layer_axm);
      APPR_FLAM:      return int'(c.group_axm[grp3(filt, int'(c.bound1), int'(c.bound2))]);
      APPR_KLAM_CHAN: return int'(c.group_axm[grp3(chan, int'(c.bound1), int'(c.bound2))]);
      APPR_KLAM_ROW:  return int'(c.group_axm[t / 3]);
      APPR_KLAM_COL:  return int'(c.group_axm[t % 3]);
      default:        return int'(c.layer_axm);
    endcase
  endfunction

  function automatic bit skip_ref(input layer_cfg_t c, input int w);
    int k, mu, sg;
    if (!c.klms_en) return 1'b0;
    k  = c.klms_2sigma ? 2 : 1;
    mu = int'(c.klms_mu);
    sg = int'(c.klms_sigma);
    return (w < mu - k * sg) || (w > mu + k * sg);
  endfunction

endpackage
