// approx_mapper: decides which approximate multiplier (M1, M2 or M3)
// performs each of the nine multiplications of a 3x3 kernel.
//
// The choice follows the approach configured for the layer:
//   LLAM       every multiplication of the layer uses layer_axm.
//   FLAM       filters are split into three groups by their index
//              (index < bound1, < bound2, the rest); group g uses group_axm[g].
//   KLAM-chan  the same split, applied to the input-channel index: all nine
//              multiplications of one kernel use the same multiplier.
//   KLAM-row   kernel row r (taps w1-w3, w4-w6, w7-w9) uses group_axm[r].
//   KLAM-col   kernel column c (taps w1/w4/w7, ...) uses group_axm[c].
// The four approaches and the three flavours of KLAM are the paper's; the
// three contiguous groups with programmable bounds are this design's way of
// "creating groups of filters and assigning them the ROUP multipliers".
//
// Combinational. Tap t of the outputs is kernel row t/3, column t%3.
module approx_mapper
  import maxdnn_pkg::*;
(
  input  layer_cfg_t cfg,
  input  idx_t       filter_idx,
  input  idx_t       channel_idx,
  output axm_id_t    tap_axm [KTAPS]
);

  function automatic logic [1:0] group_of(input idx_t idx, input idx_t b1, input idx_t b2);
    if (idx < b1)      return 2'd0;
    else if (idx < b2) return 2'd1;
    else               return 2'd2;
  endfunction

  logic [1:0] f_grp, c_grp;
  assign f_grp = group_of(filter_idx, cfg.bound1, cfg.bound2);
  assign c_grp = group_of(channel_idx, cfg.bound1, cfg.bound2);

  always_comb begin
    for (int t = 0; t < int'(KTAPS); t++) begin
      unique case (cfg.approach)
        APPR_LLAM:      tap_axm[t] = cfg.layer_axm;
        APPR_FLAM:      tap_axm[t] = cfg.group_axm[f_grp];
        APPR_KLAM_CHAN: tap_axm[t] = cfg.group_axm[c_grp];
        APPR_KLAM_ROW:  tap_axm[t] = cfg.group_axm[t / int'(KSIZE)];
        APPR_KLAM_COL:  tap_axm[t] = cfg.group_axm[t % int'(KSIZE)];
        default:        tap_axm[t] = cfg.layer_axm;
      endcase
    end
  end

endmodule
