// tb_approx_mapper: random layer configurations, filter and channel indices;
// the multiplier chosen for each of the nine taps is compared with the rule
// of each approach (LLAM, FLAM, KLAM channel/row/column).
module tb_approx_mapper;
  import maxdnn_pkg::*;
  import maxdnn_ref_pkg::*;

  layer_cfg_t cfg;
  idx_t       filt, chan;
  axm_id_t    tap_axm [KTAPS];
  int checks = 0, failures = 0;
  int seen [5] = '{0, 0, 0, 0, 0};

  approx_mapper dut (.cfg(cfg), .filter_idx(filt), .channel_idx(chan), .tap_axm(tap_axm));

  initial begin
    #10_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int e, b1, b2;
    for (int n = 0; n < 20000; n++) begin
      cfg = '0;
      cfg.approach  = approach_e'($urandom_range(0, 4));
      cfg.layer_axm = 2'($urandom_range(0, 2));
      b1 = $urandom_range(0, 64);
      b2 = b1 + $urandom_range(0, 64);
      cfg.bound1 = 8'(b1);
      cfg.bound2 = 8'(b2);
      for (int g = 0; g < 3; g++) cfg.group_axm[g] = 2'($urandom_range(0, 2));
      filt = 8'($urandom_range(0, 140));
      chan = 8'($urandom_range(0, 140));
      seen[int'(cfg.approach)]++;
      #1;
      for (int t = 0; t < 9; t++) begin
        e = map_ref(cfg, int'(filt), int'(chan), t);
        checks++;
        if (int'(tap_axm[t]) != e) begin
          failures++;
          if (failures < 10)
            $display("FAIL appr=%0d f=%0d c=%0d t=%0d got=%0d exp=%0d",
                     cfg.approach, filt, chan, t, tap_axm[t], e);
        end
      end
    end
    // Directed: FLAM with filters 0-2 -> M1, 3-4 -> M2, 5-6 -> M3 (as drawn
    // for one layer of seven filters).
    cfg = '0;
    cfg.approach = APPR_FLAM;
    cfg.bound1 = 8'd3;
    cfg.bound2 = 8'd5;
    cfg.group_axm = {2'd2, 2'd1, 2'd0};
    for (int f = 0; f < 7; f++) begin
      filt = 8'(f);
      chan = 8'd0;
      #1;
      checks++;
      if (int'(tap_axm[4]) != ((f < 3) ? 0 : (f < 5) ? 1 : 2)) failures++;
    end
    for (int a = 0; a < 5; a++) begin
      checks++;
      if (seen[a] == 0) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
