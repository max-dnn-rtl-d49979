// maxdnn_run: end-to-end test harness of maxdnn_top on the seven
// convolutional layers of ResNet-8 for CIFAR-10 (3x3 kernels, zero padding 1).
//
//   layer  in ch  out ch  input size  stride
//     1      3     16       32x32       1
//     2     16     16       32x32       1
//     3     16     16       32x32       1
//     4     16     32       32x32       2
//     5     32     32       16x16       1
//     6     32     64       16x16       2
//     7     64     64        8x8        1
//
// For each layer the harness generates a random input feature map and
// bell-shaped random weights, computes the weights' mean and standard
// deviation (the off-line step of KLMS), writes the layer configuration and
// streams every 3x3 window, filter by filter and pixel by pixel, with the
// input channels innermost. Every output is compared with a reference built
// from maxdnn_ref_pkg. The layers use all approaches: LLAM, FLAM, KLAM by
// channel, row and column, and KLMS with 1 and 2 sigma, with group
// multiplier assignments taken from the configurations "FLAM-3clas._2_1_1",
// "KLAM-chan._1_0_1", "KLAM-row_2_1_1", "KLAM-chan._2_1_2" and
// "FLAM-3clas._2_2_1" (digit d selects multiplier M(d+1)). Layers 1, 2, 3
// and 5 are then reconfigured while the engine idles and run again (mode
// switches), the last three with "KLAM-chan._2_0_2", "KLAM-chan._1_1_2" and
// "KLAM-row_2_1_2".
// Idle cycles are inserted at random. The harness counts how often each
// mechanism happened and counts a failure for one that never did; it also
// prints the number of multiplications done by each multiplier and skipped,
// the inputs of an energy estimate (multiplications x energy per multiply).
//
// FULL = 1 runs the layers at their real sizes; FULL = 0 divides the feature
// map sides by 8 (at least 2) to keep the run short.
module maxdnn_run #(
  parameter bit FULL = 1'b0
);
  import maxdnn_pkg::*;
  import maxdnn_ref_pkg::*;

  localparam int NL = 7;
  localparam int CIN [NL]  = '{3, 16, 16, 16, 32, 32, 64};
  localparam int COUT[NL]  = '{16, 16, 16, 32, 32, 64, 64};
  localparam int HIN [NL]  = '{32, 32, 32, 32, 16, 16, 8};
  localparam int STR [NL]  = '{1, 1, 1, 2, 1, 2, 1};

  logic       clk = 0, rst_n = 0;
  logic       cfg_we = 0;
  layer_idx_t cfg_layer = '0;
  layer_cfg_t cfg_data = '0;
  logic       in_valid = 0, in_first = 0, in_last = 0;
  layer_idx_t in_layer = '0;
  idx_t       in_filter = '0, in_channel = '0;
  data_t      in_act [KTAPS], in_wgt [KTAPS];
  logic       out_valid;
  idx_t       out_filter;
  acc_t       out_sum;

  maxdnn_top dut (
    .clk(clk), .rst_n(rst_n),
    .cfg_we(cfg_we), .cfg_layer(cfg_layer), .cfg_data(cfg_data),
    .in_valid(in_valid), .in_layer(in_layer), .in_filter(in_filter), .in_channel(in_channel),
    .in_first(in_first), .in_last(in_last), .in_act(in_act), .in_wgt(in_wgt),
    .out_valid(out_valid), .out_filter(out_filter), .out_sum(out_sum)
  );

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int exp_sum[$], exp_filt[$];
  int n_out = 0;
  // mechanism counters
  int n_appr [5] = '{0, 0, 0, 0, 0};
  longint n_mult [3] = '{0, 0, 0};
  longint n_skip1 = 0, n_skip2 = 0;
  int n_idle = 0, n_switch = 0, n_multi_ch = 0;

  initial begin
    repeat (FULL ? 6_000_000 : 600_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    #1;
    if (rst_n && out_valid) begin
      checks++;
      n_out++;
      if (exp_sum.size() == 0) begin
        failures++;
      end else begin
        if (int'(out_sum) != exp_sum[0] || int'(out_filter) != exp_filt[0]) begin
          failures++;
          if (failures < 10)
            $display("FAIL out %0d: got %0d (filter %0d) exp %0d (filter %0d)",
                     n_out, out_sum, out_filter, exp_sum[0], exp_filt[0]);
        end
        void'(exp_sum.pop_front());
        void'(exp_filt.pop_front());
      end
    end
  end

  // Layer configurations (layer index 0..6 = layers 1..7).
  function automatic layer_cfg_t make_cfg(input int l, input int alt, input int mu, input int sg);
    layer_cfg_t c;
    c = '0;
    c.klms_mu    = 8'(mu);
    c.klms_sigma = 8'(sg);
    case ((alt != 0) ? 6 + alt : l)
      0: begin c.approach = APPR_LLAM; c.layer_axm = 2'd0; end
      1: begin c.approach = APPR_FLAM;                       // FLAM-3clas._2_1_1
               c.bound1 = 8'(COUT[l] / 3); c.bound2 = 8'(2 * COUT[l] / 3);
               c.group_axm = {2'd1, 2'd1, 2'd2}; end
      2: begin c.approach = APPR_KLAM_CHAN;                  // KLAM-chan._1_0_1
               c.bound1 = 8'(CIN[l] / 3); c.bound2 = 8'(2 * CIN[l] / 3);
               c.group_axm = {2'd1, 2'd0, 2'd1}; end
      3: begin c.approach = APPR_KLAM_ROW;                   // KLAM-row_2_1_1
               c.group_axm = {2'd1, 2'd1, 2'd2}; end
      4: begin c.approach = APPR_KLAM_COL;                   // columns 2_1_2, KLMS 1 sigma
               c.group_axm = {2'd2, 2'd1, 2'd2};
               c.klms_en = 1'b1; c.klms_2sigma = 1'b0; end
      5: begin c.approach = APPR_KLAM_CHAN;                  // KLAM-chan._2_1_2, KLMS 2 sigma
               c.bound1 = 8'(CIN[l] / 3); c.bound2 = 8'(2 * CIN[l] / 3);
               c.group_axm = {2'd2, 2'd1, 2'd2};
               c.klms_en = 1'b1; c.klms_2sigma = 1'b1; end
      6: begin c.approach = APPR_FLAM;                       // FLAM-3clas._2_2_1, KLMS 1 sigma
               c.bound1 = 8'(COUT[l] / 3); c.bound2 = 8'(2 * COUT[l] / 3);
               c.group_axm = {2'd1, 2'd2, 2'd2};
               c.klms_en = 1'b1; c.klms_2sigma = 1'b0; end
      7: begin c.approach = APPR_KLAM_ROW;                   // layer 1 after the switch
               c.group_axm = {2'd2, 2'd0, 2'd1};
               c.klms_en = 1'b1; c.klms_2sigma = 1'b1; end
      8: begin c.approach = APPR_KLAM_CHAN;                  // KLAM-chan._2_0_2
               c.bound1 = 8'(CIN[l] / 3); c.bound2 = 8'(2 * CIN[l] / 3);
               c.group_axm = {2'd2, 2'd0, 2'd2}; end
      9: begin c.approach = APPR_KLAM_CHAN;                  // KLAM-chan._1_1_2
               c.bound1 = 8'(CIN[l] / 3); c.bound2 = 8'(2 * CIN[l] / 3);
               c.group_axm = {2'd2, 2'd1, 2'd1}; end
      default: begin c.approach = APPR_KLAM_ROW;             // KLAM-row_2_1_2
               c.group_axm = {2'd2, 2'd1, 2'd2}; end
    endcase
    return c;
  endfunction

  task automatic run_layer(input int l, input int alt);
    int cin, cout, h, s, ho, mu, sg, acc, w, a, u, yy, xx;
    real sum, sq;
    data_t fmap [];
    data_t wts [];
    layer_cfg_t c;
    cin  = CIN[l];
    cout = COUT[l];
    h    = FULL ? HIN[l] : ((HIN[l] / 8 < 2) ? 2 : HIN[l] / 8);
    s    = STR[l];
    ho   = (h + s - 1) / s;
    fmap = new[cin * h * h];
    wts  = new[cout * cin * 9];
    foreach (fmap[i]) fmap[i] = 8'($urandom_range(0, 127));
    sum = 0.0; sq = 0.0;
    foreach (wts[i]) begin
      // bell-shaped weights: sum of four uniforms, centred near -4
      w = int'($urandom_range(0, 40)) + int'($urandom_range(0, 40))
        + int'($urandom_range(0, 40)) + int'($urandom_range(0, 40)) - 84;
      wts[i] = 8'(w);
      sum += w;
      sq  += w * w;
    end
    mu = $rtoi(sum / wts.size() + ((sum < 0) ? -0.5 : 0.5));
    sg = $rtoi($sqrt(sq / wts.size() - (sum / wts.size()) ** 2) + 0.5);
    c = make_cfg(l, alt, mu, sg);
    if (alt != 0) n_switch++;
    // write the configuration between two windows
    @(negedge clk);
    in_valid  = 1'b0;
    cfg_we    = 1'b1;
    cfg_layer = 3'(l);
    cfg_data  = c;
    @(negedge clk);
    cfg_we = 1'b0;
    n_appr[int'(c.approach)]++;
    for (int f = 0; f < cout; f++) begin
      for (int y = 0; y < ho; y++) begin
        for (int x = 0; x < ho; x++) begin
          acc = 0;
          for (int ch = 0; ch < cin; ch++) begin
            if ($urandom_range(0, 15) == 0) begin
              @(negedge clk);
              in_valid = 1'b0;
              n_idle++;
            end
            @(negedge clk);
            in_valid   = 1'b1;
            in_layer   = 3'(l);
            in_filter  = 8'(f);
            in_channel = 8'(ch);
            in_first   = (ch == 0);
            in_last    = (ch == cin - 1);
            for (int t = 0; t < 9; t++) begin
              yy = y * s + t / 3 - 1;
              xx = x * s + t % 3 - 1;
              in_act[t] = (yy < 0 || yy >= h || xx < 0 || xx >= h) ? 8'sd0
                          : fmap[(ch * h + yy) * h + xx];
              in_wgt[t] = wts[(f * cin + ch) * 9 + t];
              a = int'(in_act[t]);
              w = int'(in_wgt[t]);
              if (skip_ref(c, w)) begin
                if (c.klms_2sigma) n_skip2++; else n_skip1++;
              end else begin
                u = map_ref(c, f, ch, t);
                n_mult[u]++;
                acc += unit_ref(u, a, w);
              end
            end
          end
          if (cin > 1) n_multi_ch++;
          exp_sum.push_back(acc);
          exp_filt.push_back(f);
        end
      end
    end
    @(negedge clk);
    in_valid = 1'b0;
  endtask

  initial begin
    for (int t = 0; t < 9; t++) begin in_act[t] = '0; in_wgt[t] = '0; end
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int l = 0; l < NL; l++) run_layer(l, 0);
    // Reconfigure layers and run them again: the remaining published
    // configurations, and a new rule for layer 1.
    run_layer(0, 1);
    run_layer(1, 2);
    run_layer(2, 3);
    run_layer(4, 4);
    repeat (6) @(posedge clk);
    #2;
    checks++;
    if (exp_sum.size() != 0) begin
      failures++;
      $display("FAIL %0d outputs missing", exp_sum.size());
    end
    $display("outputs checked=%0d", n_out);
    $display("layers per approach: LLAM=%0d FLAM=%0d KLAM-chan=%0d KLAM-row=%0d KLAM-col=%0d",
             n_appr[0], n_appr[1], n_appr[2], n_appr[3], n_appr[4]);
    $display("multiplications: M1=%0d M2=%0d M3=%0d skipped(1 sigma)=%0d skipped(2 sigma)=%0d",
             n_mult[0], n_mult[1], n_mult[2], n_skip1, n_skip2);
    $display("idle cycles=%0d mode switches=%0d multi-channel outputs=%0d",
             n_idle, n_switch, n_multi_ch);
    for (int i = 0; i < 5; i++) begin checks++; if (n_appr[i] == 0) failures++; end
    for (int i = 0; i < 3; i++) begin checks++; if (n_mult[i] == 0) failures++; end
    checks++; if (n_skip1 == 0) failures++;
    checks++; if (n_skip2 == 0) failures++;
    checks++; if (n_idle == 0) failures++;
    checks++; if (n_switch == 0) failures++;
    checks++; if (n_multi_ch == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
