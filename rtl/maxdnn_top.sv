// maxdnn_top: convolution engine with multi-level approximate multiplication.
//
// The engine computes convolutional-layer outputs of a quantized DNN one 3x3
// kernel per clock. For every window it is told the layer, the filter (output
// channel) and the input channel, plus first/last flags that delimit the M
// channels summed into one output value. The layer's configuration, held in
// approx_config, decides:
//   * which of the approximate ROUP multipliers M1..M3 performs each of the
//     nine multiplications (approx_mapper: layer-, filter- or kernel-level,
//     the last by channel, row or column), and
//   * whether multiplications with weights far from the layer's mean are
//     skipped (klms_filter).
// kernel_mac multiplies with the chosen multipliers, adds exactly and
// accumulates over the channels.
//
// Interface: cfg_we/cfg_layer/cfg_data write one layer's configuration. A
// window is presented with in_valid; its result, on the window that carries
// in_last, appears two clocks later on out_valid/out_filter/out_sum for one
// cycle. One window per clock, no back-pressure. Synchronous active-low
// reset.
//
// The multiplier family, its two approximation knobs, the four approaches
// and the KLMS interval are the paper's. The streaming interface, the
// one-kernel-per-clock datapath and the register-based configuration are
// this design's choices: the paper evaluates its approximations on the
// accelerator model of the ALWANN framework, whose memories and dataflow it
// does not describe, so windows and weights are supplied from outside.
module maxdnn_top
  import maxdnn_pkg::*;
#(
  parameter int unsigned AXM_P [NUM_AXM] = '{0, 1, 2},
  parameter int unsigned AXM_R [NUM_AXM] = '{3, 4, 6}
) (
  input  logic       clk,
  input  logic       rst_n,
  // configuration write port
  input  logic       cfg_we,
  input  layer_idx_t cfg_layer,
  input  layer_cfg_t cfg_data,
  // window stream
  input  logic       in_valid,
  input  layer_idx_t in_layer,
  input  idx_t       in_filter,
  input  idx_t       in_channel,
  input  logic       in_first,
  input  logic       in_last,
  input  data_t      in_act [KTAPS],
  input  data_t      in_wgt [KTAPS],
  // results
  output logic       out_valid,
  output idx_t       out_filter,
  output acc_t       out_sum
);

  layer_cfg_t       cfg;
  axm_id_t          tap_axm [KTAPS];
  logic [KTAPS-1:0] skip;

  approx_config #(.LAYERS(NUM_LAYERS)) u_cfg (
    .clk  (clk),
    .rst_n(rst_n),
    .we   (cfg_we),
    .waddr(cfg_layer),
    .wdata(cfg_data),
    .raddr(in_layer),
    .rdata(cfg)
  );

  approx_mapper u_map (
    .cfg        (cfg),
    .filter_idx (in_filter),
    .channel_idx(in_channel),
    .tap_axm    (tap_axm)
  );

  klms_filter u_klms (
    .en       (cfg.klms_en),
    .two_sigma(cfg.klms_2sigma),
    .mu       (cfg.klms_mu),
    .sigma    (cfg.klms_sigma),
    .wgt      (in_wgt),
    .skip     (skip)
  );

  kernel_mac #(.AXM_P(AXM_P), .AXM_R(AXM_R), .TAG_W(IDX_W)) u_mac (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (in_valid),
    .first    (in_first),
    .last     (in_last),
    .tag      (in_filter),
    .act      (in_act),
    .wgt      (in_wgt),
    .tap_axm  (tap_axm),
    .skip     (skip),
    .out_valid(out_valid),
    .out_tag  (out_filter),
    .out_sum  (out_sum)
  );

endmodule
