// kernel_mac: multiply-accumulate of one 3x3 kernel per clock, accumulated
// over the M input channels of a filter.
//
// Each cycle with in_valid the nine activations of a 3x3 window of one input
// channel are multiplied by the nine weights of the matching kernel. Every
// tap has its own axm_lane, so each of the nine multiplications can be done
// by a different approximate multiplier (tap_axm) or skipped (skip). The
// products are summed by an accurate adder tree and accumulated over the
// channels: `first` starts a new sum, `last` closes it and puts it on the
// output. Additions are exact; only multiplications are approximate, as in
// the paper's accelerator model.
//
// Timing: two register stages. Stage 1 registers the sum of the nine
// products; stage 2 is the accumulator. The result of a window presented
// with last=1 at clock edge k appears with out_valid=1 after edge k+1 and
// stays for one cycle. A new window can be presented every cycle. `tag`
// (for instance the filter index) travels alongside and comes out with the
// result. Synchronous active-low reset clears the valid flags and the
// accumulator. The one-window-per-cycle rate and the pipeline are this
// design's own; the paper does not describe the accelerator's datapath.
//
// Stream rule (checked by an assertion): the valid windows form complete
// groups, so a valid window has first=1 exactly when no group is open; a
// group is opened by first=1, last=0 and closed by last=1.
module kernel_mac
  import maxdnn_pkg::*;
#(
  parameter int unsigned AXM_P [NUM_AXM] = '{0, 1, 2},
  parameter int unsigned AXM_R [NUM_AXM] = '{3, 4, 6},
  parameter int unsigned TAG_W           = IDX_W
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  logic              first,
  input  logic              last,
  input  logic [TAG_W-1:0]  tag,
  input  data_t             act     [KTAPS],
  input  data_t             wgt     [KTAPS],
  input  axm_id_t           tap_axm [KTAPS],
  input  logic [KTAPS-1:0]  skip,
  output logic              out_valid,
  output logic [TAG_W-1:0]  out_tag,
  output acc_t              out_sum
);

  prod_t prod [KTAPS];

  for (genvar t = 0; t < KTAPS; t++) begin : g_tap
    axm_lane #(.AXM_P(AXM_P), .AXM_R(AXM_R)) u_lane (
      .act (act[t]),
      .wgt (wgt[t]),
      .sel (tap_axm[t]),
      .skip(skip[t] || !in_valid),
      .prod(prod[t])
    );
  end

  // Accurate adder tree over the nine taps.
  acc_t win_sum;
  always_comb begin
    win_sum = '0;
    for (int t = 0; t < int'(KTAPS); t++) win_sum = win_sum + acc_t'(prod[t]);
  end

  // Stage 1: window sum.
  logic             s1_valid, s1_first, s1_last;
  logic [TAG_W-1:0] s1_tag;
  acc_t             s1_sum;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
      s1_first <= 1'b0;
      s1_last  <= 1'b0;
      s1_tag   <= '0;
      s1_sum   <= '0;
    end else begin
      s1_valid <= in_valid;
      s1_first <= first;
      s1_last  <= last;
      s1_tag   <= tag;
      s1_sum   <= win_sum;
    end
  end

  // Stage 2: accumulation over input channels.
  acc_t acc, acc_next;
  assign acc_next = s1_first ? s1_sum : acc + s1_sum;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      acc       <= '0;
      out_valid <= 1'b0;
      out_tag   <= '0;
      out_sum   <= '0;
    end else begin
      out_valid <= s1_valid && s1_last;
      if (s1_valid) begin
        acc <= acc_next;
        if (s1_last) begin
          out_sum <= acc_next;
          out_tag <= s1_tag;
        end
      end
    end
  end

  // Stream rule: first on a valid window exactly when no group is open.
  logic grp_open;
  always_ff @(posedge clk) begin
    if (!rst_n)        grp_open <= 1'b0;
    else if (in_valid) grp_open <= !last;
  end

  a_first_opens_group: assert property (@(posedge clk) disable iff (!rst_n)
    in_valid |-> (first == !grp_open))
    else $error("kernel_mac: first=%0b on a window while a group is %s",
                first, grp_open ? "open" : "closed");

endmodule
