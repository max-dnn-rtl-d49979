// approx_config: per-layer approximation configuration registers.
//
// Holds one layer_cfg_t for each of the NUM_LAYERS convolutional layers:
// the approach (LLAM, FLAM, KLAM channel/row/column), the multiplier of the
// layer, the group bounds and the multipliers of the three groups, and the
// KLMS enable, interval width, mean and standard deviation. A layer's entry
// is written whole through a simple write port (we, waddr, wdata) and read
// combinationally by layer index (raddr), so the configuration of the layer
// being processed is available in the same cycle.
//
// The content corresponds to the paper's per-layer AxMult setting and its
// four approaches; the register file and its write port are this design's
// choice. Writes to an index >= NUM_LAYERS are ignored; reads of such an
// index return entry 0. Reset (synchronous, active low) sets every layer to
// LLAM with multiplier M1 and KLMS off.
module approx_config
  import maxdnn_pkg::*;
#(
  parameter int unsigned LAYERS = NUM_LAYERS
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       we,
  input  layer_idx_t waddr,
  input  layer_cfg_t wdata,
  input  layer_idx_t raddr,
  output layer_cfg_t rdata
);

  layer_cfg_t regs [LAYERS];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int l = 0; l < int'(LAYERS); l++) begin
        regs[l] <= '{approach: APPR_LLAM, default: '0};
      end
    end else if (we && (int'(waddr) < int'(LAYERS))) begin
      regs[waddr] <= wdata;
    end
  end

  assign rdata = (int'(raddr) < int'(LAYERS)) ? regs[raddr] : regs[0];

endmodule
