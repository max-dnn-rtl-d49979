// axm_lane: one multiplication lane built from the bank of approximate
// multipliers M1, M2, M3.
//
// Each lane holds one instance of every ROUP multiplier of the bank (each
// with its own perforation P and rounding column R) and forwards the product
// of the one chosen by `sel`. The operands of the multipliers that are not
// chosen are held at zero (operand isolation), so only the chosen multiplier
// switches and its energy is the one spent. When `skip` is set no multiplier
// receives operands and the product is zero, which is how a multiplication
// removed by kernel-level multiplication skip costs nothing.
//
// The paper draws M1..M3 as multipliers taken from the ROUP library and
// assigned to layers, filters or kernels; keeping all of them in every lane
// and selecting per multiplication, with operand isolation, is this design's
// choice. Weights drive the radix-4 encoded operand B and activations the
// rounded operand A (also a choice). The P/R values of M1..M3 are not given
// in the paper; the defaults stand for a low, a medium and a high
// approximation strength.
//
// Combinational; no clock. sel values >= NUM_AXM give a zero product.
module axm_lane
  import maxdnn_pkg::*;
#(
  parameter int unsigned AXM_P [NUM_AXM] = '{0, 1, 2},
  parameter int unsigned AXM_R [NUM_AXM] = '{3, 4, 6}
) (
  input  data_t   act,   // activation (operand A, rounded)
  input  data_t   wgt,   // weight (operand B, radix-4 encoded)
  input  axm_id_t sel,   // which multiplier performs this multiplication
  input  logic    skip,  // multiplication skipped (KLMS)
  output prod_t   prod
);

  prod_t p_unit [NUM_AXM];

  for (genvar u = 0; u < NUM_AXM; u++) begin : g_unit
    logic  en;
    data_t a_iso, b_iso;
    assign en    = (sel == axm_id_t'(u)) && !skip;
    assign a_iso = en ? act : '0;
    assign b_iso = en ? wgt : '0;
    roup_mult #(.N(DATA_W), .P(AXM_P[u]), .R(AXM_R[u])) u_mult (
      .a(a_iso), .b(b_iso), .p(p_unit[u])
    );
  end

  // The isolated units output zero, so the products can be ORed together.
  always_comb begin
    prod = '0;
    for (int u = 0; u < int'(NUM_AXM); u++) prod = prod | p_unit[u];
  end

endmodule
