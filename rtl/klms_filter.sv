// klms_filter: kernel-level multiplication skip (KLMS).
//
// For each of the nine weights of a kernel it decides whether the
// multiplication is performed. A multiplication is kept only when its weight
// lies in [mu - sigma, mu + sigma] (or [mu - 2 sigma, mu + 2 sigma] when
// two_sigma is set), where mu and sigma are the mean and standard deviation
// of all the kernel weights of the layer. Weights outside the interval are
// skipped. With en low nothing is skipped.
//
// The interval rule is the paper's. mu and sigma are computed off-line from
// the trained weights and loaded as 8-bit integers in the weights' quantized
// scale (a choice: the paper does not say where they are computed); the
// interval ends are inclusive, computed in 11 bits so they cannot overflow.
//
// Combinational.
module klms_filter
  import maxdnn_pkg::*;
(
  input  logic              en,
  input  logic              two_sigma,
  input  data_t             mu,
  input  logic [DATA_W-1:0] sigma,
  input  data_t             wgt [KTAPS],
  output logic [KTAPS-1:0]  skip
);

  localparam int unsigned BW = DATA_W + 3;
  typedef logic signed [BW-1:0] bound_t;

  bound_t span, lo, hi;
  assign span = two_sigma ? bound_t'({2'b00, sigma, 1'b0})
                          : bound_t'({3'b000, sigma});
  assign lo   = bound_t'(mu) - span;
  assign hi   = bound_t'(mu) + span;

  always_comb begin
    for (int t = 0; t < int'(KTAPS); t++) begin
      skip[t] = en && ((bound_t'(wgt[t]) < lo) || (bound_t'(wgt[t]) > hi));
    end
  end

endmodule
