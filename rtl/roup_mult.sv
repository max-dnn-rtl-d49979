// roup_mult: ROUP approximate multiplier of two N-bit two's-complement numbers.
//
// The product is the sum of the radix-4 (modified Booth) partial products of
// A and B, with two approximations:
//   * Perforation: the P least-significant partial products (j = 0..P-1) are
//     not generated at all.
//   * Asymmetric rounding: for each remaining partial product j, operand A is
//     rounded to a multiple of 2^r_j before it is multiplied by the radix-4
//     digit b_j of B, i.e. A^r = <a_{N-1}..a_r> + a_{r-1} (round half up).
//   ROUP(A,B) = sum_{j=P}^{N/2-1} A^{r_j} * b_j * 4^j.
//
// The rounding increment a_{r-1} is not added to A with a carry-propagating
// adder. The Booth selector works on the truncated operand <a_{N-1}..a_r>
// and the increment is folded into the partial product's correction bits:
// for digits +-1 the usual negation bit becomes neg XOR a_{r-1}; for digits
// +-2 the increment moves into bit 0 of the selected operand or into a
// correction bit of weight 2. All partial products are then added with an
// accurate adder, as in the paper.
//
// The paper gives the two equations and the XOR in the correction term. Its
// wording "rounded to its r least-significant bit" is read as: the r_j
// low-order bits of A are removed with rounding, keeping their weight 2^r_j.
// The per-product rounding width r_j = max(R - 2j, 0), limited to N-1, is
// this design's assumption: every partial product is rounded down to the
// same column R of the product matrix, so products of higher significance
// are rounded less (the paper only says r differs per product). R = 0 and
// P = 0 give the exact Booth multiplier.
//
// Purely combinational; no clock. Ports: a, b operands; p product (2N bits).
module roup_mult #(
  parameter int unsigned N = 8,   // operand width (even)
  parameter int unsigned P = 0,   // number of perforated partial products
  parameter int unsigned R = 0    // rounding column of the product matrix
) (
  input  logic signed [N-1:0]   a,
  input  logic signed [N-1:0]   b,
  output logic signed [2*N-1:0] p
);

  localparam int unsigned NPP = N / 2;
  localparam int unsigned SW  = 2 * N + 2;  // internal sum width

  // Rounding width of partial product j.
  function automatic int unsigned round_bits(input int unsigned j);
    int r;
    r = int'(R) - 2 * int'(j);
    if (r < 0) r = 0;
    if (r > int'(N) - 1) r = int'(N) - 1;
    return unsigned'(r);
  endfunction

  logic signed [SW-1:0] pp_w [NPP];

  for (genvar j = 0; j < NPP; j++) begin : g_pp
    if (j < P) begin : g_perf
      // Perforated: this partial product is never generated.
      assign pp_w[j] = '0;
    end else begin : g_gen
      localparam int unsigned RJ = round_bits(j);
      localparam int unsigned TW = N - RJ;       // truncated operand width

      logic [TW-1:0] at;      // <a_{N-1} .. a_RJ>
      logic          a_rnd;   // a_{RJ-1}, the rounding increment
      logic          b_hi, b_mid, b_lo;
      logic          one, two, neg;
      logic [TW:0]   sel;     // selected (and possibly inverted) operand
      logic          c0, c1;  // correction bits of weight 1 and 2

      assign at    = a[N-1:RJ];
      assign a_rnd = (RJ > 0) ? a[(RJ > 0 ? RJ - 1 : 0)] : 1'b0;
      assign b_hi  = b[2*j+1];
      assign b_mid = b[2*j];
      assign b_lo  = (j == 0) ? 1'b0 : b[(j == 0 ? 0 : 2*j-1)];

      // Radix-4 encoding: digit = -2*b_hi + b_mid + b_lo.
      assign one = b_mid ^ b_lo;
      assign two = (b_hi & ~b_mid & ~b_lo) | (~b_hi & b_mid & b_lo);
      assign neg = b_hi & ~(b_mid & b_lo);

      always_comb begin
        for (int i = 1; i <= int'(TW); i++) begin
          sel[i] = ((one & at[(i < int'(TW)) ? i : TW-1]) | (two & at[i-1])) ^ neg;
        end
        if (one)      sel[0] = at[0] ^ neg;
        else if (two) sel[0] = neg & ~a_rnd;
        else          sel[0] = 1'b0;
        // Correction: negation +1 and the rounding increment b_j * a_{r-1}.
        if (one)      c0 = neg ^ a_rnd;
        else if (two) c0 = neg & ~a_rnd;
        else          c0 = 1'b0;
        c1 = two & ~neg & a_rnd;
      end

      logic signed [SW-1:0] pp_val;
      assign pp_val  = SW'(signed'(sel)) + SW'({c1, c0});
      assign pp_w[j] = pp_val <<< (2 * j + RJ);
    end
  end

  always_comb begin
    logic signed [SW-1:0] sum;
    sum = '0;
    for (int j = 0; j < int'(NPP); j++) sum = sum + pp_w[j];
    p = sum[2*N-1:0];
  end

endmodule
