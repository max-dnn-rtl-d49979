// tb_roup_mult: exhaustive self-checking test of the ROUP multiplier.
//
// Five instances with different perforation P and rounding column R are fed
// every pair of 8-bit operands. The reference is computed from the defining
// equations: ROUP(A,B) = sum_{j>=P} round(A, r_j) * d_j * 4^j, where d_j is
// the radix-4 digit of B and round(A, r) = (floor(A / 2^r) + a_{r-1}) * 2^r,
// with r_j = min(max(R - 2j, 0), 7). The exact instance (P = 0, R = 0) is
// also compared with the plain product A*B.
module tb_roup_mult;
  localparam int N = 8;
  localparam int NCFG = 5;
  localparam int PV[NCFG] = '{0, 0, 1, 2, 1};
  localparam int RV[NCFG] = '{0, 3, 4, 6, 9};

  logic signed [N-1:0]   a, b;
  logic signed [2*N-1:0] p [NCFG];
  int checks = 0, failures = 0;

  roup_mult #(.N(N), .P(0), .R(0)) u0 (.a(a), .b(b), .p(p[0]));
  roup_mult #(.N(N), .P(0), .R(3)) u1 (.a(a), .b(b), .p(p[1]));
  roup_mult #(.N(N), .P(1), .R(4)) u2 (.a(a), .b(b), .p(p[2]));
  roup_mult #(.N(N), .P(2), .R(6)) u3 (.a(a), .b(b), .p(p[3]));
  roup_mult #(.N(N), .P(1), .R(9)) u4 (.a(a), .b(b), .p(p[4]));

  function automatic int ref_roup(input int av, input int bv, input int pp, input int rr);
    int sum, r, ar, d, bb, b_hi, b_mid, b_lo, abits;
    sum = 0;
    bb = bv & 32'hFF;
    abits = av & 32'hFF;
    for (int j = pp; j < N / 2; j++) begin
      r = rr - 2 * j;
      if (r < 0) r = 0;
      if (r > N - 1) r = N - 1;
      ar = av >>> r;                       // floor(A / 2^r)
      if (r > 0) ar = ar + ((abits >> (r - 1)) & 1);
      ar = ar * (1 << r);
      b_hi  = (bb >> (2 * j + 1)) & 1;
      b_mid = (bb >> (2 * j)) & 1;
      b_lo  = (j == 0) ? 0 : (bb >> (2 * j - 1)) & 1;
      d = -2 * b_hi + b_mid + b_lo;
      sum += ar * d * (1 << (2 * j));
    end
    return sum;
  endfunction

  initial begin
    #50_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int exp_v;
    int max_err;
    for (int ia = -128; ia < 128; ia++) begin
      for (int ib = -128; ib < 128; ib++) begin
        a = 8'(ia);
        b = 8'(ib);
        #1;
        for (int c = 0; c < NCFG; c++) begin
          exp_v = ref_roup(ia, ib, PV[c], RV[c]);
          checks++;
          if (int'(p[c]) != exp_v) begin
            failures++;
            if (failures < 10)
              $display("FAIL cfg P=%0d R=%0d a=%0d b=%0d got=%0d exp=%0d",
                       PV[c], RV[c], ia, ib, p[c], exp_v);
          end
        end
        checks++;
        if (int'(p[0]) != ia * ib) begin
          failures++;
          if (failures < 10) $display("FAIL exact a=%0d b=%0d got=%0d", ia, ib, p[0]);
        end
      end
    end
    // The approximate instances must differ from the exact product somewhere.
    for (int c = 1; c < NCFG; c++) begin
      max_err = 0;
      for (int ia = -128; ia < 128; ia += 3)
        for (int ib = -128; ib < 128; ib += 5) begin
          exp_v = ref_roup(ia, ib, PV[c], RV[c]) - ia * ib;
          if (exp_v < 0) exp_v = -exp_v;
          if (exp_v > max_err) max_err = exp_v;
        end
      checks++;
      if (max_err == 0) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
