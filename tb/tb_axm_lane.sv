// tb_axm_lane: checks that the lane returns the product of the selected ROUP
// multiplier (M1..M3 with their default P/R), zero when skipped or when the
// selection names no multiplier. Exhaustive over operands for sel/skip
// pairs drawn at random.
module tb_axm_lane;
  import maxdnn_pkg::*;
  import maxdnn_ref_pkg::*;

  data_t   act, wgt;
  axm_id_t sel;
  logic    skip;
  prod_t   prod;
  int checks = 0, failures = 0;
  int used [4] = '{0, 0, 0, 0};

  axm_lane dut (.act(act), .wgt(wgt), .sel(sel), .skip(skip), .prod(prod));

  initial begin
    #100_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int e;
    for (int ia = -128; ia < 128; ia++) begin
      for (int ib = -128; ib < 128; ib++) begin
        act  = 8'(ia);
        wgt  = 8'(ib);
        sel  = 2'($urandom_range(0, 3));
        skip = ($urandom_range(0, 7) == 0);
        #1;
        e = skip ? 0 : unit_ref(int'(sel), ia, ib);
        if (!skip) used[sel]++;
        checks++;
        if (int'(prod) != e) begin
          failures++;
          if (failures < 10)
            $display("FAIL a=%0d w=%0d sel=%0d skip=%0d got=%0d exp=%0d", ia, ib, sel, skip, prod, e);
        end
      end
    end
    // Each multiplier must have been exercised.
    for (int u = 0; u < 3; u++) begin
      checks++;
      if (used[u] == 0) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
