// tb_kernel_mac: random streams of 3x3 windows grouped into outputs of 1..12
// input channels, with idle cycles in between, random multiplier choices
// and random skips. Each result is compared with the sum of the reference
// ROUP products, and its arrival is checked to be exactly two clocks after
// the window that carried `last` (the stated latency), with one window
// accepted per clock.
module tb_kernel_mac;
  import maxdnn_pkg::*;
  import maxdnn_ref_pkg::*;

  logic             clk = 0, rst_n = 0;
  logic             in_valid = 0, first = 0, last = 0;
  idx_t             tag = '0;
  data_t            act [KTAPS], wgt [KTAPS];
  axm_id_t          tap_axm [KTAPS];
  logic [KTAPS-1:0] skip = '0;
  logic             out_valid;
  idx_t             out_tag;
  acc_t             out_sum;

  int checks = 0, failures = 0, cyc = 0;
  int exp_sum[$], exp_tag[$], exp_due[$];
  int n_out = 0, n_b2b = 0;

  kernel_mac dut (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .first(first), .last(last),
                  .tag(tag), .act(act), .wgt(wgt), .tap_axm(tap_axm), .skip(skip),
                  .out_valid(out_valid), .out_tag(out_tag), .out_sum(out_sum));

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Output monitor.
  logic prev_valid = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    #1;
    if (rst_n && out_valid) begin
      checks++;
      n_out++;
      if (prev_valid) n_b2b++;
      if (exp_sum.size() == 0) begin
        failures++;
        $display("FAIL unexpected output at cycle %0d", cyc);
      end else begin
        if (int'(out_sum) != exp_sum[0] || int'(out_tag) != exp_tag[0] || cyc != exp_due[0]) begin
          failures++;
          if (failures < 10)
            $display("FAIL cyc=%0d got sum=%0d tag=%0d exp sum=%0d tag=%0d due=%0d",
                     cyc, out_sum, out_tag, exp_sum[0], exp_tag[0], exp_due[0]);
        end
        void'(exp_sum.pop_front());
        void'(exp_tag.pop_front());
        void'(exp_due.pop_front());
      end
    end
    prev_valid = out_valid;
  end

  initial begin
    int m, acc, nout;
    for (int t = 0; t < 9; t++) begin act[t] = '0; wgt[t] = '0; tap_axm[t] = '0; end
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    nout = 0;
    for (int g = 0; g < 3000; g++) begin
      m = $urandom_range(1, 12);
      acc = 0;
      for (int c = 0; c < m; c++) begin
        @(negedge clk);
        in_valid = 1'b1;
        first = (c == 0);
        last  = (c == m - 1);
        tag   = 8'(g);
        for (int t = 0; t < 9; t++) begin
          act[t]     = 8'($urandom);
          wgt[t]     = 8'($urandom);
          tap_axm[t] = 2'($urandom_range(0, 2));
          skip[t]    = ($urandom_range(0, 5) == 0);
          if (!skip[t]) acc += unit_ref(int'(tap_axm[t]), int'(act[t]), int'(wgt[t]));
        end
        if (last) begin
          // Inputs sampled at the edge that makes cyc+1; result two edges later.
          exp_sum.push_back(acc);
          exp_tag.push_back(g & 32'hFF);
          exp_due.push_back(cyc + 2);
        end
        if ($urandom_range(0, 3) == 0) begin
          @(negedge clk);
          in_valid = 1'b0;
          first = 1'($urandom_range(0, 1));
          last = 1'($urandom_range(0, 1));
        end
      end
      nout++;
    end
    @(negedge clk);
    in_valid = 1'b0;
    repeat (5) @(posedge clk);
    #2;
    checks++;
    if (exp_sum.size() != 0 || n_out != nout) failures++;
    checks++;
    if (n_b2b == 0) failures++;  // single-channel outputs must come back to back
    $display("outputs=%0d back_to_back=%0d", n_out, n_b2b);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
