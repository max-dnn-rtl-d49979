// tb_klms_filter: random means, deviations and weights; each skip decision is
// compared with the interval rule [mu - k sigma, mu + k sigma], k = 1 or 2,
// including weights exactly on the interval ends.
module tb_klms_filter;
  import maxdnn_pkg::*;

  logic              en, two_sigma;
  data_t             mu;
  logic [DATA_W-1:0] sigma;
  data_t             wgt [KTAPS];
  logic [KTAPS-1:0]  skip;
  int checks = 0, failures = 0, n_skip = 0, n_keep = 0;

  klms_filter dut (.en(en), .two_sigma(two_sigma), .mu(mu), .sigma(sigma), .wgt(wgt), .skip(skip));

  initial begin
    #10_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int k, lo, hi, w;
    bit e;
    for (int n = 0; n < 30000; n++) begin
      en        = ($urandom_range(0, 9) != 0);
      two_sigma = 1'($urandom_range(0, 1));
      mu        = 8'($urandom_range(0, 255));
      sigma     = 8'($urandom_range(0, ((n % 2) != 0) ? 40 : 255));
      k  = two_sigma ? 2 : 1;
      lo = int'(mu) - k * int'(sigma);
      hi = int'(mu) + k * int'(sigma);
      for (int t = 0; t < 9; t++) begin
        case ($urandom_range(0, 3))
          0: w = lo;
          1: w = hi;
          2: w = lo - 1;
          default: w = $urandom_range(0, 255) - 128;
        endcase
        if (w < -128) w = -128;
        if (w > 127) w = 127;
        wgt[t] = 8'(w);
      end
      #1;
      for (int t = 0; t < 9; t++) begin
        w = int'(wgt[t]);
        e = en && ((w < lo) || (w > hi));
        checks++;
        if (skip[t]) n_skip++; else n_keep++;
        if (skip[t] != e) begin
          failures++;
          if (failures < 10)
            $display("FAIL mu=%0d sigma=%0d k=%0d w=%0d got=%0d", mu, sigma, k, w, skip[t]);
        end
      end
    end
    checks++;
    if (n_skip == 0 || n_keep == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
