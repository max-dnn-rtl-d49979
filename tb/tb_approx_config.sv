// tb_approx_config: checks the reset value of every layer entry, then random
// writes (including to indices beyond the last layer, which are ignored)
// against a shadow copy, reading back every layer after each write and after
// a cycle in which different data sits on the port with the write disabled.
module tb_approx_config;
  import maxdnn_pkg::*;

  logic       clk = 0, rst_n = 0, we = 0;
  layer_idx_t waddr = '0, raddr = '0;
  layer_cfg_t wdata = '0, rdata;
  layer_cfg_t shadow [NUM_LAYERS];
  int checks = 0, failures = 0;

  approx_config dut (.clk(clk), .rst_n(rst_n), .we(we), .waddr(waddr), .wdata(wdata),
                     .raddr(raddr), .rdata(rdata));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic layer_cfg_t rand_cfg();
    layer_cfg_t c;
    c = layer_cfg_t'({$urandom, $urandom});
    c.approach = approach_e'($urandom_range(0, 4));
    return c;
  endfunction

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int l = 0; l < NUM_LAYERS; l++) begin
      shadow[l] = '0;
      shadow[l].approach = APPR_LLAM;
      raddr = 3'(l);
      #1;
      checks++;
      if (rdata != shadow[l]) failures++;
    end
    for (int n = 0; n < 500; n++) begin
      @(negedge clk);
      we    = 1'b1;
      waddr = 3'($urandom_range(0, 7));
      wdata = rand_cfg();
      @(posedge clk);
      #1;
      if (int'(waddr) < NUM_LAYERS) shadow[waddr] = wdata;
      // With we low, other addresses and data must not be written.
      we    = 1'b0;
      waddr = 3'($urandom_range(0, 6));
      wdata = rand_cfg();
      @(posedge clk);
      #1;
      for (int l = 0; l < NUM_LAYERS; l++) begin
        raddr = 3'(l);
        #1;
        checks++;
        if (rdata != shadow[l]) begin
          failures++;
          if (failures < 10) $display("FAIL layer %0d after write to %0d", l, waddr);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
