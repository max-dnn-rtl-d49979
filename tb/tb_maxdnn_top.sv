// tb_maxdnn_top: end-to-end test of the engine on the seven ResNet-8
// convolutional layers with their real channel and filter counts and
// feature maps shrunk eight times per side (see maxdnn_run).
module tb_maxdnn_top;
  maxdnn_run #(.FULL(1'b0)) u_run ();
endmodule
