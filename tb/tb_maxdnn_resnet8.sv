// tb_maxdnn_resnet8: the seven ResNet-8 convolutional layers at their full
// CIFAR-10 sizes (32x32 input), every output checked (see maxdnn_run).
module tb_maxdnn_resnet8;
  maxdnn_run #(.FULL(1'b1)) u_run ();
endmodule
