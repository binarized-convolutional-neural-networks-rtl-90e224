// tb_bcnn_sf_full: the six convolutional layers of the CIFAR-10 network
// (3x32x32 image; 128, 128, pool, 256, 256, pool, 512, 512, pool) on the
// accelerator at its default parameters, checked layer by layer against the
// reference model in tb_bcnn_net.
//
// It only sets the size; all checking is in tb_bcnn_net.
module tb_bcnn_sf_full;
  tb_bcnn_net #(.NET(1)) u_net ();
endmodule
