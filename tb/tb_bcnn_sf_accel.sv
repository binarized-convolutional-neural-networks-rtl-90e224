// tb_bcnn_sf_accel: end-to-end test of the accelerator on a small six-layer
// network (8x8 image, 64 to 192 channels, split layers, stream stalls).
// All checking is in tb_bcnn_net.
//
// It only sets the size; all checking is in tb_bcnn_net.
module tb_bcnn_sf_accel;
  tb_bcnn_net #(.NET(0)) u_net ();
endmodule
