// tb_sar_gnn_accel_full: end-to-end test of the accelerator (default sizes) on
// a 128 x 128 image, the size of the MSTAR chips: a bright target on clutter,
// so that pruning keeps part of the pixels; see gnn_e2e for the program and
// the checks.
module tb_sar_gnn_accel_full;
  gnn_e2e #(.N(128), .BLOB(1)) u_run ();
endmodule
