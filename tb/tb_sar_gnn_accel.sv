// tb_sar_gnn_accel: end-to-end test of the accelerator (default sizes) on a
// random 8 x 8 image; see gnn_e2e for the program and the checks.
module tb_sar_gnn_accel;
  gnn_e2e #(.N(8), .BLOB(0)) u_run ();
endmodule
