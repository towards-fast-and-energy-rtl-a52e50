// tb_bnn_wr_accel: end-to-end test of the weight-reuse accelerator alone on
// small layers (similar and random kernels, chained layers, padding, pooling,
// uneven row split over the PEs, two kernel sets), checked against the
// reference model (see bnn_accel_env, FULL = 0, DUT = 2).
module tb_bnn_wr_accel;
  bnn_accel_env #(.FULL(0), .DUT(2)) env ();
endmodule
