// tb_bnn_ir_accel: end-to-end test of the input-reuse accelerator alone on
// small layers (chained, uniform, random and correlated inputs, padding,
// pooling, both buffer directions), checked against the reference model
// (see bnn_accel_env, FULL = 0, DUT = 1).
module tb_bnn_ir_accel;
  bnn_accel_env #(.FULL(0), .DUT(1)) env ();
endmodule
