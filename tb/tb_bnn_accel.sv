// tb_bnn_accel: end-to-end test of the top level with both accelerators.
// Small layers on the input-reuse accelerator (chained, uniform, random and
// correlated inputs) and on the weight-reuse accelerator (chained, similar
// and random kernels, uneven row split, two kernel sets), each checked bit by
// bit and counter by counter against the reference model; every reuse
// mechanism must have occurred (see bnn_accel_env, FULL = 0, DUT = 0).
module tb_bnn_accel;
  bnn_accel_env #(.FULL(0), .DUT(0)) env ();
endmodule
