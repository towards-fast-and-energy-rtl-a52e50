// tb_bnn_accel_full: the top level at its default size running BinaryNet
// CIFAR-10 layers: conv1 (32x32, 128 -> 128, padding, pooling) and conv2
// (16x16, 128 -> 256) on the input-reuse accelerator, then conv3 (16x16,
// 256 -> 256, pooling) on conv2's output and conv4 (8x8, 256 -> 512) on the
// weight-reuse accelerator, all checked bit by bit against a direct
// convolution (see bnn_accel_env, FULL = 1).
module tb_bnn_accel_full;
  bnn_accel_env #(.FULL(1), .DUT(0)) env ();
endmodule
