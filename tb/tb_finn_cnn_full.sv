// tb_finn_cnn_full: end-to-end test of the accelerator at its default size,
// the padded CIFAR-10 network cnn(1): 32x32x3 8-bit images, 128/256/512
// filters, 1024-neuron fully connected layers, 10 classes. The whole
// parameter set (14 Mbit of weights) is loaded through the configuration
// port, then four frames are classified and checked against the reference
// model in finn_tb_harness.
module tb_finn_cnn_full;
  finn_tb_harness #(.FULL(1'b1), .NFRAMES(4), .WATCHDOG(500000)) h ();
endmodule
