// tb_finn_cnn_top: end-to-end test of the accelerator at a reduced size.
// Same network shape as the default (six padded 3x3 convolutions in three
// groups, three OR poolings, three fully connected layers, arg-max), with an
// 8x8 image and narrow layers, so that five frames simulate in seconds.
// All checks are in finn_tb_harness.
module tb_finn_cnn_top;
  finn_tb_harness #(
    .FULL(1'b0), .NFRAMES(5), .WATCHDOG(200000),
    .IMG_DIM(8), .IN_CH(3), .IN_BITS(8), .C1(4), .C2(8), .C3(8), .FC(16), .CLASSES(10),
    .P0(2), .S0(9), .P1(2), .S1(12), .P2(4), .S2(9), .P3(4), .S3(24), .P4(2), .S4(36),
    .P5(8), .S5(8), .P6(4), .S6(4), .P7(2), .S7(8), .P8(2), .S8(4)
  ) h ();
endmodule
