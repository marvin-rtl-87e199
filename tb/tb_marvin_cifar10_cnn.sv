// tb_marvin_cifar10_cnn: CIFAR-10 CNN (three convolutions, one dense layer)
// on the mixed-precision execution unit.
//
// The small CIFAR-10 network of the embedded CNN libraries: conv 32@5x5 on a
// 3x32x32 image with padding 2, 2x2 max-pool, conv 32@5x5 (pad 2), 2x2
// max-pool, conv 64@5x5 (pad 2), 2x2 max-pool, dense 1024-10; about 12.3 M
// multiply-accumulates, run through marvin_net_harness with random integer
// weights and a random 8-bit image. Per-layer widths (this test's choice):
//   conv1 W4A8 (Mode-2), conv2 W2A4 (Mode-3), conv3 W2A2 (Mode-3),
//   dense W8A8 (Mode-1).
// conv3 takes 2-bit activations, so only 0 and 1 survive the ReLU/clamp and
// the unit sees the narrowest activation packing. Every layer output is
// compared with a plain integer reference, and the run must take exactly one
// core cycle per unit instruction.
`timescale 1ns/1ps
module tb_marvin_cifar10_cnn;
  marvin_net_harness h ();

  initial begin : watchdog
    repeat (3000000) @(posedge h.clk);
    h.failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", h.checks, h.failures);
    $finish;
  end

  initial begin
    int img [][][], f [][][];
    int v [], y [];
    h.start();
    h.random_image(3, 32, img);
    h.conv(img, 32, 5, 2, 1, 2'b01, 2'b10, 8, 4, f);  // conv1 W4A8 -> 32x32x32
    h.pool2(f);                                     // 32x16x16
    h.conv(f, 32, 5, 2, 1, 2'b00, 2'b01, 4, 2, f);    // conv2 W2A4 -> 32x16x16
    h.pool2(f);                                     // 32x8x8
    h.conv(f, 64, 5, 2, 1, 2'b00, 2'b00, 3, 8, f);    // conv3 W2A2 -> 64x8x8
    h.pool2(f);                                     // 64x4x4
    h.flatten(f, v);
    h.dense(v, 10, 2'b10, 2'b10, 0, 8, 1, y);       // dense W8A8
    h.finish_checks("CIFAR-10 CNN");
    $display("TB_RESULT checks=%0d failures=%0d", h.checks, h.failures);
    $finish;
  end
endmodule
