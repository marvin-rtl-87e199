// tb_marvin_lenet5: LeNet-5 inference on the mixed-precision execution unit.
//
// A complete LeNet-5 (conv 6@5x5 on 1x32x32, 2x2 max-pool, conv 16@5x5,
// 2x2 max-pool, dense 400-120-84-10; about 0.42 M multiply-accumulates) with
// random integer weights and a random 8-bit input image, run through
// marvin_net_harness. Every multiply-accumulate goes through the unit as
// nn_mac instructions; ReLU, requantization and pooling are done in the
// harness, as the host core's software would. Each layer uses its own
// weight/activation widths, so all three modes run:
//   conv1 W4A8 (Mode-2), conv2 W2A4 (Mode-3), fc1 W2A4 (Mode-3),
//   fc2 W4A4 (Mode-2), fc3 W8A8 (Mode-1).
// The network and its size are the benchmark's; the per-layer widths are this
// test's choice. Every layer output is compared with a plain integer
// reference, and the run must take exactly one core cycle per unit
// instruction.
`timescale 1ns/1ps
module tb_marvin_lenet5;
  marvin_net_harness h ();

  initial begin : watchdog
    repeat (400000) @(posedge h.clk);
    h.failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", h.checks, h.failures);
    $finish;
  end

  initial begin
    int img [][][], f [][][];
    int v [], v2 [];
    h.start();
    h.random_image(1, 32, img);
    h.conv(img, 6, 5, 0, 1, 2'b01, 2'b10, 7, 4, f);   // conv1 W4A8 -> 6x28x28
    h.pool2(f);                                     // 6x14x14
    h.conv(f, 16, 5, 0, 1, 2'b00, 2'b01, 3, 4, f);    // conv2 W2A4 -> 16x10x10
    h.pool2(f);                                     // 16x5x5
    h.flatten(f, v);
    h.dense(v, 120, 2'b00, 2'b01, 3, 4, 0, v2);     // fc1 W2A4
    h.dense(v2, 84, 2'b01, 2'b01, 4, 8, 0, v);      // fc2 W4A4
    v2 = v;
    h.dense(v2, 10, 2'b10, 2'b10, 0, 8, 1, v);      // fc3 W8A8
    h.finish_checks("LeNet-5");
    $display("TB_RESULT checks=%0d failures=%0d", h.checks, h.failures);
    $finish;
  end
endmodule
