// tb_marvin_resnet18: ResNet-18 (224x224 input) on the mixed-precision
// execution unit.
//
// The standard network: a 7x7 stride-2 convolution to 64 channels, 3x3
// stride-2 max pooling, four stages of two basic blocks (two 3x3
// convolutions each; 64, 128, 256, 512 channels; the first block of stages
// 2-4 has stride 2 and a 1x1 stride-2 projection shortcut), global average
// pooling and a 512-1000 dense layer; about 1.8 G multiply-accumulates, run
// through marvin_net_harness with random integer weights and a random 8-bit
// image. Per-layer widths (this test's choice): first convolution W4A8
// (Mode-2), the 3x3 convolutions W2A4 (Mode-3), projection shortcuts W8A4
// and the dense layer W8A8 (Mode-1). Each branch is requantized on its own
// and the residual sum is clamped to the 4-bit range. Every layer output is
// compared with a plain integer reference, and the run must take exactly one
// core cycle per unit instruction.
`timescale 1ns/1ps
module tb_marvin_resnet18;
  marvin_net_harness h ();

  initial begin : watchdog
    repeat (400000000) @(posedge h.clk);
    h.failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", h.checks, h.failures);
    $finish;
  end

  // basic block: 3x3 (stride st) -> 3x3, plus identity or 1x1 projection
  task automatic basic(inout int f [][][], input int co, input int st);
    int a [][][], b [][][], sc [][][];
    h.conv(f, co, 3, 1, st, 2'b00, 2'b01, -1, 4, a);
    h.conv(a, co, 3, 1, 1, 2'b00, 2'b01, -1, 4, b);
    if (st != 1 || f.size() != co) h.conv(f, co, 1, 0, st, 2'b10, 2'b01, -1, 4, sc);
    else sc = f;
    h.add_clamp(b, sc, 4);
    f = b;
  endtask

  initial begin
    int img [][][], f [][][];
    int v [], y [];
    h.start();
    h.random_image(3, 224, img);
    h.conv(img, 64, 7, 3, 2, 2'b01, 2'b10, -1, 4, f);  // 64x112x112
    h.maxpool3s2(f);                                     // 64x56x56
    basic(f,  64, 1); basic(f,  64, 1);
    basic(f, 128, 2); basic(f, 128, 1);                  // 128x28x28
    basic(f, 256, 2); basic(f, 256, 1);                  // 256x14x14
    basic(f, 512, 2); basic(f, 512, 1);                  // 512x7x7
    h.avgpool(f, v);
    h.dense(v, 1000, 2'b10, 2'b10, 0, 8, 1, y);          // dense W8A8
    h.finish_checks("ResNet-18");
    $display("TB_RESULT checks=%0d failures=%0d", h.checks, h.failures);
    $finish;
  end
endmodule
