// tb_marvin_mobilenet_v1: MobileNetV1 (224x224 input, width 1.0) on the
// mixed-precision execution unit.
//
// The standard network: a 3x3 stride-2 convolution to 32 channels, thirteen
// depthwise-separable blocks (3x3 depthwise, then 1x1 pointwise to 64, 128,
// 128, 256, 256, 512 x6, 1024, 1024 channels, stride 2 at the depthwise
// layers of blocks 2, 4, 6 and 12), global average pooling and a 1024-1000
// dense layer; about 0.57 G multiply-accumulates, run through
// marvin_net_harness with random integer weights and a random 8-bit image.
// Per-layer widths (this test's choice, leaning on 4-bit as networks of this
// size tend to): first convolution and all depthwise layers W8A8 (Mode-1),
// pointwise layers W4A4 (Mode-2) except two W2A4 ones (Mode-3), dense W8A8.
// Depthwise layers are mapped one output per dot product, so they use one
// lane of four. Every layer output is compared with a plain integer
// reference, and the run must take exactly one core cycle per unit
// instruction.
`timescale 1ns/1ps
module tb_marvin_mobilenet_v1;
  marvin_net_harness h ();

  initial begin : watchdog
    repeat (200000000) @(posedge h.clk);
    h.failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", h.checks, h.failures);
    $finish;
  end

  // depthwise-separable block: dw 3x3 (stride st) then pw 1x1 to co channels
  task automatic dws(inout int f [][][], input int co, input int st, input logic [1:0] pwc,
                     input logic [1:0] pac);
    int g [][][];
    h.dwconv(f, 3, 1, st, 2'b10, 2'b10, -1, marvin_ref_pkg::wbits(pac), g);
    h.conv(g, co, 1, 0, 1, pwc, pac, -1, 8, f);
  endtask

  initial begin
    int img [][][], f [][][];
    int v [], y [];
    h.start();
    h.random_image(3, 224, img);
    h.conv(img, 32, 3, 1, 2, 2'b10, 2'b10, -1, 8, f);  // 32x112x112
    dws(f,   64, 1, 2'b01, 2'b01);                       // 64x112x112
    dws(f,  128, 2, 2'b01, 2'b01);                       // 128x56x56
    dws(f,  128, 1, 2'b00, 2'b01);                       // W2A4
    dws(f,  256, 2, 2'b01, 2'b01);                       // 256x28x28
    dws(f,  256, 1, 2'b01, 2'b01);
    dws(f,  512, 2, 2'b01, 2'b01);                       // 512x14x14
    for (int i = 0; i < 5; i++) dws(f, 512, 1, (i == 2) ? 2'b00 : 2'b01, 2'b01);
    dws(f, 1024, 2, 2'b01, 2'b01);                       // 1024x7x7
    dws(f, 1024, 1, 2'b01, 2'b01);
    h.avgpool(f, v);
    h.dense(v, 1000, 2'b10, 2'b10, 0, 8, 1, y);          // dense W8A8
    h.finish_checks("MobileNetV1");
    $display("TB_RESULT checks=%0d failures=%0d", h.checks, h.failures);
    $finish;
  end
endmodule
