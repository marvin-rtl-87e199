// tb_mp_operand_decoder: self-checking test of the operand decoder.
// 1) Directed: with 8-bit activations, each multiplier operand is compared with
//    the weight/activation element the mode figure assigns to it.
// 2) Random, all nine width combinations: the products of the operand pairs,
//    summed per pair of multipliers (and split into soft-SIMD fields in Mode-3),
//    must equal the element-level lane sums of the reference model.
`timescale 1ns/1ps
module tb_mp_operand_decoder;
  import marvin_pkg::*;
  import marvin_ref_pkg::*;

  logic [31:0] act, wgt;
  bw_e         wbw, abw;
  mpair_t      ops [2][N_MULT];
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  mp_operand_decoder dut (.act_i(act), .wgt_i(wgt), .wbw_i(wbw), .abw_i(abw), .ops_o(ops));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s act=%08h wgt=%08h wbw=%0d abw=%0d", what, act, wgt, wbw, abw);
    end
  endtask

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int A(int c); return elem(act, 8, c); endfunction

  initial begin
    // ---------------- directed, figure mapping, 8-bit activations
    for (int t = 0; t < 50; t++) begin
      act = $urandom; wgt = $urandom; abw = BW8;
      // Mode-1: M1(W11,A1)/M1(W31,A3), M3(W21,A2)/M3(W41,A4), M2 = M4 = 0
      wbw = BW8; @(posedge clk);
      for (int p = 0; p < 2; p++) begin
        check(int'(ops[p][0].a) == elem(wgt, 8, 2*p) && int'(ops[p][0].b) == A(2*p), "mode1 M1");
        check(int'(ops[p][2].a) == elem(wgt, 8, 2*p+1) && int'(ops[p][2].b) == A(2*p+1), "mode1 M3");
        check(ops[p][1] == '0 && ops[p][3] == '0, "mode1 M2/M4 idle");
      end
      // Mode-2: fast cycle 1: M1(W11,A1) M2(W12,A2) M3(W21,A1) M4(W22,A2)
      //         fast cycle 2: M1(W31,A3) M2(W32,A4) M3(W41,A3) M4(W42,A4)
      wbw = BW4; @(posedge clk);
      check(int'(ops[0][0].a) == elem(wgt,4,0) && int'(ops[0][0].b) == A(0), "mode2 M1(W11,A1)");
      check(int'(ops[0][1].a) == elem(wgt,4,1) && int'(ops[0][1].b) == A(1), "mode2 M2(W12,A2)");
      check(int'(ops[0][2].a) == elem(wgt,4,2) && int'(ops[0][2].b) == A(0), "mode2 M3(W21,A1)");
      check(int'(ops[0][3].a) == elem(wgt,4,3) && int'(ops[0][3].b) == A(1), "mode2 M4(W22,A2)");
      check(int'(ops[1][0].a) == elem(wgt,4,4) && int'(ops[1][0].b) == A(2), "mode2 M1(W31,A3)");
      check(int'(ops[1][1].a) == elem(wgt,4,5) && int'(ops[1][1].b) == A(3), "mode2 M2(W32,A4)");
      check(int'(ops[1][2].a) == elem(wgt,4,6) && int'(ops[1][2].b) == A(2), "mode2 M3(W41,A3)");
      check(int'(ops[1][3].a) == elem(wgt,4,7) && int'(ops[1][3].b) == A(3), "mode2 M4(W42,A4)");
      // Mode-3: M1(W11,W21,A1)/M1(W31,W41,A1) ...: a = W2c*2^12 + W1c
      wbw = BW2; @(posedge clk);
      for (int c = 0; c < 4; c++) begin
        check(int'(ops[0][c].a) == elem(wgt,2,4+c) * 4096 + elem(wgt,2,c) && int'(ops[0][c].b) == A(c), "mode3 fast cycle 1");
        check(int'(ops[1][c].a) == elem(wgt,2,12+c) * 4096 + elem(wgt,2,8+c) && int'(ops[1][c].b) == A(c), "mode3 fast cycle 2");
      end
    end

    // ---------------- random, all nine combinations, lane equivalence
    for (int t = 0; t < 400; t++) begin
      int lane [4];
      int got;
      act = $urandom; wgt = $urandom;
      if (t < 20) begin act = 32'h8080_8080; wgt = (t % 2) ? 32'hAAAA_AAAA : 32'h8888_8888; end
      wbw = bw_e'(t % 3); abw = bw_e'((t / 3) % 3);
      @(posedge clk);
      ref_lanes(act, wgt, 2'(wbw), 2'(abw), lane);
      for (int p = 0; p < 2; p++) begin
        for (int h = 0; h < 2; h++) begin
          int s;
          s = int'(ops[p][2*h].a) * int'(ops[p][2*h].b) + int'(ops[p][2*h+1].a) * int'(ops[p][2*h+1].b);
          if (wbw == BW2) begin
            // fields: low row (lane 2p), high row (lane 2p+1), split by exact division
            int lo, hi;
            lo = 0; hi = 0;
            for (int m = 2*h; m < 2*h + 2; m++) begin
              lo += elem(wgt, 2, 4*(2*p) + m) * elem(act, (abw == BW8) ? 8 : (abw == BW4) ? 4 : 2, m);
              hi += elem(wgt, 2, 4*(2*p+1) + m) * elem(act, (abw == BW8) ? 8 : (abw == BW4) ? 4 : 2, m);
            end
            check(s == hi * 4096 + lo, "mode3 packed PPA value");
          end else begin
            got = s;
            check(got == lane[2*p + h], $sformatf("lane %0d", 2*p + h));
          end
        end
      end
      if (wbw == BW2) begin
        // lanes of mode 3 from the two half sums
        for (int p = 0; p < 2; p++) begin
          int lo, hi;
          lo = 0; hi = 0;
          for (int m = 0; m < 4; m++) begin
            int w;
            w = int'(ops[p][m].a);
            // undo the soft-SIMD packing arithmetically: a = hi*4096 + lo, lo in [-2,1]
            lo += (((w % 4096) + 4096 + 2048) % 4096 - 2048) * int'(ops[p][m].b);
            hi += ((w - ((((w % 4096) + 4096 + 2048) % 4096) - 2048)) / 4096) * int'(ops[p][m].b);
          end
          check(lo == lane[2*p] && hi == lane[2*p+1], "mode3 lanes");
        end
      end
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
