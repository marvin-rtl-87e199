// tb_mp_mac_unit: self-checking test of the double-pumped accumulator unit.
// The testbench plays the multiplier array: it presents one pair of PPA sums in
// the first half of each core cycle and another in the second, chosen by the
// unit's phase output. Checked: the phase (low in the first half, high in the
// second), that accumulators change exactly at the core edge ending the
// instruction (one core cycle per instruction, back to back), lane sums in
// normal and soft-SIMD mode, bias load with shift into either pair, accumulator
// read-out and the per-instruction sum.
`timescale 1ns/1ps
module tb_mp_mac_unit;
  import marvin_pkg::*;

  logic clk = 0, clk_fast = 0, rst_n = 0;
  // core clock 20 ns, fast clock 10 ns, rising edges aligned
  initial forever begin
    #5 clk_fast = 1; clk = 1;
    #5 clk_fast = 0;
    #5 clk_fast = 1; clk = 0;
    #5 clk_fast = 0;
  end

  logic       mac_en = 0, simd = 0, bias_en = 0, hi_pair = 0;
  logic [4:0] shamt = 0;
  acc_t       bias0 = 0, bias1 = 0, rd_acc, mac_sum;
  logic [1:0] acc_sel = 0;
  logic       phase1;
  prod_t      ppa_ph [2][2];
  prod_t      ppa [2];
  acc_t       acc [N_LANES];

  assign ppa[0] = ppa_ph[phase1][0];
  assign ppa[1] = ppa_ph[phase1][1];

  mp_mac_unit dut (
    .clk_i(clk), .clk_fast_i(clk_fast), .rst_ni(rst_n),
    .mac_en_i(mac_en), .simd_i(simd), .ppa_i(ppa),
    .bias_en_i(bias_en), .hi_pair_i(hi_pair), .shamt_i(shamt),
    .bias0_i(bias0), .bias1_i(bias1),
    .acc_sel_i(acc_sel), .rd_acc_o(rd_acc),
    .phase1_o(phase1), .mac_sum_o(mac_sum), .acc_o(acc)
  );

  int checks = 0, failures = 0;
  int exp_acc [4] = '{0, 0, 0, 0};

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, what); end
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_accs(input string what);
    for (int i = 0; i < 4; i++) check(int'(acc[i]) == exp_acc[i], $sformatf("%s acc%0d=%0d exp %0d", what, i, acc[i], exp_acc[i]));
  endtask

  initial begin
    ppa_ph = '{default: '0};
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk); #1;
    check_accs("after reset");

    // -------- bias load into both pairs, with shifts
    for (int t = 0; t < 20; t++) begin
      int b0, b1, sh;
      b0 = int'($urandom) >>> 8; b1 = int'($urandom) >>> 8; sh = $urandom_range(0, 7);
      bias_en = 1; hi_pair = t[0]; shamt = 5'(sh); bias0 = b0; bias1 = b1;
      @(posedge clk); #1;
      exp_acc[2*(t%2)] = b0 <<< sh; exp_acc[2*(t%2)+1] = b1 <<< sh;
      check_accs("bias");
    end
    bias_en = 0;

    // -------- nn_mac back to back, normal and soft-SIMD lanes
    for (int t = 0; t < 400; t++) begin
      int lane [4];
      int lo [2][2], hi [2][2];
      simd = (t % 3 == 2);
      for (int p = 0; p < 2; p++) begin
        for (int h = 0; h < 2; h++) begin
          if (simd) begin
            lo[p][h] = $urandom_range(0, 1020) - 508;
            hi[p][h] = $urandom_range(0, 1020) - 508;
            ppa_ph[p][h] = prod_t'(longint'(hi[p][h]) * 4096 + longint'(lo[p][h]));
          end else begin
            lo[p][h] = int'($urandom) >>> 12;
            ppa_ph[p][h] = prod_t'(lo[p][h]);
          end
        end
      end
      for (int p = 0; p < 2; p++) begin
        if (simd) begin
          lane[2*p]   = lo[p][0] + lo[p][1];
          lane[2*p+1] = hi[p][0] + hi[p][1];
        end else begin
          lane[2*p]   = lo[p][0];
          lane[2*p+1] = lo[p][1];
        end
      end
      mac_en = (t % 17 != 5);     // an idle cycle now and then
      acc_sel = 2'(t);
      #4 check(phase1 == 1'b0, "phase low in first half");
      check(int'(rd_acc) == exp_acc[t % 4], "rd_acc");
      #10 check(phase1 == 1'b1, "phase high in second half");
      if (mac_en) check(int'(mac_sum) == lane[0] + lane[1] + lane[2] + lane[3], "mac_sum");
      check_accs("no update before the core edge");
      @(posedge clk); #1;
      if (mac_en) for (int i = 0; i < 4; i++) exp_acc[i] += lane[i];
      check_accs(simd ? "simd mac" : "mac");
    end
    mac_en = 0;
    @(posedge clk); #1;
    check_accs("idle");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
