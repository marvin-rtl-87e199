// tb_marvin_ex_unit: end-to-end test of the mixed-precision execution unit.
//
// The testbench plays the rest of the core: a 32-entry register file (written at
// the core edge, x0 hard-wired to zero) and an instruction stream issued one per
// core cycle with no gaps. It runs
//  * a dense layer y = W x + b (N_IN inputs, N_OUT outputs, random signed data)
//    in each of the nine weight/activation width combinations, packed as software
//    would pack it for that mode, with biases loaded through nn_bias (with and
//    without shift) and results read back with nn_rdacc;
//  * the nn_mac write-back value (sum of the four lane sums) for every nn_mac;
//  * random MUL/MULH/MULHSU/MULHU;
//  * undefined custom-0 words.
// The reference is computed from unpacked integer arrays. Each mechanism
// (Mode-1/2/3, every width pair, soft-SIMD fields with negative low parts,
// second fast cycle, bias shift, each multiply, illegal encodings, back-to-back
// issue) is counted and must occur. The layer must take exactly the number of
// core cycles of its instruction count.
`timescale 1ns/1ps
module tb_marvin_ex_unit;
  import marvin_pkg::*;
  import marvin_ref_pkg::*;

  localparam int N_IN  = 32;
  localparam int N_OUT = 8;

  logic clk = 0, clk_fast = 0, rst_n = 0;
  initial forever begin
    #5 clk_fast = 1; clk = 1;
    #5 clk_fast = 0;
    #5 clk_fast = 1; clk = 0;
    #5 clk_fast = 0;
  end

  logic        valid = 0;
  logic [31:0] instr = '0;
  logic [4:0]  rs1_a, rs2_a, waddr;
  logic [31:0] rf [32];
  logic        we, handled, illegal;
  logic [31:0] wdata;
  logic [1:0]  mode;
  logic [31:0] acc [N_LANES];

  marvin_ex_unit dut (
    .clk_i(clk), .clk_fast_i(clk_fast), .rst_ni(rst_n),
    .instr_valid_i(valid), .instr_i(instr),
    .rs1_addr_o(rs1_a), .rs2_addr_o(rs2_a),
    .rs1_rdata_i(rf[rs1_a]), .rs2_rdata_i(rf[rs2_a]),
    .rf_we_o(we), .rf_waddr_o(waddr), .rf_wdata_o(wdata),
    .handled_o(handled), .illegal_o(illegal), .mode_o(mode), .acc_o(acc)
  );

  // register file of the host core
  always_ff @(posedge clk) if (we && waddr != 0) rf[waddr] <= wdata;

  int checks = 0, failures = 0;
  int cnt_mode [4] = '{0, 0, 0, 0};
  int cnt_cfg [3][3];
  int cnt_simd_neg = 0, cnt_second_half = 0, cnt_bias_shift = 0, cnt_mul [4] = '{0, 0, 0, 0};
  int cnt_illegal = 0, cnt_back_to_back = 0, cnt_rdacc = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, what); end
  endtask

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // issue one instruction in the current core cycle; sample write-back at its end
  logic [31:0] last_wdata;
  logic        last_we;
  task automatic issue(input logic [31:0] word);
    valid = 1; instr = word;
    #17;                       // second half of the cycle, results settled
    last_wdata = wdata; last_we = we;
    @(posedge clk); #1;
  endtask

  task automatic setreg(input int r, input logic [31:0] v);
    rf[r] = v;
  endtask

  // ---------------- data
  int x [N_IN];
  int w [N_OUT][N_IN];
  int b [N_OUT];
  int y_ref [N_OUT];

  function automatic logic [31:0] pack(input int v [], input int bits);
    logic [31:0] r;
    r = '0;
    for (int k = 0; k < v.size(); k++) r |= (32'(v[k]) & ((32'd1 << bits) - 1)) << (bits * k);
    return r;
  endfunction

  // activation word: A0..A3 in the four lowest fields, the rest random (ignored)
  function automatic logic [31:0] act_word(input int i0, input int ab);
    int v [];
    v = new[32 / ab];
    for (int k = 0; k < v.size(); k++) v[k] = (k < 4) ? x[i0 + k] : int'($urandom);
    return pack(v, ab);
  endfunction

  // run the dense layer in one width configuration
  task automatic run_layer(input logic [1:0] wc, input logic [1:0] ac);
    int wb, ab, lo_w, hi_w, lo_a, hi_a, n_instr, t0, t1, sh;
    int y [N_OUT];
    wb = wbits(wc); ab = wbits(ac);
    lo_w = -(1 << (wb - 1)); hi_w = (1 << (wb - 1)) - 1;
    lo_a = -(1 << (ab - 1)); hi_a = (1 << (ab - 1)) - 1;
    for (int i = 0; i < N_IN; i++) x[i] = $urandom_range(0, hi_a - lo_a) + lo_a;
    for (int o = 0; o < N_OUT; o++) begin
      b[o] = ($urandom_range(0, 500) - 250) * 4;   // multiple of 4: exact under the bias shift
      for (int i = 0; i < N_IN; i++) w[o][i] = $urandom_range(0, hi_w - lo_w) + lo_w;
    end
    for (int o = 0; o < N_OUT; o++) begin
      y_ref[o] = b[o];
      for (int i = 0; i < N_IN; i++) y_ref[o] += w[o][i] * x[i];
    end
    sh = (wc == 2'b00) ? 2 : 0;   // exercise the bias shifter in Mode-3 runs
    n_instr = 0;
    t0 = $time;
    // outputs handled per accumulator group: Mode-1 one, Mode-2 two, Mode-3 four
    for (int o0 = 0; o0 < N_OUT; o0 += (wb == 8) ? 1 : (wb == 4) ? 2 : 4) begin
      int bl [4];
      // biases to the lanes that carry each output's first part
      bl = '{0, 0, 0, 0};
      if (wb == 8) bl[0] = b[o0];
      else if (wb == 4) begin bl[0] = b[o0]; bl[1] = b[o0 + 1]; end
      else for (int r = 0; r < 4; r++) bl[r] = b[o0 + r];
      for (int r = 0; r < 4; r++) bl[r] = bl[r] >>> sh;
      setreg(1, bl[0]); setreg(2, bl[1]); setreg(3, bl[2]); setreg(4, bl[3]);
      issue(enc_bias(1'b0, 5'(sh), 5'd1, 5'd2)); n_instr++;
      issue(enc_bias(1'b1, 5'(sh), 5'd3, 5'd4)); n_instr++;
      if (sh != 0) cnt_bias_shift++;
      // inputs four at a time
      for (int i0 = 0; i0 < N_IN; i0 += 4) begin
        int wv [];
        int lane [4];
        logic [31:0] aw, ww;
        wv = new[32 / wb];
        for (int r = 0; r < 4; r++) begin
          if (wb == 8) wv[r] = w[o0][i0 + r];                     // lane r: W[r] * A[r]
          else if (wb == 4) for (int j = 0; j < 2; j++)             // lane r: pair of inputs
            wv[2*r + j] = w[o0 + (r % 2)][i0 + 2*(r/2) + j];
          else for (int c = 0; c < 4; c++) wv[4*r + c] = w[o0 + r][i0 + c];
        end
        aw = act_word(i0, ab);
        ww = pack(wv, wb);
        setreg(5, aw); setreg(6, ww);
        ref_lanes(aw, ww, wc, ac, lane);
        if (wb == 2) for (int r = 0; r < 4; r += 2)
          for (int h = 0; h < 2; h++) begin
            int s; s = 0;
            for (int c = 2*h; c < 2*h + 2; c++) s += elem(ww, 2, 4*r + c) * elem(aw, ab, c);
            if (s < 0) cnt_simd_neg++;
          end
        if (lane[2] != 0 || lane[3] != 0) cnt_second_half++;
        issue(enc_mac(wc, ac, 5'd7, 5'd5, 5'd6)); n_instr++;
        check(last_we && last_wdata == 32'(lane[0] + lane[1] + lane[2] + lane[3]), "nn_mac write-back");
        cnt_mode[mode_of(bw_e'(wc))]++;
        cnt_cfg[wc][ac]++;
        if (i0 > 0) cnt_back_to_back++;
      end
      // read the four accumulators
      for (int r = 0; r < 4; r++) begin
        issue(enc_rdacc(2'(r), 5'(10 + r))); n_instr++;
        cnt_rdacc++;
      end
      // combine lanes to outputs
      if (wb == 8) y[o0] = int'(rf[10]) + int'(rf[11]) + int'(rf[12]) + int'(rf[13]);
      else if (wb == 4) begin
        y[o0] = int'(rf[10]) + int'(rf[12]);
        y[o0 + 1] = int'(rf[11]) + int'(rf[13]);
      end else for (int r = 0; r < 4; r++) y[o0 + r] = int'(rf[10 + r]);
    end
    t1 = $time;
    check((t1 - t0) == n_instr * 20, $sformatf("one instruction per core cycle (%0d cycles for %0d)", (t1 - t0) / 20, n_instr));
    for (int o = 0; o < N_OUT; o++)
      check(y[o] == y_ref[o], $sformatf("w%0da%0d y[%0d]=%0d expected %0d", wb, ab, o, y[o], y_ref[o]));
  endtask

  initial begin
    foreach (rf[i]) rf[i] = '0;
    foreach (cnt_cfg[i, j]) cnt_cfg[i][j] = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk); #1;

    // all nine configurations, several times each
    for (int rep = 0; rep < 3; rep++)
      for (int wc = 0; wc < 3; wc++)
        for (int ac = 0; ac < 3; ac++)
          run_layer(2'(wc), 2'(ac));

    // RV32M multiplies through the shared array
    for (int t = 0; t < 400; t++) begin
      logic [31:0] a, bb;
      int op;
      a = $urandom; bb = $urandom;
      if (t % 10 == 0) a = 32'h8000_0000;
      if (t % 10 == 1) bb = 32'hFFFF_FFFF;
      op = t % 4;
      setreg(8, a); setreg(9, bb);
      issue(enc_mul(op, 5'd20, 5'd8, 5'd9));
      check(last_we && last_wdata == ref_mul(op, a, bb), $sformatf("mul op %0d %08h*%08h", op, a, bb));
      cnt_mul[op]++;
    end
    // undefined custom-0 words write nothing and are flagged
    for (int t = 0; t < 4; t++) begin
      valid = 1;
      if (t == 0) instr = {7'b000_1011, 5'd1, 5'd2, 3'b010, 5'd3, 7'b0001011};  // weight code 11
      else        instr = {7'b000_0000, 5'd1, 5'd2, 3'(4 + t), 5'd3, 7'b0001011}; // funct3 101..111
      #17;
      check(illegal && handled && !we, "undefined custom-0 word");
      cnt_illegal++;
      @(posedge clk); #1;
    end
    valid = 0;

    // every mechanism must have happened
    check(cnt_mode[1] > 0, "Mode-1 used");
    check(cnt_mode[2] > 0, "Mode-2 (multi-pumped) used");
    check(cnt_mode[3] > 0, "Mode-3 (soft SIMD) used");
    for (int i = 0; i < 3; i++) for (int j = 0; j < 3; j++) check(cnt_cfg[i][j] > 0, "width pair used");
    check(cnt_simd_neg > 0, "soft-SIMD negative low field");
    check(cnt_second_half > 0, "second fast cycle lanes");
    check(cnt_bias_shift > 0, "bias shift");
    for (int i = 0; i < 4; i++) check(cnt_mul[i] > 0, "multiply variant");
    check(cnt_illegal > 0 && cnt_back_to_back > 0 && cnt_rdacc > 0, "illegal/back-to-back/read");
    $display("mechanisms: mode1=%0d mode2=%0d mode3=%0d simd_neg=%0d second_half=%0d bias_shift=%0d mul=%0d/%0d/%0d/%0d illegal=%0d back_to_back=%0d rdacc=%0d",
             cnt_mode[1], cnt_mode[2], cnt_mode[3], cnt_simd_neg, cnt_second_half, cnt_bias_shift,
             cnt_mul[0], cnt_mul[1], cnt_mul[2], cnt_mul[3], cnt_illegal, cnt_back_to_back, cnt_rdacc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
