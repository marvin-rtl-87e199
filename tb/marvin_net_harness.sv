// marvin_net_harness: shared environment for the network-level testbenches.
//
// Holds one marvin_ex_unit with its two clocks (core period 20, multi-pump
// clock period 10, rising edges aligned), a behavioural 32-entry register
// file in place of the host core's, and the layer routines a small integer
// network runtime would have: dot_layer (bias load, nn_mac stream, read-back
// of the four accumulators), conv (stride, zero padding), dwconv
// (depthwise), pool2 (2x2 max), maxpool3s2, add_clamp (residual join),
// avgpool (global mean), dense and requant (ReLU, arithmetic right shift,
// clamp to the next layer's activation range). Every multiply-accumulate
// goes through the unit; every layer output is compared with a plain integer
// reference computed here. A testbench instantiates the harness and calls
// its tasks hierarchically; it owns the watchdog and the final TB_RESULT
// line. Operand packing follows the element order of the instruction format
// (weight element k of a lane is taken from output row o0 + lane); the
// runtime itself is this design's own.
`timescale 1ns/1ps
module marvin_net_harness;
  import marvin_pkg::*;
  import marvin_ref_pkg::*;

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

  always_ff @(posedge clk) if (we && waddr != 0) rf[waddr] <= wdata;

  int checks = 0, failures = 0;
  longint n_instr = 0, n_mac_ops = 0;
  longint t0 = 0;
  int cnt_mode [4] = '{0, 0, 0, 0};

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL @%0t: %s", $time, what); end
  endtask

  task automatic issue(input logic [31:0] word);
    valid = 1; instr = word;
    @(posedge clk); #1;
    n_instr++;
  endtask

  // y[o] = b[o] + sum_i w[o][i] * x[i] on the unit, for all outputs;
  // n_in must be a multiple of 4 (callers zero-pad)
  task automatic dot_layer(input int x [], input int w [][], input int b [],
                           input logic [1:0] wc, input logic [1:0] ac, output int y []);
    int wb, ab, n_in, n_out, step;
    wb = wbits(wc); ab = wbits(ac);
    n_in = x.size(); n_out = b.size();
    step = (wb == 8) ? 1 : (wb == 4) ? 2 : 4;
    y = new[n_out];
    for (int o0 = 0; o0 < n_out; o0 += step) begin
      int bl [4];
      bl = '{0, 0, 0, 0};
      for (int r = 0; r < step; r++) if (o0 + r < n_out) bl[r] = b[o0 + r];
      rf[1] = bl[0]; rf[2] = bl[1]; rf[3] = bl[2]; rf[4] = bl[3];
      issue(enc_bias(1'b0, 5'd0, 5'd1, 5'd2));
      issue(enc_bias(1'b1, 5'd0, 5'd3, 5'd4));
      for (int i0 = 0; i0 < n_in; i0 += 4) begin
        logic [31:0] aw, ww, am, wm;
        am = (32'd1 << ab) - 1;
        wm = (32'd1 << wb) - 1;
        aw = '0;
        ww = '0;
        for (int k = 0; k < 4; k++) aw |= (32'(x[i0 + k]) & am) << (ab * k);
        for (int r = 0; r < 4; r++) begin
          if (wb == 8) ww |= (32'(w[o0][i0 + r]) & wm) << (8 * r);
          else if (wb == 4) begin
            if (o0 + r % 2 < n_out)
              for (int j = 0; j < 2; j++)
                ww |= (32'(w[o0 + r % 2][i0 + 2*(r/2) + j]) & wm) << (4 * (2*r + j));
          end else if (o0 + r < n_out)
            for (int c = 0; c < 4; c++) ww |= (32'(w[o0 + r][i0 + c]) & wm) << (2 * (4*r + c));
        end
        rf[5] = aw; rf[6] = ww;
        issue(enc_mac(wc, ac, 5'd7, 5'd5, 5'd6));
        cnt_mode[mode_of(bw_e'(wc))]++;
        n_mac_ops += 4 * step;
      end
      for (int r = 0; r < 4; r++) issue(enc_rdacc(2'(r), 5'(10 + r)));
      if (wb == 8) y[o0] = int'(rf[10]) + int'(rf[11]) + int'(rf[12]) + int'(rf[13]);
      else if (wb == 4) begin
        y[o0] = int'(rf[10]) + int'(rf[12]);
        if (o0 + 1 < n_out) y[o0 + 1] = int'(rf[11]) + int'(rf[13]);
      end else for (int r = 0; r < 4; r++) if (o0 + r < n_out) y[o0 + r] = int'(rf[10 + r]);
    end
    valid = 0;
  endtask

  function automatic int rnd(input int bits);
    return $urandom_range(0, (1 << bits) - 1) - (1 << (bits - 1));
  endfunction

  function automatic int requant(input int v, input int sh, input int ab);
    int q;
    q = (v < 0) ? 0 : (v >>> sh);                 // ReLU, scale
    if (q > (1 << (ab - 1)) - 1) q = (1 << (ab - 1)) - 1;
    return q;
  endfunction

  // requantize a raw layer output in place; sh < 0 picks the smallest shift
  // that brings the largest value into the next layer's activation range
  task automatic requant_map(inout int f [][][], input int sh, input int ab_next);
    if (sh < 0) begin
      int m;
      m = 0;
      foreach (f[o, r, c]) if (f[o][r][c] > m) m = f[o][r][c];
      sh = 0;
      while ((m >>> sh) > (1 << (ab_next - 1)) - 1) sh++;
    end
    foreach (f[o, r, c]) f[o][r][c] = requant(f[o][r][c], sh, ab_next);
  endtask

  function automatic void alloc3(input int d0, input int d1, input int d2, output int f [][][]);
    f = new[d0];
    foreach (f[o]) begin
      f[o] = new[d1];
      foreach (f[o][r]) f[o][r] = new[d2];
    end
  endfunction

  // convolution (zero padding pad, stride st), inputs [ci][h][w],
  // weights [co][ci*k*k padded to a multiple of 4]
  task automatic conv(input int fin [][][], input int co, input int k, input int pad, input int st,
                      input logic [1:0] wc, input logic [1:0] ac, input int sh, input int ab_next,
                      output int fout [][][]);
    int ci, hi, wi, ho, wo, n, npad;
    int w [][];
    int b [];
    ci = fin.size(); hi = fin[0].size(); wi = fin[0][0].size();
    ho = (hi + 2*pad - k) / st + 1; wo = (wi + 2*pad - k) / st + 1;
    n = ci * k * k; npad = (n + 3) / 4 * 4;
    w = new[co];
    b = new[co];
    foreach (w[o]) begin
      w[o] = new[npad];
      foreach (w[o][i]) w[o][i] = (i < n) ? rnd(wbits(wc)) : 0;
      b[o] = $urandom_range(0, 200) - 100;
    end
    alloc3(co, ho, wo, fout);
    for (int r = 0; r < ho; r++) begin
      for (int c = 0; c < wo; c++) begin
        int x [], y [];
        x = new[npad];
        foreach (x[i]) begin
          int yy, xx;
          yy = r*st + (i % (k*k)) / k - pad;
          xx = c*st + i % k - pad;
          if (i < n && yy >= 0 && yy < hi && xx >= 0 && xx < wi) x[i] = fin[i / (k*k)][yy][xx];
          else x[i] = 0;
        end
        dot_layer(x, w, b, wc, ac, y);
        for (int o = 0; o < co; o++) begin
          int ref_v;
          ref_v = b[o];
          for (int i = 0; i < n; i++) ref_v += w[o][i] * x[i];
          check(y[o] == ref_v, $sformatf("conv out[%0d][%0d][%0d]=%0d expected %0d", o, r, c, y[o], ref_v));
          fout[o][r][c] = ref_v;
        end
      end
    end
    requant_map(fout, sh, ab_next);
  endtask

  // depthwise convolution (one k x k filter per channel, zero padding pad,
  // stride st); each output is a single-row dot product on the unit
  task automatic dwconv(input int fin [][][], input int k, input int pad, input int st,
                        input logic [1:0] wc, input logic [1:0] ac, input int sh, input int ab_next,
                        output int fout [][][]);
    int ch, hi, wi, ho, wo, n, npad;
    ch = fin.size(); hi = fin[0].size(); wi = fin[0][0].size();
    ho = (hi + 2*pad - k) / st + 1; wo = (wi + 2*pad - k) / st + 1;
    n = k * k; npad = (n + 3) / 4 * 4;
    alloc3(ch, ho, wo, fout);
    for (int q = 0; q < ch; q++) begin
      int w [][];
      int b [];
      w = new[1];
      b = new[1];
      w[0] = new[npad];
      foreach (w[0][i]) w[0][i] = (i < n) ? rnd(wbits(wc)) : 0;
      b[0] = $urandom_range(0, 200) - 100;
      for (int r = 0; r < ho; r++) begin
        for (int c = 0; c < wo; c++) begin
          int x [], y [];
          int ref_v;
          x = new[npad];
          foreach (x[i]) begin
            int yy, xx;
            yy = r*st + i / k - pad;
            xx = c*st + i % k - pad;
            if (i < n && yy >= 0 && yy < hi && xx >= 0 && xx < wi) x[i] = fin[q][yy][xx];
            else x[i] = 0;
          end
          dot_layer(x, w, b, wc, ac, y);
          ref_v = b[0];
          for (int i = 0; i < n; i++) ref_v += w[0][i] * x[i];
          check(y[0] == ref_v, $sformatf("dwconv out[%0d][%0d][%0d]=%0d expected %0d", q, r, c, y[0], ref_v));
          fout[q][r][c] = ref_v;
        end
      end
    end
    requant_map(fout, sh, ab_next);
  endtask

  // 3x3 max pooling, stride 2, padding 1 (inputs are non-negative)
  task automatic maxpool3s2(inout int f [][][]);
    int g [][][];
    int hh, ww;
    hh = f[0].size(); ww = f[0][0].size();
    alloc3(f.size(), (hh - 1) / 2 + 1, (ww - 1) / 2 + 1, g);
    foreach (g[o, r, c]) begin
      int m;
      m = 0;
      for (int dy = -1; dy <= 1; dy++)
        for (int dx = -1; dx <= 1; dx++) begin
          int yy, xx;
          yy = 2*r + dy; xx = 2*c + dx;
          if (yy >= 0 && yy < hh && xx >= 0 && xx < ww && f[o][yy][xx] > m) m = f[o][yy][xx];
        end
      g[o][r][c] = m;
    end
    f = g;
  endtask

  // residual join: element-wise sum of two requantized branches, clamped
  // to the activation range
  task automatic add_clamp(inout int f [][][], input int g [][][], input int ab);
    foreach (f[o, r, c]) begin
      f[o][r][c] += g[o][r][c];
      if (f[o][r][c] > (1 << (ab - 1)) - 1) f[o][r][c] = (1 << (ab - 1)) - 1;
    end
  endtask

  // global average pooling (integer mean per channel)
  function automatic void avgpool(input int f [][][], output int v []);
    v = new[f.size()];
    foreach (v[o]) begin
      int s;
      s = 0;
      foreach (f[o][r, c]) s += f[o][r][c];
      v[o] = s / (f[o].size() * f[o][0].size());
    end
  endfunction

  task automatic pool2(inout int f [][][]);
    int g [][][];
    g = new[f.size()];
    foreach (g[o]) begin
      g[o] = new[f[o].size() / 2];
      foreach (g[o][r]) begin
        g[o][r] = new[f[o][0].size() / 2];
        foreach (g[o][r][c]) begin
          int m;
          m = f[o][2*r][2*c];
          if (f[o][2*r][2*c+1] > m) m = f[o][2*r][2*c+1];
          if (f[o][2*r+1][2*c] > m) m = f[o][2*r+1][2*c];
          if (f[o][2*r+1][2*c+1] > m) m = f[o][2*r+1][2*c+1];
          g[o][r][c] = m;
        end
      end
    end
    f = g;
  endtask

  task automatic dense(input int x [], input int n_out, input logic [1:0] wc, input logic [1:0] ac,
                       input int sh, input int ab_next, input bit last, output int xo []);
    int w [][];
    int b [], y [];
    w = new[n_out];
    b = new[n_out];
    foreach (w[o]) begin
      w[o] = new[x.size()];
      foreach (w[o][i]) w[o][i] = rnd(wbits(wc));
      b[o] = $urandom_range(0, 200) - 100;
    end
    dot_layer(x, w, b, wc, ac, y);
    xo = new[n_out];
    for (int o = 0; o < n_out; o++) begin
      int ref_v;
      ref_v = b[o];
      foreach (x[i]) ref_v += w[o][i] * x[i];
      check(y[o] == ref_v, $sformatf("dense out[%0d]=%0d expected %0d", o, y[o], ref_v));
      xo[o] = last ? ref_v : requant(ref_v, sh, ab_next);
    end
  endtask

  task automatic start();
    foreach (rf[i]) rf[i] = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk); #1;
    t0 = $time;
  endtask

  function automatic void random_image(input int ch, input int hw, output int img [][][]);
    img = new[ch];
    foreach (img[c]) begin
      img[c] = new[hw];
      foreach (img[c][r]) begin
        img[c][r] = new[hw];
        foreach (img[c][r][x]) img[c][r][x] = $urandom_range(0, 127);
      end
    end
  endfunction

  function automatic void flatten(input int f [][][], output int v []);
    int hh, ww;
    hh = f[0].size(); ww = f[0][0].size();
    v = new[f.size() * hh * ww];
    foreach (v[i]) v[i] = f[i / (hh*ww)][(i % (hh*ww)) / ww][i % ww];
  endfunction

  // closing checks shared by the network tests
  task automatic finish_checks(input string name);
    check(($time - t0) == n_instr * 20, "one unit instruction per core cycle");
    check(cnt_mode[1] > 0 && cnt_mode[2] > 0 && cnt_mode[3] > 0, "all three modes used");
    $display("%s: %0d unit instructions (core cycles), %0d multiply slots, nn_mac per mode 1/2/3 = %0d/%0d/%0d",
             name, n_instr, n_mac_ops, cnt_mode[1], cnt_mode[2], cnt_mode[3]);
  endtask
endmodule
