// mp_mac_unit: four 32-bit accumulators fed twice per core cycle.
//
// What it does: owns the accumulators acc0..acc3 of the mixed-precision unit.
// An nn_mac instruction adds four lane sums to them, one per accumulator; nn_bias
// loads one pair of accumulators with two (shifted) biases; nn_rdacc reads one.
//
// How. The multiplier array runs on clk_fast_i, twice the core clock and phase
// aligned with it. A phase detector (a toggle flop in the core domain sampled by
// a flop in the fast domain) gives phase1_o = 0 in the first half of a core cycle
// and 1 in the second. The lane former turns the two partial-product-adder sums
// of the current fast cycle into two lane sums:
//   Modes 1 and 2: lane_a = ppa0, lane_b = ppa1 (low 32 bits)
//   Mode 3 (soft SIMD): each PPA sum carries two fields; the low field is the
//     sign-extended bits [11:0], the high field (sum - low) >>> 12. Then
//     lane_a = low(ppa0) + low(ppa1), lane_b = high(ppa0) + high(ppa1).
// At the mid-cycle fast edge the first-fast-cycle lanes (0 and 1) are stored in
// the fast-domain register stage; at the next core edge lanes 0/1 from that
// register and lanes 2/3, formed in the second fast cycle, are added to the
// accumulators. This register stage is what brings the first half's results back
// into the core clock domain, so the unit accepts one instruction per core cycle
// and never stalls.
//
// Interface/timing: mac_en_i, bias_en_i and their operands are core-domain
// signals, stable for the whole core cycle. acc_o changes at the core edge that
// ends the instruction's cycle. mac_sum_o (the sum of the four lane sums of the
// current instruction) and rd_acc_o (acc_sel_i) are valid by the end of the cycle.
//
// Paper vs. this design: the 32-bit accumulators, the bias shifter in front of a
// mux into the accumulators, the fast-domain register, double pumping and the
// 12-bit soft-SIMD field split follow the paper. The phase detector, the
// accumulator count being exactly four, reset to zero and the bias-load and
// read-out behaviour are this design's choices.
module mp_mac_unit
  import marvin_pkg::*;
(
  input  logic       clk_i,        // core clock
  input  logic       clk_fast_i,   // 2x core clock, rising edges aligned
  input  logic       rst_ni,
  // nn_mac
  input  logic       mac_en_i,
  input  logic       simd_i,       // Mode-3: split soft-SIMD fields
  input  prod_t      ppa_i [2],    // PPA sums of the current fast cycle
  // nn_bias
  input  logic       bias_en_i,
  input  logic       hi_pair_i,
  input  logic [4:0] shamt_i,
  input  acc_t       bias0_i,
  input  acc_t       bias1_i,
  // nn_rdacc
  input  logic [1:0] acc_sel_i,
  output acc_t       rd_acc_o,
  // status / results
  output logic       phase1_o,
  output acc_t       mac_sum_o,
  output acc_t       acc_o [N_LANES]
);

  // ------------------------------------------------------------ phase detector
  logic tgl_q, tgl_fast_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) tgl_q <= 1'b0;
    else         tgl_q <= ~tgl_q;
  end

  always_ff @(posedge clk_fast_i or negedge rst_ni) begin
    if (!rst_ni) tgl_fast_q <= 1'b0;
    else         tgl_fast_q <= tgl_q;
  end

  assign phase1_o = (tgl_q == tgl_fast_q);

  // ------------------------------------------------------------ lane former
  function automatic acc_t lo_field(input prod_t s);
    return acc_t'($signed(s[SIMD_SHIFT-1:0]));
  endfunction

  function automatic acc_t hi_field(input prod_t s);
    prod_t d;
    d = (s - prod_t'(lo_field(s))) >>> SIMD_SHIFT;
    return acc_t'(d);
  endfunction

  acc_t lane_a, lane_b;

  always_comb begin
    if (simd_i) begin
      lane_a = lo_field(ppa_i[0]) + lo_field(ppa_i[1]);
      lane_b = hi_field(ppa_i[0]) + hi_field(ppa_i[1]);
    end else begin
      lane_a = acc_t'(ppa_i[0]);
      lane_b = acc_t'(ppa_i[1]);
    end
  end

  // ------------------------------------------------------------ fast-domain register stage
  acc_t first_q [2];

  always_ff @(posedge clk_fast_i or negedge rst_ni) begin
    if (!rst_ni) begin
      first_q[0] <= '0;
      first_q[1] <= '0;
    end else if (!phase1_o) begin
      first_q[0] <= lane_a;
      first_q[1] <= lane_b;
    end
  end

  acc_t lane [N_LANES];
  assign lane[0] = first_q[0];
  assign lane[1] = first_q[1];
  assign lane[2] = lane_a;
  assign lane[3] = lane_b;

  assign mac_sum_o = lane[0] + lane[1] + lane[2] + lane[3];

  // ------------------------------------------------------------ bias shifter, mux, accumulators
  acc_t bias_sh [2];
  assign bias_sh[0] = bias0_i <<< shamt_i;
  assign bias_sh[1] = bias1_i <<< shamt_i;

  acc_t acc_q [N_LANES];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int i = 0; i < N_LANES; i++) acc_q[i] <= '0;
    end else if (bias_en_i) begin
      acc_q[{hi_pair_i, 1'b0}] <= bias_sh[0];
      acc_q[{hi_pair_i, 1'b1}] <= bias_sh[1];
    end else if (mac_en_i) begin
      for (int i = 0; i < N_LANES; i++) acc_q[i] <= acc_q[i] + lane[i];
    end
  end

  assign acc_o    = acc_q;
  assign rd_acc_o = acc_q[acc_sel_i];

  // one accumulator operation per core cycle
  a_one_op : assert property (@(posedge clk_i) disable iff (!rst_ni) !(bias_en_i && mac_en_i));

endmodule
