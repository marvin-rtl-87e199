// marvin_ex_unit: mixed-precision execution unit of the extended RV32 core (top).
//
// What it does: executes, one per core cycle, the nine nn_mac_w<W>a<A>
// mixed-precision multiply-accumulate instructions, the accumulator bias-load
// and read instructions, and the RV32M multiplies MUL/MULH/MULHSU/MULHU, which
// share the same multiplier array. Fetch, the register file, the rest of the
// ALU, load/store and CSRs belong to the host core; this unit sees the
// instruction word and the two register operands and returns a write-back.
//
// How: nn_insn_decoder classifies the instruction; mp_operand_decoder cuts rs1
// (activations) and rs2 (weights) into two sets of four 17-bit operand pairs, one
// per fast cycle; a mux controlled by the instruction class (the funct3 mux of
// the microarchitecture) feeds either those or the baseline 16-bit halves of the
// multiply operands to mp_mult_array; mp_mac_unit accumulates the
// partial-product sums into four 32-bit accumulators. In nn_mac the array is
// double pumped: the first fast cycle computes accumulator lanes 0/1, the second
// lanes 2/3. The baseline multiply forms its 64-bit product from the four
// 17 x 17 partial products LL, LH, HL and HH:
//   P = LL + ((LH + HL) << 16) + (HH << 32)
// so MULH, MULHSU and MULHU also complete in one core cycle.
//
// Interface/timing: instr_valid_i, instr_i, rs1_rdata_i, rs2_rdata_i are stable
// during one core cycle; rf_we_o, rf_waddr_o, rf_wdata_o are the write-back for
// that same cycle (valid at its end, for a register file that writes on the
// next core edge). nn_mac writes rd with the sum of its four lane sums (the full
// dot product contribution of the instruction); the lane sums themselves go to
// the accumulators, which nn_rdacc returns. nn_bias writes no register.
// clk_fast_i must run at twice clk_i with rising edges aligned, both from one PLL.
//
// Paper vs. this design: the instruction encodings of the nine nn_mac
// instructions, the mode mapping, the four-multiplier array with two pairwise
// adders, double pumping and soft SIMD follow the paper. The unit boundary, the
// nn_mac write-back value, the two accumulator instructions, and the
// single-cycle MULH* (using the added multiplier for HH) are this design's own.
module marvin_ex_unit
  import marvin_pkg::*;
(
  input  logic        clk_i,
  input  logic        clk_fast_i,
  input  logic        rst_ni,
  // instruction and register operands from the core's decode stage
  input  logic        instr_valid_i,
  input  logic [31:0] instr_i,
  output logic [4:0]  rs1_addr_o,
  output logic [4:0]  rs2_addr_o,
  input  logic [31:0] rs1_rdata_i,
  input  logic [31:0] rs2_rdata_i,
  // write-back to the register file
  output logic        rf_we_o,
  output logic [4:0]  rf_waddr_o,
  output logic [31:0] rf_wdata_o,
  // status
  output logic        handled_o,   // instruction belongs to this unit
  output logic        illegal_o,   // undefined custom-0 encoding
  output logic [1:0]  mode_o,      // operating mode of the current nn_mac (1..3), else 0
  output logic [31:0] acc_o [N_LANES]
);

  mp_ctrl_t ctrl;

  nn_insn_decoder u_dec (
    .instr_i (instr_i),
    .ctrl_o  (ctrl)
  );

  assign rs1_addr_o = ctrl.rs1;
  assign rs2_addr_o = ctrl.rs2;

  logic is_mac, is_mul, is_bias;
  assign is_mac   = instr_valid_i && ctrl.op == OP_NN_MAC;
  assign is_bias  = instr_valid_i && ctrl.op == OP_NN_BIAS;
  assign is_mul   = instr_valid_i && ctrl.op inside {OP_MUL, OP_MULH, OP_MULHSU, OP_MULHU};

  // ------------------------------------------------------------ operand paths
  mpair_t mac_ops [2][N_MULT];

  mp_operand_decoder u_opdec (
    .act_i (rs1_rdata_i),
    .wgt_i (rs2_rdata_i),
    .wbw_i (ctrl.wbw),
    .abw_i (ctrl.abw),
    .ops_o (mac_ops)
  );

  // baseline multiply: 17-bit halves, the high half sign-extended for signed operands
  logic a_signed, b_signed;
  mop_t a_lo, a_hi, b_lo, b_hi;
  mpair_t base_ops [N_MULT];

  always_comb begin
    a_signed = ctrl.op inside {OP_MULH, OP_MULHSU};
    b_signed = ctrl.op == OP_MULH;
    a_lo = mop_t'({1'b0, rs1_rdata_i[15:0]});
    b_lo = mop_t'({1'b0, rs2_rdata_i[15:0]});
    a_hi = mop_t'({a_signed & rs1_rdata_i[31], rs1_rdata_i[31:16]});
    b_hi = mop_t'({b_signed & rs2_rdata_i[31], rs2_rdata_i[31:16]});
    base_ops[0] = '{a: a_lo, b: b_lo};  // LL
    base_ops[1] = '{a: a_hi, b: b_hi};  // HH (added multiplier)
    base_ops[2] = '{a: a_lo, b: b_hi};  // LH
    base_ops[3] = '{a: a_hi, b: b_lo};  // HL
  end

  // instruction-class mux in front of the array; the fast phase picks the
  // operand set of the current fast cycle
  logic   phase1;
  mpair_t arr_ops [N_MULT];

  always_comb begin
    for (int m = 0; m < N_MULT; m++) begin
      if (is_mac) arr_ops[m] = mac_ops[phase1][m];
      else if (is_mul) arr_ops[m] = base_ops[m];
      else arr_ops[m] = '0;   // idle: keep the array quiet
    end
  end

  prod_t prod [N_MULT];
  prod_t ppa  [2];

  mp_mult_array u_arr (
    .ops_i  (arr_ops),
    .prod_o (prod),
    .ppa_o  (ppa)
  );

  // ------------------------------------------------------------ MAC unit
  acc_t mac_sum, rd_acc;
  acc_t acc [N_LANES];

  mp_mac_unit u_mac (
    .clk_i      (clk_i),
    .clk_fast_i (clk_fast_i),
    .rst_ni     (rst_ni),
    .mac_en_i   (is_mac),
    .simd_i     (ctrl.mode == MODE3),
    .ppa_i      (ppa),
    .bias_en_i  (is_bias),
    .hi_pair_i  (ctrl.hi_pair),
    .shamt_i    (ctrl.shamt),
    .bias0_i    (rs1_rdata_i),
    .bias1_i    (rs2_rdata_i),
    .acc_sel_i  (ctrl.acc_sel),
    .rd_acc_o   (rd_acc),
    .phase1_o   (phase1),
    .mac_sum_o  (mac_sum),
    .acc_o      (acc)
  );

  always_comb begin
    for (int i = 0; i < N_LANES; i++) acc_o[i] = acc[i];
  end

  // ------------------------------------------------------------ baseline product
  logic signed [63:0] full_prod;
  assign full_prod = 64'(prod[0]) + (64'(ppa[1]) <<< 16) + (64'(prod[1]) <<< 32);

  // ------------------------------------------------------------ write-back
  always_comb begin
    rf_wdata_o = '0;
    unique case (ctrl.op)
      OP_NN_MAC:   rf_wdata_o = mac_sum;
      OP_NN_RDACC: rf_wdata_o = rd_acc;
      OP_MUL:      rf_wdata_o = full_prod[31:0];
      OP_MULH,
      OP_MULHSU,
      OP_MULHU:    rf_wdata_o = full_prod[63:32];
      default:     rf_wdata_o = '0;
    endcase
  end

  assign rf_we_o    = instr_valid_i && ctrl.writes_rd && ctrl.rd != 5'd0;
  assign rf_waddr_o = ctrl.rd;
  assign handled_o  = instr_valid_i && (ctrl.op != OP_NONE || ctrl.illegal);
  assign illegal_o  = instr_valid_i && ctrl.illegal;
  assign mode_o     = is_mac ? 2'(ctrl.mode) : 2'd0;

endmodule
