// nn_insn_decoder: instruction decoder extension for the mixed-precision unit.
//
// What it does: looks at one 32-bit instruction word and tells the execution
// unit what to do with it. It recognises
//   * the nine nn_mac_w<W>a<A> instructions (custom-0, funct3 = 010,
//     funct7 = {000, act_code, wgt_code}; code 10/01/00 = 8/4/2 bit),
//   * nn_bias  (custom-0, funct3 = 011): load two accumulators with rs1, rs2,
//     funct7[6] picks the accumulator pair, funct7[4:0] is a left shift,
//   * nn_rdacc (custom-0, funct3 = 100): rd <- accumulator funct7[1:0],
//   * the RV32M multiplies MUL/MULH/MULHSU/MULHU, which share the multiplier array.
// Every other custom-0 word raises illegal; words of other opcodes give OP_NONE
// (they belong to the rest of the core).
//
// How: purely combinational field decoding. The mode is derived from the weight
// width (8 -> Mode-1, 4 -> Mode-2, 2 -> Mode-3).
//
// Interface/timing: instr_i -> ctrl_o, no clock, no state.
//
// Paper vs. this design: the funct7/funct3 values of the nine nn_mac instructions
// and the mode assignment are the published ones. The opcode (custom-0), the
// bias-load and accumulator-read instructions and their fields are this design's
// own, needed because the accumulators live inside the unit.
module nn_insn_decoder
  import marvin_pkg::*;
(
  input  logic [31:0] instr_i,
  output mp_ctrl_t    ctrl_o
);

  logic [6:0] opcode, funct7;
  logic [2:0] funct3;

  assign opcode = instr_i[6:0];
  assign funct3 = instr_i[14:12];
  assign funct7 = instr_i[31:25];

  always_comb begin
    ctrl_o           = '0;
    ctrl_o.op        = OP_NONE;
    ctrl_o.wbw       = bw_e'(funct7[1:0]);
    ctrl_o.abw       = bw_e'(funct7[3:2]);
    ctrl_o.mode      = mode_of(bw_e'(funct7[1:0]));
    ctrl_o.hi_pair   = funct7[6];
    ctrl_o.shamt     = funct7[4:0];
    ctrl_o.acc_sel   = funct7[1:0];
    ctrl_o.rs1       = instr_i[19:15];
    ctrl_o.rs2       = instr_i[24:20];
    ctrl_o.rd        = instr_i[11:7];

    if (opcode == OPC_CUSTOM0) begin
      ctrl_o.illegal = 1'b1;
      case (funct3)
        F3_NN_MAC: begin
          // funct7[6:4] must be zero, neither width code may be 11
          if (funct7[6:4] == 3'b000 && funct7[1:0] != 2'b11 && funct7[3:2] != 2'b11) begin
            ctrl_o.op        = OP_NN_MAC;
            ctrl_o.writes_rd = 1'b1;
            ctrl_o.illegal   = 1'b0;
          end
        end
        F3_NN_BIAS: begin
          if (funct7[5] == 1'b0) begin
            ctrl_o.op      = OP_NN_BIAS;
            ctrl_o.illegal = 1'b0;
          end
        end
        F3_NN_RDACC: begin
          if (funct7[6:2] == 5'b0) begin
            ctrl_o.op        = OP_NN_RDACC;
            ctrl_o.writes_rd = 1'b1;
            ctrl_o.illegal   = 1'b0;
          end
        end
        default: ;
      endcase
    end else if (opcode == OPC_OP && funct7 == F7_MULDIV && !funct3[2]) begin
      ctrl_o.writes_rd = 1'b1;
      case (funct3)
        F3_MUL:    ctrl_o.op = OP_MUL;
        F3_MULH:   ctrl_o.op = OP_MULH;
        F3_MULHSU: ctrl_o.op = OP_MULHSU;
        default:   ctrl_o.op = OP_MULHU;
      endcase
    end
  end

endmodule
