// marvin_pkg: types and constants shared by the mixed-precision execution unit.
//
// The unit extends a small RV32 core with nine R-type multiply-accumulate
// instructions, nn_mac_w<W>a<A>, where <W> and <A> are the bit-widths (2, 4 or 8)
// of the packed weights (rs2) and activations (rs1). The funct7/funct3 values of
// those nine instructions follow the published encoding table: funct3 = 010 and
// funct7 = {3'b000, act_code[1:0], wgt_code[1:0]} with code 10 = 8 bit,
// 01 = 4 bit, 00 = 2 bit. The major opcode (custom-0), the two accumulator
// housekeeping instructions (bias load, accumulator read) and the way 4- and
// 2-bit activations are selected are choices of this implementation.
package marvin_pkg;

  // ---------------------------------------------------------------- encoding
  localparam logic [6:0] OPC_CUSTOM0 = 7'b000_1011;  // RISC-V custom-0 major opcode
  localparam logic [6:0] OPC_OP      = 7'b011_0011;  // RV32 OP (carries RV32M)
  localparam logic [6:0] F7_MULDIV   = 7'b000_0001;

  localparam logic [2:0] F3_NN_MAC   = 3'b010;  // nn_mac_wXaY (published)
  localparam logic [2:0] F3_NN_BIAS  = 3'b011;  // nn_bias: load two accumulators
  localparam logic [2:0] F3_NN_RDACC = 3'b100;  // nn_rdacc: read one accumulator

  localparam logic [2:0] F3_MUL    = 3'b000;
  localparam logic [2:0] F3_MULH   = 3'b001;
  localparam logic [2:0] F3_MULHSU = 3'b010;
  localparam logic [2:0] F3_MULHU  = 3'b011;

  // ---------------------------------------------------------------- datapath sizes
  localparam int unsigned MULT_W     = 17;  // each multiplier is 17 x 17 signed
  localparam int unsigned PROD_W     = 34;  // product / partial-product-adder width
  localparam int unsigned ACC_W      = 32;  // accumulator width
  localparam int unsigned N_MULT     = 4;   // three baseline multipliers plus one added
  localparam int unsigned N_LANES    = 4;   // accumulators, two written per fast cycle
  localparam int unsigned SIMD_SHIFT = 12;  // soft-SIMD field offset: 10-bit product + 2 guard bits

  // ---------------------------------------------------------------- types
  // Operand bit-width codes, as used in funct7.
  typedef enum logic [1:0] {
    BW2 = 2'b00,
    BW4 = 2'b01,
    BW8 = 2'b10
  } bw_e;

  // Operating mode is set by the weight width: 8 bit -> Mode-1 (packing only),
  // 4 bit -> Mode-2 (packing + multi-pumping), 2 bit -> Mode-3 (+ soft SIMD).
  typedef enum logic [1:0] {
    MODE1 = 2'd1,
    MODE2 = 2'd2,
    MODE3 = 2'd3
  } mode_e;

  typedef enum logic [2:0] {
    OP_NONE,
    OP_NN_MAC,
    OP_NN_BIAS,
    OP_NN_RDACC,
    OP_MUL,
    OP_MULH,
    OP_MULHSU,
    OP_MULHU
  } mp_op_e;

  typedef struct packed {
    mp_op_e      op;
    bw_e         wbw;       // weight width (nn_mac)
    bw_e         abw;       // activation width (nn_mac)
    mode_e       mode;      // derived from wbw
    logic        hi_pair;   // nn_bias: 0 -> acc0/acc1, 1 -> acc2/acc3
    logic [4:0]  shamt;     // nn_bias: left shift applied to both biases
    logic [1:0]  acc_sel;   // nn_rdacc: accumulator to read
    logic [4:0]  rs1;
    logic [4:0]  rs2;
    logic [4:0]  rd;
    logic        writes_rd;
    logic        illegal;   // custom-0 word that is not a defined instruction
  } mp_ctrl_t;

  typedef logic signed [MULT_W-1:0] mop_t;   // one 17-bit multiplier operand
  typedef logic signed [PROD_W-1:0] prod_t;  // one 34-bit product or PPA sum
  typedef logic signed [ACC_W-1:0]  acc_t;

  // Operand pair of one multiplier: a = packed weight port (A + C ports of the
  // soft-SIMD figure, already combined), b = activation port.
  typedef struct packed {
    mop_t a;
    mop_t b;
  } mpair_t;

  function automatic mode_e mode_of(bw_e wbw);
    case (wbw)
      BW8:     return MODE1;
      BW4:     return MODE2;
      default: return MODE3;
    endcase
  endfunction

endpackage
