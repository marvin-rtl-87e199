// marvin_ref_pkg: reference model and instruction encoders for the testbenches.
//
// The reference computes the four accumulator lane sums of an nn_mac instruction
// directly from the element-level definition, with no operand packing, no
// soft-SIMD fields and no multi-pumping:
//   Mode-1 (8-bit W): lane r = W[r] * A[r]
//   Mode-2 (4-bit W): lane r = W[r][0] * A[2*(r/2)] + W[r][1] * A[2*(r/2)+1]
//   Mode-3 (2-bit W): lane r = sum_c W[r][c] * A[c]
// where W[r][j] is weight field (fields per row)*r + j of rs2, lowest first, and
// A[c] is the c-th activation element of rs1. All elements are signed.
package marvin_ref_pkg;

  function automatic int sext(input logic [31:0] v, input int bits);
    int s;
    s = int'(v & ((32'd1 << bits) - 1));
    if (s >= (1 << (bits - 1))) s -= (1 << bits);
    return s;
  endfunction

  function automatic int wbits(input logic [1:0] code);
    return (code == 2'b10) ? 8 : (code == 2'b01) ? 4 : 2;
  endfunction

  function automatic int elem(input logic [31:0] word, input int bits, input int k);
    return sext(word >> (bits * k), bits);
  endfunction

  // lane sums of one nn_mac instruction; wc/ac are the funct7 width codes
  function automatic void ref_lanes(input logic [31:0] rs1, input logic [31:0] rs2,
                                    input logic [1:0] wc, input logic [1:0] ac,
                                    output int lane [4]);
    int wb, ab;
    wb = wbits(wc);
    ab = wbits(ac);
    for (int r = 0; r < 4; r++) begin
      lane[r] = 0;
      case (wb)
        8: lane[r] = elem(rs2, 8, r) * elem(rs1, ab, r);
        4: for (int j = 0; j < 2; j++)
             lane[r] += elem(rs2, 4, 2*r + j) * elem(rs1, ab, 2*(r/2) + j);
        default: for (int c = 0; c < 4; c++)
             lane[r] += elem(rs2, 2, 4*r + c) * elem(rs1, ab, c);
      endcase
    end
  endfunction

  // RV32M reference: op 0 MUL, 1 MULH, 2 MULHSU, 3 MULHU
  function automatic logic [31:0] ref_mul(input int op, input logic [31:0] a, input logic [31:0] b);
    longint sa, sb, ua, ub, p;
    sa = longint'($signed(a));
    sb = longint'($signed(b));
    ua = longint'({32'd0, a});
    ub = longint'({32'd0, b});
    case (op)
      0: p = sa * sb;
      1: p = sa * sb;
      2: p = sa * ub;
      default: p = ua * ub;
    endcase
    return (op == 0) ? p[31:0] : p[63:32];
  endfunction

  // ------------------------------------------------------------ encoders
  function automatic logic [31:0] enc_r(input logic [6:0] f7, input logic [4:0] rs2,
                                        input logic [4:0] rs1, input logic [2:0] f3,
                                        input logic [4:0] rd, input logic [6:0] opc);
    return {f7, rs2, rs1, f3, rd, opc};
  endfunction

  function automatic logic [31:0] enc_mac(input logic [1:0] wc, input logic [1:0] ac,
                                          input logic [4:0] rd, input logic [4:0] rs1,
                                          input logic [4:0] rs2);
    return enc_r({3'b000, ac, wc}, rs2, rs1, 3'b010, rd, 7'b000_1011);
  endfunction

  function automatic logic [31:0] enc_bias(input logic hi, input logic [4:0] sh,
                                           input logic [4:0] rs1, input logic [4:0] rs2);
    return enc_r({hi, 1'b0, sh}, rs2, rs1, 3'b011, 5'd0, 7'b000_1011);
  endfunction

  function automatic logic [31:0] enc_rdacc(input logic [1:0] sel, input logic [4:0] rd);
    return enc_r({5'b0, sel}, 5'd0, 5'd0, 3'b100, rd, 7'b000_1011);
  endfunction

  function automatic logic [31:0] enc_mul(input int op, input logic [4:0] rd,
                                          input logic [4:0] rs1, input logic [4:0] rs2);
    return enc_r(7'b000_0001, rs2, rs1, 3'(op), rd, 7'b011_0011);
  endfunction

endpackage
