// mp_operand_decoder: splits packed activations and weights into multiplier operands.
//
// What it does: for one nn_mac instruction it produces the 17-bit operand pair of
// each of the four multipliers (M1..M4) for each of the two fast cycles of a core
// cycle (ops_o[phase][mult]). Activations come from rs1, weights from rs2.
//
// How. Activation element c (c = 0..3, A1..A4) is the c-th element of rs1 at the
// activation width, sign-extended. Weights are numbered as in the mode figures,
// W<row><col>, lowest field first:
//   Mode-1 (8-bit weights) W1..W4 = bytes 0..3 of rs2.
//       phase p: M1 = W(2p+1)*A(2p+1), M3 = W(2p+2)*A(2p+2), M2 = M4 = 0
//   Mode-2 (4-bit weights) nibbles 0..7 = W11 W12 W21 W22 W31 W32 W41 W42.
//       phase p: M1 = W(2p+1)1*A(2p+1), M2 = W(2p+1)2*A(2p+2),
//                M3 = W(2p+2)1*A(2p+1), M4 = W(2p+2)2*A(2p+2)
//   Mode-3 (2-bit weights) crumbs 0..15 = W11..W14 W21..W24 W31..W34 W41..W44.
//       phase p, multiplier c: a = (W(2p+2)c << 12) + W(2p+1)c, b = Ac   (soft SIMD)
// In Mode-3 a single multiplier therefore yields two products, one in bits
// [11:0] and one from bit 12 up, with 2 guard bits left for the sum of two
// products in the partial-product adders.
//
// Interface/timing: combinational; ops_o[0] is applied to the multipliers in the
// first fast cycle, ops_o[1] in the second.
//
// Paper vs. this design: the three operand mappings, the 12-bit soft-SIMD offset
// and the sign-extended operands are taken from the paper's mode figure and text.
// Using only the lowest four activation elements when activations are 4 or 2 bit
// wide is this design's choice: the paper does not say how the extra elements of
// a 4- or 2-bit packed activation register are mapped onto the four multipliers.
module mp_operand_decoder
  import marvin_pkg::*;
(
  input  logic [31:0] act_i,   // rs1: packed activations
  input  logic [31:0] wgt_i,   // rs2: packed weights
  input  bw_e         wbw_i,
  input  bw_e         abw_i,
  output mpair_t      ops_o [2][N_MULT]
);

  mop_t act [4];

  // activation elements A1..A4, sign-extended to 17 bits
  always_comb begin
    for (int c = 0; c < 4; c++) begin
      case (abw_i)
        BW8:     act[c] = mop_t'($signed(act_i[8*c +: 8]));
        BW4:     act[c] = mop_t'($signed(act_i[4*c +: 4]));
        default: act[c] = mop_t'($signed(act_i[2*c +: 2]));
      endcase
    end
  end

  function automatic mop_t w8(input logic [31:0] w, input int k);
    return mop_t'($signed(w[8*k +: 8]));
  endfunction

  function automatic mop_t w4(input logic [31:0] w, input int k);
    return mop_t'($signed(w[4*k +: 4]));
  endfunction

  function automatic mop_t w2(input logic [31:0] w, input int k);
    return mop_t'($signed(w[2*k +: 2]));
  endfunction

  always_comb begin
    for (int p = 0; p < 2; p++) begin
      for (int m = 0; m < N_MULT; m++) ops_o[p][m] = '0;
      case (wbw_i)
        BW8: begin
          ops_o[p][0] = '{a: w8(wgt_i, 2*p),     b: act[2*p]};
          ops_o[p][2] = '{a: w8(wgt_i, 2*p + 1), b: act[2*p + 1]};
        end
        BW4: begin
          // rows 2p and 2p+1, two weights each, against A(2p), A(2p+1)
          ops_o[p][0] = '{a: w4(wgt_i, 4*p + 0), b: act[2*p]};
          ops_o[p][1] = '{a: w4(wgt_i, 4*p + 1), b: act[2*p + 1]};
          ops_o[p][2] = '{a: w4(wgt_i, 4*p + 2), b: act[2*p]};
          ops_o[p][3] = '{a: w4(wgt_i, 4*p + 3), b: act[2*p + 1]};
        end
        default: begin
          // soft SIMD: row 2p in the low field, row 2p+1 shifted by SIMD_SHIFT
          for (int c = 0; c < 4; c++) begin
            ops_o[p][c].a = (w2(wgt_i, 4*(2*p + 1) + c) <<< SIMD_SHIFT) + w2(wgt_i, 4*(2*p) + c);
            ops_o[p][c].b = act[c];
          end
        end
      endcase
    end
  end

endmodule
