// mp_mult_array: the four 17x17 multipliers and two partial-product adders.
//
// What it does: multiplies four operand pairs (signed 17 x 17 -> 34 bit) and adds
// them pairwise: ppa_o[0] = M1 + M2, ppa_o[1] = M3 + M4 (34 bits, wrapping).
// The raw products are also output, for the baseline 32-bit multiplies.
//
// How: three of the multipliers are those of the baseline single-cycle RV32M
// multiplier; the fourth (M2 here) is the added one. The array is purely
// combinational; in the mixed-precision instructions it is used twice per core
// cycle (multi-pumped), with the operands switched by the fast clock phase
// outside this module.
//
// Interface/timing: combinational, ops_i -> prod_o, ppa_o.
//
// Paper vs. this design: the four 17-bit multipliers and the two 34x34 adders,
// each summing one pair, follow the published microarchitecture figure. Which
// physical multiplier is the added one does not matter functionally.
module mp_mult_array
  import marvin_pkg::*;
(
  input  mpair_t ops_i  [N_MULT],
  output prod_t  prod_o [N_MULT],
  output prod_t  ppa_o  [2]
);

  always_comb begin
    for (int m = 0; m < N_MULT; m++) begin
      prod_o[m] = prod_t'(ops_i[m].a) * prod_t'(ops_i[m].b);
    end
    ppa_o[0] = prod_o[0] + prod_o[1];
    ppa_o[1] = prod_o[2] + prod_o[3];
  end

endmodule
