# A mixed-precision multiply-accumulate unit for a small RISC-V core

Quantized neural networks run well with 2-, 4- or 8-bit weights and activations.
A 32-bit embedded core, though, spends most of its time on such networks
unpacking narrow values, multiplying them one at a time, and fetching them
again. This design adds one execution unit to a small RV32IMC core (of the
Ibex class). The unit executes nine new R-type instructions,
`nn_mac_w<W>a<A>`, one for each pairing of weight width W and activation
width A in {8, 4, 2}. Each instruction takes a register of packed activations
(rs1) and a register of packed weights (rs2) and performs 4, 8 or 16
multiply-accumulates in one core cycle.

It is cheap because of reuse. A single-cycle 32x32 multiplier of this kind of
core already holds three signed 17x17 multipliers. The unit adds a fourth and
switches all four between two kinds of operands:

* the 16-bit halves of an ordinary `MUL`;
* narrow weight/activation pairs cut from the packed registers.

Three techniques raise the number of products per cycle. The weight width
alone chooses which of them are used:

| weight width | mode   | techniques used                                                   | MACs per instruction |
|--------------|--------|-------------------------------------------------------------------|----------------------|
| 8 bit        | Mode-1 | operand packing                                                   | 4                    |
| 4 bit        | Mode-2 | packing + multi-pumping (multipliers clocked at 2x the core clock) | 8                    |
| 2 bit        | Mode-3 | packing + multi-pumping + soft SIMD (two products per multiplier)  | 16                   |

The activation width (8, 4 or 2 bit) changes how rs1 is unpacked and how
large the products can be. It does not change the mode.

The RTL here is the unit alone. Fetch, the register file, load/store, CSRs,
the rest of the ALU and the divider belong to the host core and are not
included. The unit's top-level ports are where it connects to that core.

## Instructions

All of them use the custom-0 major opcode `0001011` in R-type format:
`funct7 | rs2 | rs1 | funct3 | rd | opcode`.

| instruction   | funct3 | funct7                            | effect                                                  |
|---------------|--------|-----------------------------------|---------------------------------------------------------|
| `nn_mac_wXaY` | `010`  | `000 aa ww`                       | acc[r] += lane r (r = 0..3); rd <- lane0+lane1+lane2+lane3 |
| `nn_bias`     | `011`  | `p 0 sssss`                       | acc[2p] <- rs1 << s, acc[2p+1] <- rs2 << s; no rd write  |
| `nn_rdacc`    | `100`  | `00000 kk`                        | rd <- acc[k]                                            |

The width codes `ww` (weights) and `aa` (activations) are `10` = 8 bit,
`01` = 4 bit and `00` = 2 bit, so `nn_mac_w8a8` has funct7 `0001010` and
`nn_mac_w2a2` has `0000000`. Code `11`, or nonzero funct7[6:4], is undefined,
as are custom-0 words with other funct3 values. All of these raise
`illegal_o`.

The nine `nn_mac` encodings (funct3 `010` and the funct7 values) come from the
published encoding table. The custom-0 opcode and the `nn_bias` and
`nn_rdacc` instructions are this implementation's own. They are needed because
the accumulators sit inside the unit, and a core with two register-file read
ports cannot read an accumulator as a third operand.

The unit also executes RV32M `MUL`, `MULH`, `MULHSU` and `MULHU`
(opcode `0110011`, funct7 `0000001`) on the same multipliers.

## What one nn_mac computes

Elements are signed two's-complement and numbered from the least significant
field. A[c] is activation element c of rs1. Only the four lowest activation
elements, A[0..3], are used at every activation width. The weights in rs2 are
arranged as rows. Each instruction produces four **lane sums**, one for each
accumulator:

| mode   | weights in rs2                                | lane sum r                                          |
|--------|-----------------------------------------------|-----------------------------------------------------|
| Mode-1 | 4 x 8 bit: W[r] = byte r                      | W[r] * A[r]                                         |
| Mode-2 | 8 x 4 bit: W[r][j] = nibble 2r+j               | W[r][0] * A[2(r/2)] + W[r][1] * A[2(r/2)+1]         |
| Mode-3 | 16 x 2 bit: W[r][c] = 2-bit field 4r+c         | W[r][0]*A[0] + W[r][1]*A[1] + W[r][2]*A[2] + W[r][3]*A[3] |

Software packs its weights to suit this layout. For a dense layer y = Wx + b
(as `tb_marvin_ex_unit` and the network testbenches do):

* **Mode-1:** the four lanes hold four partial sums of a single output. The
  rd value of each `nn_mac` is already that output's 4-input dot product, and
  at the end out = acc0 + acc1 + acc2 + acc3.
* **Mode-2:** two outputs per accumulator group. out[o] = acc0 + acc2 and
  out[o+1] = acc1 + acc3, where each instruction covers inputs i..i+3.
* **Mode-3:** four outputs per group, with out[o+r] = acc[r] directly.

The output bias is loaded with two `nn_bias` instructions. The results come
back with four `nn_rdacc` instructions. ReLU, requantization back to 8 bits
and pooling stay in software.

## How the four multipliers are scheduled

`mp_operand_decoder` builds two sets of operand pairs, one for each half of a
core cycle. `Mx(w, a)` means multiplier x gets weight operand w and activation
operand a.

```
            first fast cycle (lanes 0,1)         second fast cycle (lanes 2,3)
Mode-1   M1(W0,A0)  M3(W1,A1)   M2=M4=0       M1(W2,A2)  M3(W3,A3)   M2=M4=0
Mode-2   M1(W00,A0) M2(W01,A1)                M1(W20,A2) M2(W21,A3)
         M3(W10,A0) M4(W11,A1)                M3(W30,A2) M4(W31,A3)
Mode-3   Mc((W1c << 12) + W0c, Ac)  c=0..3    Mc((W3c << 12) + W2c, Ac)
```

Two partial-product adders (PPAs) then form PPA0 = M1 + M2 and PPA1 = M3 + M4.
In Modes 1 and 2 these two sums are the two lane sums of that fast cycle.
Mode-1 leaves M2 and M4 idle. Each output gets one product per fast cycle, so
it gains nothing from the doubled clock.

### Soft SIMD (Mode-3)

With 2-bit weights, one 17-bit multiplier operand carries two weights: the
row-0 weight in the low bits and the row-1 weight shifted up by 12. The
multiplier then returns two products in one number:

```
A * (W1 * 2^12 + W0) = (A * W1) * 2^12 + A * W0
```

A 2-bit by 8-bit product needs at most 10 bits. The PPA adds two such
products, so 11 bits are enough, and the 12-bit offset leaves a margin.

Separating the two fields takes care, because the low field is signed. When
A*W0 is negative, it borrows from the high field. `mp_mac_unit` recovers
both fields exactly:

* low = sign-extended bits [11:0] of the PPA sum;
* high = (sum − low) >>> 12.

Row 0 is then low(PPA0) + low(PPA1), and row 1 is high(PPA0) + high(PPA1).
This holds as long as the low field stays within −2048..2047. With 2-bit
weights that is always true: the worst case is ±512.

## Multi-pumping and the two clocks

The multipliers and PPAs run on `clk_fast_i`, a clock at twice the core
frequency. Its rising edges line up with those of `clk_i` because both come
from one PLL: 250/500 MHz in the paper's ASIC flow, 50/100 MHz on its FPGA.
Since the clocks are related, no asynchronous FIFO is needed. One `nn_mac`
instruction goes like this:

```
clk_i     __/‾‾‾‾‾‾‾‾‾\_________/‾‾‾‾‾
clk_fast  __/‾‾‾‾\____/‾‾‾‾\____/‾‾‾‾‾
             first     second
phase1_o    0         1          0
             ^ operands valid    ^ acc[0..3] += lanes (core edge)
                       ^ lanes 0,1 captured in the fast-domain register
```

The phase comes from a detector. A flop in the core domain toggles every core
cycle, and a flop in the fast domain samples it. The two flops differ in the
first half of a core cycle and match in the second. This keeps the phase
correct after reset without any extra alignment signal.

The operand mux in `marvin_ex_unit` uses this phase to choose the first or
second operand set. At the mid-cycle fast edge, lanes 0 and 1 go into a
register stage in the fast domain. At the next core edge, the accumulators add
lanes 0 and 1 from that register and lanes 2 and 3 straight from the array.
That register stage is what carries the first half's results back into the
core domain.

The unit accepts one instruction every core cycle and never stalls. The
accumulators are current for the next instruction, so `nn_rdacc` right after
`nn_mac` reads the new value. The `nn_mac` write-back value is valid at the
end of the instruction's own cycle.

## Baseline multiply on the same array

For the RV32M multiplies the four multipliers take the 17-bit halves of the
operands. A low half is zero-extended. A high half is sign-extended for a
signed operand and zero-extended otherwise.

| multiplier | product |
|------------|---------|
| M1         | LL      |
| M2         | HH      |
| M3         | LH      |
| M4         | HL      |

PPA1 supplies LH + HL, and the product is
`P = LL + ((LH + HL) << 16) + (HH << 32)`. `MUL` returns P[31:0] and the three
`MULH` forms return P[63:32]. Because HH comes from the fourth multiplier,
the `MULH` forms also finish in one cycle. A core with only the three original
multipliers needs an extra cycle for them.

## Files

| file                        | content |
|-----------------------------|---------|
| `rtl/marvin_pkg.sv`         | encodings, widths, `mp_ctrl_t`, operand types |
| `rtl/nn_insn_decoder.sv`    | instruction word -> control word |
| `rtl/mp_operand_decoder.sv` | packed registers -> 2 x 4 operand pairs (mode mapping, soft-SIMD packing) |
| `rtl/mp_mult_array.sv`      | four signed 17x17 multipliers, two 34-bit PPAs |
| `rtl/mp_mac_unit.sv`        | phase detector, lane former (soft-SIMD split), fast register stage, bias shifter, 4 x 32-bit accumulators |
| `rtl/marvin_ex_unit.sv`     | top: decoder, operand mux, array, MAC unit, baseline multiply, write-back |
| `tb/marvin_ref_pkg.sv`      | element-level reference model and instruction encoders |
| `tb/marvin_net_harness.sv`  | unit, clocks, register-file model and layer routines shared by the network tests |
| `tb/tb_*.sv`                | one self-checking testbench per module, plus four whole-network tests |

The design has no size parameters. The widths come from the published
microarchitecture: 17-bit multipliers, 34-bit adders, four 32-bit
accumulators and a 12-bit soft-SIMD offset. They are collected in
`marvin_pkg`.

### Top-level interface (`marvin_ex_unit`)

* **Clocks and reset:** `clk_i`, `clk_fast_i` (2x, aligned) and `rst_ni`
  (asynchronous, active low).
* **Inputs for one core cycle:** `instr_valid_i`, `instr_i`, `rs1_rdata_i` and
  `rs2_rdata_i`, held stable for the whole cycle. The read addresses
  `rs1_addr_o` and `rs2_addr_o` are decoded combinationally from `instr_i`.
* **Write-back:** `rf_we_o`, `rf_waddr_o` and `rf_wdata_o`, valid at the end
  of the same cycle.
* **Status:** `handled_o` (the instruction belongs to this unit), `illegal_o`,
  `mode_o` (1..3 during an `nn_mac`, else 0) and `acc_o` (the four
  accumulators, for observation).

## Simulating

Every testbench ends with a line `TB_RESULT checks=N failures=M`. The
commands below use Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_marvin_ex_unit \
  -y rtl -y tb +libext+.sv rtl/marvin_pkg.sv tb/marvin_ref_pkg.sv tb/tb_marvin_ex_unit.sv
./obj_dir/Vtb_marvin_ex_unit
```

Swap in another testbench name to run it:

* **`tb_nn_insn_decoder`:** all nine encodings, written out literally from the
  published table, plus the extra instructions, the multiplies and undefined
  words.
* **`tb_mp_operand_decoder`:**
  * each multiplier operand against the mode mapping above;
  * lane equivalence with the reference for all nine width pairs.
* **`tb_mp_mult_array`:** products and PPA sums, including the extreme
  operands −65536 and 65535.
* **`tb_mp_mac_unit`:** the testbench stands in for the array. It checks:
  * the phase;
  * that the accumulators change exactly at the core edge;
  * normal and soft-SIMD lanes, bias loads with shifts, and reads.
* **`tb_marvin_ex_unit`:** the whole unit, with a register-file model and
  back-to-back issue. It checks:
  * a 32-input, 8-output dense layer in all nine configurations;
  * every `nn_mac` write-back;
  * 400 random multiplies and undefined words;
  * one instruction per core cycle.

  It also counts each mechanism (every mode, soft-SIMD borrow, second-half
  lanes, bias shift, each multiply) and fails if one never occurs.
### Whole networks

Four testbenches run complete image-classification networks through the unit.
They share `marvin_net_harness`, which plays the part of the host core's
software:

* it packs weights and activations into registers;
* it loads biases with `nn_bias`, streams `nn_mac` and reads the four
  accumulators with `nn_rdacc`;
* it does ReLU, requantization (shift and clamp) and pooling itself.

Weights and input images are random. Every output of every layer is checked
against plain integer arithmetic. Each test also checks that the unit took
exactly one core cycle per instruction. The per-layer widths are the tests'
own choice. They mix all three modes. Times are for one run on a single host
thread.

| test | network | multiply slots | unit instructions | checks | time |
|------|---------|---------------:|------------------:|-------:|-----:|
| `tb_marvin_lenet5` | LeNet-5, 1x32x32 | 0.43 M | 53,138 | 6,520 | < 1 s |
| `tb_marvin_cifar10_cnn` | 3 conv + 1 dense, 3x32x32 | 12.3 M | 1,045,052 | 45,068 | 1 s |
| `tb_marvin_mobilenet_v1` | MobileNetV1 1.0, 3x224x224 | 575 M | 91,256,176 | 5,043,690 | 80 s |
| `tb_marvin_resnet18` | ResNet-18, 3x224x224 | 1.81 G | 130,290,544 | 2,484,714 | 135 s |

"Multiply slots" counts the multiplier positions the instructions occupy,
including zero padding. So it is slightly above the networks' MAC counts.
These instruction counts cover only the unit. The host's loads, loops and
requantization are not modelled, so the counts are not comparable with
whole-program cycle counts.

Depthwise convolutions run as one output per dot product, which leaves three
of the four lanes idle. Mode-1 could take four channels at once, but the
harness does not do that.

## Where this design departs from, or goes beyond, the paper

The paper gives these points, and they are followed:

* the nine encodings;
* the mode chosen by the weight width;
* four 17x17 multipliers (one added) paired into two 34-bit adders;
* the per-fast-cycle operand assignment of the three modes;
* 12-bit soft-SIMD spacing;
* sign-extended operands;
* four 32-bit accumulators fed through a fast-domain register stage, with a
  bias shifter and mux in front of them;
* clocks at 1x and 2x, phase-aligned.

The following are choices of this implementation:

* **Activations narrower than 8 bits.** The encoding table says rs1 holds
  8 x 4-bit or 16 x 2-bit activations. It does not say how more than four
  activation elements reach four multipliers. Here only the lowest four are
  used, whatever the width. This is the largest uncertainty in the design.
  Another reading (for example, consuming all elements over several
  instructions) would change the operand decoder and the reference model,
  but not the array or the accumulators.
* **Which accumulator each lane sum goes to**, and so the software weight
  layout described above.
* **The nn_mac rd value.** Here it is the sum of the four lane sums. The paper
  calls rd "the accumulator" and shows a matrix-vector loop writing the output
  from each instruction, but it also keeps the accumulators in the unit.
* **`nn_bias`, `nn_rdacc` and the custom-0 opcode.** The paper shows biases
  entering through a shifter and says results are read from the accumulators,
  but gives no encodings. The bias shift is a left shift by a 5-bit amount.
* **The phase detector and the exact edge at which each half is captured.**
* **Single-cycle MULH forms.**
* **No divider.**
* **Reset values.** Everything resets to zero, asynchronously.

The paper is inconsistent in three places:

* Its text says the second soft-SIMD field starts at bit 11, but also that the
  weight is shifted by 12. This design uses 12, as in the equation and the
  mode figure.
* The soft-SIMD equation names one weight twice differently: the packed
  operand is written with the second weight of the first row, the product
  with the first. The product side is followed, as in the mode figure, so
  both fields of a multiplier hold the same element position of two rows.
* The microarchitecture figure puts rs1 at the weight input of the decoder,
  while the encoding table says rs1 holds the activations. The table is
  followed.

Not covered by this RTL:

* the host core (fetch, register file, controller, CSRs, load/store, memory
  protection, ALU, divider);
* the PLL;
* the software side of the original framework: pruning, precision search,
  toolchain support and voltage scaling.

The paper's efficiency and speed-up figures come from the whole core running
whole programs, so they cannot be checked with this unit alone.
