// tb_nn_insn_decoder: self-checking test of the instruction decoder.
// Checks the nine nn_mac encodings against the published funct7 table (written
// out literally here), the mode assigned to each, the two accumulator
// instructions, the RV32M multiplies, undefined custom-0 words and foreign opcodes.
`timescale 1ns/1ps
module tb_nn_insn_decoder;
  import marvin_pkg::*;

  logic [31:0] instr;
  mp_ctrl_t    ctrl;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  nn_insn_decoder dut (.instr_i(instr), .ctrl_o(ctrl));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s (instr=%08h)", what, instr);
    end
  endtask

  // Table: name, funct7, weight bits, activation bits, mode
  typedef struct { string name; logic [6:0] f7; int wb; int ab; int mode; } row_t;
  row_t tab [9] = '{
    '{"nn_mac_w8a8", 7'b000_1010, 8, 8, 1},
    '{"nn_mac_w8a4", 7'b000_0110, 8, 4, 1},
    '{"nn_mac_w8a2", 7'b000_0010, 8, 2, 1},
    '{"nn_mac_w4a8", 7'b000_1001, 4, 8, 2},
    '{"nn_mac_w4a4", 7'b000_0101, 4, 4, 2},
    '{"nn_mac_w4a2", 7'b000_0001, 4, 2, 2},
    '{"nn_mac_w2a8", 7'b000_1000, 2, 8, 3},
    '{"nn_mac_w2a4", 7'b000_0100, 2, 4, 3},
    '{"nn_mac_w2a2", 7'b000_0000, 2, 2, 3}
  };

  function automatic int bits_of(bw_e b);
    return (b == BW8) ? 8 : (b == BW4) ? 4 : 2;
  endfunction

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // nine nn_mac instructions with random register fields
    for (int i = 0; i < 9; i++) begin
      for (int k = 0; k < 20; k++) begin
        logic [4:0] rd, r1, r2;
        rd = 5'($urandom); r1 = 5'($urandom); r2 = 5'($urandom);
        instr = {tab[i].f7, r2, r1, 3'b010, rd, 7'b0001011};
        @(posedge clk);
        check(ctrl.op == OP_NN_MAC, {tab[i].name, " op"});
        check(!ctrl.illegal && ctrl.writes_rd, {tab[i].name, " legal/writes"});
        check(bits_of(ctrl.wbw) == tab[i].wb, {tab[i].name, " weight width"});
        check(bits_of(ctrl.abw) == tab[i].ab, {tab[i].name, " act width"});
        check(int'(ctrl.mode) == tab[i].mode, {tab[i].name, " mode"});
        check(ctrl.rd == rd && ctrl.rs1 == r1 && ctrl.rs2 == r2, {tab[i].name, " regs"});
      end
    end
    // width code 11 and nonzero funct7[6:4] are undefined
    instr = {7'b000_1011, 5'd1, 5'd2, 3'b010, 5'd3, 7'b0001011}; @(posedge clk);
    check(ctrl.illegal && ctrl.op == OP_NONE, "w code 11 illegal");
    instr = {7'b000_1110, 5'd1, 5'd2, 3'b010, 5'd3, 7'b0001011}; @(posedge clk);
    check(ctrl.illegal && ctrl.op == OP_NONE, "a code 11 illegal");
    instr = {7'b010_1010, 5'd1, 5'd2, 3'b010, 5'd3, 7'b0001011}; @(posedge clk);
    check(ctrl.illegal, "funct7[6:4] != 0 illegal");
    instr = {7'b000_1010, 5'd1, 5'd2, 3'b111, 5'd3, 7'b0001011}; @(posedge clk);
    check(ctrl.illegal, "custom-0 funct3 111 illegal");
    // bias load
    instr = {7'b100_0111, 5'd9, 5'd8, 3'b011, 5'd0, 7'b0001011}; @(posedge clk);
    check(ctrl.op == OP_NN_BIAS && ctrl.hi_pair && ctrl.shamt == 5'd7 && !ctrl.writes_rd, "nn_bias fields");
    instr = {7'b010_0000, 5'd9, 5'd8, 3'b011, 5'd0, 7'b0001011}; @(posedge clk);
    check(ctrl.illegal, "nn_bias funct7[5] illegal");
    // accumulator read
    instr = {7'b000_0010, 5'd0, 5'd0, 3'b100, 5'd17, 7'b0001011}; @(posedge clk);
    check(ctrl.op == OP_NN_RDACC && ctrl.acc_sel == 2'd2 && ctrl.rd == 5'd17 && ctrl.writes_rd, "nn_rdacc");
    // RV32M multiplies
    for (int f = 0; f < 4; f++) begin
      instr = {7'b000_0001, 5'd3, 5'd4, 3'(f), 5'd5, 7'b0110011}; @(posedge clk);
      check(ctrl.op == (f == 0 ? OP_MUL : f == 1 ? OP_MULH : f == 2 ? OP_MULHSU : OP_MULHU), "mul family");
      check(ctrl.writes_rd && !ctrl.illegal, "mul writes");
    end
    // divide and plain ADD are not this unit's
    instr = {7'b000_0001, 5'd3, 5'd4, 3'b100, 5'd5, 7'b0110011}; @(posedge clk);
    check(ctrl.op == OP_NONE && !ctrl.illegal, "div not handled");
    instr = {7'b000_0000, 5'd3, 5'd4, 3'b000, 5'd5, 7'b0110011}; @(posedge clk);
    check(ctrl.op == OP_NONE && !ctrl.illegal && !ctrl.writes_rd, "add not handled");
    instr = {7'b000_1010, 5'd3, 5'd4, 3'b010, 5'd5, 7'b0101011}; @(posedge clk);
    check(ctrl.op == OP_NONE && !ctrl.illegal, "custom-1 not handled");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
