// tb_mp_mult_array: self-checking test of the four 17x17 multipliers and the two
// partial-product adders, against integer arithmetic, including the corner
// operands -65536 and 65535.
`timescale 1ns/1ps
module tb_mp_mult_array;
  import marvin_pkg::*;

  mpair_t ops  [N_MULT];
  prod_t  prod [N_MULT];
  prod_t  ppa  [2];
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  mp_mult_array dut (.ops_i(ops), .prod_o(prod), .ppa_o(ppa));

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint pick();
    case ($urandom_range(0, 5))
      0: return -65536;
      1: return 65535;
      2: return longint'($urandom_range(0, 15)) - 8;
      default: return longint'($urandom_range(0, 131071)) - 65536;
    endcase
  endfunction

  initial begin
    for (int t = 0; t < 2000; t++) begin
      longint a [N_MULT], b [N_MULT], e [N_MULT], s;
      for (int m = 0; m < N_MULT; m++) begin
        a[m] = pick(); b[m] = pick();
        ops[m].a = mop_t'(a[m]);
        ops[m].b = mop_t'(b[m]);
        e[m] = a[m] * b[m];
      end
      @(posedge clk);
      for (int m = 0; m < N_MULT; m++) begin
        checks++;
        if (longint'(prod[m]) != e[m]) begin
          failures++; $display("FAIL: prod %0d: %0d * %0d = %0d", m, a[m], b[m], prod[m]);
        end
      end
      for (int h = 0; h < 2; h++) begin
        s = e[2*h] + e[2*h+1];
        s = s & 64'h3_FFFF_FFFF;                // 34-bit adder wraps
        if (s >= 64'h2_0000_0000) s -= 64'h4_0000_0000;
        checks++;
        if (longint'(ppa[h]) != s) begin
          failures++; $display("FAIL: ppa %0d = %0d, expected %0d", h, ppa[h], s);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
