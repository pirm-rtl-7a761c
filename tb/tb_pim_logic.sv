// tb_pim_logic -- exhaustive check of the PIM block over all 8 transverse-read levels.
// For each ones count n = 0..7 the thermometer code is applied and every output is
// compared with the value computed from n directly (n >= 1, n == 7, parity, bit 1 and
// bit 2 of n). Non-thermometer codes are not legal sense-amplifier outputs and are not
// applied.
module tb_pim_logic;
  import pirm_pkg::*;
  sa_level_t lvl;
  logic o_or, o_nor, o_and, o_nand, o_xor, o_xnor, o_carry, o_scarry;
  int checks = 0, failures = 0;

  pim_logic dut (.*);

  task automatic chk(input string what, input logic got, input logic exp, input int n);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s count=%0d got=%0b exp=%0b", what, n, got, exp);
    end
  endtask

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int n = 0; n <= 7; n++) begin
      for (int j = 1; j <= 7; j++) lvl[j-1] = (n >= j);
      #1;
      chk("OR",   o_or,    n >= 1, n);
      chk("NOR",  o_nor,   n == 0, n);
      chk("AND",  o_and,   n == 7, n);
      chk("NAND", o_nand,  n != 7, n);
      chk("XOR",  o_xor,   n[0], n);
      chk("XNOR", o_xnor,  !n[0], n);
      chk("C",    o_carry, n[1], n);
      chk("C'",   o_scarry, n[2], n);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
