// tb_pim_column -- random stimulus on one bitline's selector tree.
// A reference model written from the selector description (first selector: shift,
// carry, super carry or one of five PIM results; second: direct or selector; third:
// row buffer, result or zero) is compared with every output.
module tb_pim_column;
  import pirm_pkg::*;
  sa_level_t lvl;
  logic shift_in, carry_in, scarry_in, w_in;
  col_sel_e col_sel; pim_op_e pim_op; out_sel_e out_sel; wr_src_e wr_src;
  logic direct, carry, scarry, r_out, drv;
  int checks = 0, failures = 0;

  pim_column dut (.*);

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int t = 0; t < 3000; t++) begin
      int n; logic bl, s1, ro, dv;
      n = $urandom_range(0, 7);
      for (int j = 1; j <= 7; j++) lvl[j-1] = (n >= j);
      shift_in = 1'($urandom); carry_in = 1'($urandom); scarry_in = 1'($urandom);
      w_in = 1'($urandom);
      col_sel = col_sel_e'($urandom_range(0, 3));
      pim_op  = pim_op_e'($urandom_range(0, 4));
      out_sel = out_sel_e'($urandom_range(0, 1));
      wr_src  = wr_src_e'($urandom_range(0, 2));
      #1;
      case (pim_op)
        PO_NOR:  bl = (n == 0);
        PO_AND:  bl = (n == 7);
        PO_NAND: bl = (n != 7);
        PO_XOR:  bl = n[0];
        default: bl = !n[0];
      endcase
      case (col_sel)
        CS_SHIFT:  s1 = shift_in;
        CS_CARRY:  s1 = carry_in;
        CS_SCARRY: s1 = scarry_in;
        default:   s1 = bl;
      endcase
      ro = (out_sel == OS_DIRECT) ? (n >= 1) : s1;
      dv = (wr_src == SRC_RB) ? w_in : (wr_src == SRC_RESULT) ? ro : 1'b0;
      checks++;
      if (direct !== (n >= 1) || carry !== n[1] || scarry !== n[2] || r_out !== ro || drv !== dv) begin
        failures++;
        $display("FAIL t=%0d n=%0d sel=%s op=%s out=%s src=%s got d%b c%b s%b r%b w%b",
                 t, n, col_sel.name(), pim_op.name(), out_sel.name(), wr_src.name(),
                 direct, carry, scarry, r_out, drv);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
