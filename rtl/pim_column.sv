// pim_column -- selector tree of one bitline i, around its PIM block.
//
// Data path, as drawn in the paper's SA/driver figure:
//   - the PIM block (pim_logic) turns the latched sense levels of bitline i into the
//     five "blue" results (NOR, AND, NAND, XOR, XNOR) and the carries C_i and C'_i,
//     which leave the column toward bitlines i+1 (red) and i+2 (green);
//   - the first selector picks one of: the direct value of bitline i-1 (brown, a
//     logical left shift), C_{i-1} (red), C'_{i-2} (green) or the chosen blue result;
//   - the second selector picks the orange direct read (= OR for a transverse read)
//     or the first selector; its output R_i goes to the row buffer/read port;
//   - the third selector picks W_i (row buffer) or R_i for the write driver.
// The "precharged to 0..0" driver state used by multiplication is the third source of
// the driver selector here; the paper describes the precharge but draws no input for it.
// Purely combinational; the latching is done by the sense amplifier and row buffer.
// The direct output is the first sense level itself, a wire; C and C' are passed on from
// the PIM block for the neighbouring bitlines.
module pim_column
  import pirm_pkg::*;
(
  input  sa_level_t lvl,        // latched levels of SA_i
  input  logic      shift_in,   // direct value of bitline i-1
  input  logic      carry_in,   // C_{i-1}
  input  logic      scarry_in,  // C'_{i-2}
  input  logic      w_in,       // W_i from the row buffer
  input  col_sel_e  col_sel,
  input  pim_op_e   pim_op,
  input  out_sel_e  out_sel,
  input  wr_src_e   wr_src,
  output logic      direct,     // orange/brown: direct SA value of bitline i
  output logic      carry,      // C_i
  output logic      scarry,     // C'_i
  output logic      r_out,      // R_i
  output logic      drv         // value given to driver i
);
  logic p_or, p_nor, p_and, p_nand, p_xor, p_xnor;
  logic blue, sel1;

  pim_logic u_pim (
    .lvl(lvl), .o_or(p_or), .o_nor(p_nor), .o_and(p_and), .o_nand(p_nand),
    .o_xor(p_xor), .o_xnor(p_xnor), .o_carry(carry), .o_scarry(scarry)
  );

  always_comb begin
    direct = p_or;
    unique case (pim_op)
      PO_NOR:  blue = p_nor;
      PO_AND:  blue = p_and;
      PO_NAND: blue = p_nand;
      PO_XOR:  blue = p_xor;
      PO_XNOR: blue = p_xnor;
      default: blue = p_xor;
    endcase
    unique case (col_sel)
      CS_SHIFT:  sel1 = shift_in;
      CS_CARRY:  sel1 = carry_in;
      CS_SCARRY: sel1 = scarry_in;
      default:   sel1 = blue;
    endcase
    r_out = (out_sel == OS_DIRECT) ? direct : sel1;
    unique case (wr_src)
      SRC_RB:     drv = w_in;
      SRC_RESULT: drv = r_out;
      default:    drv = 1'b0;
    endcase
  end
endmodule
