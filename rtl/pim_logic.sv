// pim_logic -- the per-bitline PIM block: polymorphic-gate logic on one transverse read.
//
// Input is the thermometer code of one sense amplifier, lvl[j-1] = 1 when at least j of
// the TRD = 7 sensed domains hold a one (the figure labels these inputs 0:1 .. 6:7).
// All outputs are combinational:
//   OR   = lvl[0]                 (>= 1 one)          NOR/NOT = ~OR
//   AND  = lvl[6]                 (all 7 ones)        NAND    = ~AND
//   XOR  = odd count: lvl[0]&~lvl[1] | lvl[2]&~lvl[3] | lvl[4]&~lvl[5] | lvl[6]
//          this is also the sum S of the column;      XNOR    = ~XOR
//   C    = (lvl[1] & ~lvl[3]) | lvl[5]   i.e. bit 1 of the count (count in 2,3,6,7)
//   C'   = lvl[3]                         i.e. bit 2 of the count (count >= 4)
// The output set, the inputs, and the way each output depends on the levels follow the
// paper's description and its logic figure ("carry is a function of TR levels above two
// and not above four or above six", "super carry from TR level above four", XOR "reports
// exclusively the odd TR levels"). The figure's gate symbols are not copied; the
// expressions above are written as plain Boolean equations.
// OR, AND and C' need no gate at all: each is one sense level passed straight through,
// which is how the sense levels are defined.
module pim_logic
  import pirm_pkg::*;
(
  input  sa_level_t lvl,
  output logic      o_or,
  output logic      o_nor,
  output logic      o_and,
  output logic      o_nand,
  output logic      o_xor,
  output logic      o_xnor,
  output logic      o_carry,
  output logic      o_scarry
);
  always_comb begin
    o_or     = lvl[0];
    o_nor    = ~lvl[0];
    o_and    = lvl[6];
    o_nand   = ~lvl[6];
    o_xor    = (lvl[0] & ~lvl[1]) | (lvl[2] & ~lvl[3]) | (lvl[4] & ~lvl[5]) | lvl[6];
    o_xnor   = ~o_xor;
    o_carry  = (lvl[1] & ~lvl[3]) | lvl[5];
    o_scarry = lvl[3];
  end
endmodule
