// tile_periphery -- shared sensing, PIM, selector and driver circuitry of a PIM tile.
//
// The DBCs of a tile share one set of local sense amplifiers and write drivers. This
// block holds, for each of the NW bitlines, a multi-level sense amplifier
// (tr_sense_amp), the PIM block and selector tree (pim_column), and one bit of the local
// row buffer; it also decodes the per-bitline controls that the paper leaves to "a
// simple counter circuit" and to predicated execution.
//
// One cycle is driven by ctrl_i (pirm_pkg::tile_ctrl_t):
//   sense   : latch the levels of the segment seg_i of the DBC being read.
//   rb_op   : load the row buffer from ext_i, from the results R_i, clear it, or load
//             R_i with the predicated reset of the maximum function.
//   wr_mode : drive the write enables of the DBC being written (the tile routes them).
//   pred_latch : remember, per packed word, whether the TR of bit bit_k saw any one.
// Packed words are 2**word_log2 bitlines wide; bit j of a word is bitline (i mod W).
//
// Addition window (WR_ADD, step k, after a TR): bitline with j = k writes S (XOR) under
// port L, j = k+1 writes C_k under port R, j = k+2 writes C'_k under port L, as in the
// paper's addition figure. A carry that would leave the word is dropped (this design's
// choice; the paper packs words with room for the result).
// Predicated write (wr_pred): a word is written only if its row-buffer bit at position
// bit_k is 0 (the multiplication's "if b = 0 write"). Predicated reset (RB_PRED): a word
// of R_i is replaced by zeros when the latched TR of its bit bit_k was > 0 and its own
// bit bit_k is 0 (the pooling maximum).
// The row buffer and predicate latches reset to zero. Results appear on rb_o one cycle
// after the RB_* cycle; sense levels are used in the cycle after the sense.
// Lint notes: the DBC-routing fields of ctrl_i (rd_dbc, wr_dbc, sh_dbc, shift) are used
// by the tile, not here; the carry of the top bitline and the super carry of the two top
// bitlines have no receiver because the row ends there.
module tile_periphery
  import pirm_pkg::*;
#(
  parameter int unsigned NW = DEF_NW
) (
  input  logic           clk,
  input  logic           rst_n,
  input  tile_ctrl_t     ctrl_i,
  input  logic [TRD-1:0] seg_i [NW],
  input  logic [NW-1:0]  ext_i,
  output logic [NW-1:0]  wr_data_o,
  output logic [NW-1:0]  wr_l_o,
  output logic [NW-1:0]  wr_r_o,
  output logic [NW-1:0]  tw_o,
  output logic [NW-1:0]  rb_o,
  output logic [NW-1:0]  lvl1_o      // OR / direct value of each bitline (for observation)
);
  sa_level_t     lvl   [NW];
  col_sel_e      csel  [NW];
  logic [NW-1:0] direct, carry, scarry, r_out, drv;
  logic [NW-1:0] is_k, is_k1, is_k2;
  logic [NW-1:0] rb_q, pred_q;
  logic [NW-1:0] pred_any, pbit, wbit, word_en;
  logic [BIT_IDX_W:0] wmask, wbits;

  // ---- bit position of every bitline inside its packed word ----
  always_comb begin
    wbits = (BIT_IDX_W+1)'(1) << ctrl_i.word_log2;
    wmask = wbits - 1'b1;
    for (int i = 0; i < NW; i++) begin
      logic [BIT_IDX_W:0] j;
      j        = (BIT_IDX_W+1)'(i) & wmask;
      is_k[i]  = (j == {1'b0, ctrl_i.bit_k});
      is_k1[i] = (j == {1'b0, ctrl_i.bit_k} + 1) && ({1'b0, ctrl_i.bit_k} + 1 < wbits);
      is_k2[i] = (j == {1'b0, ctrl_i.bit_k} + 2) && ({1'b0, ctrl_i.bit_k} + 2 < wbits);
      if (ctrl_i.wr_mode == WR_ADD)
        csel[i] = is_k1[i] ? CS_CARRY : is_k2[i] ? CS_SCARRY : CS_PIM;
      else
        csel[i] = ctrl_i.col_sel;
    end
  end

  // ---- sense amplifiers and columns ----
  for (genvar i = 0; i < NW; i++) begin : g_col
    tr_sense_amp u_sa (
      .clk(clk), .rst_n(rst_n), .mode(ctrl_i.sense), .seg(seg_i[i]), .lvl_q(lvl[i])
    );
    pim_column u_col (
      .lvl      (lvl[i]),
      .shift_in (i >= 1 ? direct[(i >= 1 ? i-1 : 0)] : 1'b0),
      .carry_in (i >= 1 ? carry[(i >= 1 ? i-1 : 0)]  : 1'b0),
      .scarry_in(i >= 2 ? scarry[(i >= 2 ? i-2 : 0)] : 1'b0),
      .w_in     (rb_q[i]),
      .col_sel  (csel[i]),
      .pim_op   (ctrl_i.wr_mode == WR_ADD ? PO_XOR : ctrl_i.pim_op),
      .out_sel  (ctrl_i.wr_mode == WR_ADD ? OS_LOGIC : ctrl_i.out_sel),
      .wr_src   (ctrl_i.wr_mode == WR_ADD ? SRC_RESULT : ctrl_i.wr_src),
      .direct   (direct[i]),
      .carry    (carry[i]),
      .scarry   (scarry[i]),
      .r_out    (r_out[i]),
      .drv      (drv[i])
    );
  end

  // ---- word-wide predicates ----
  group_or #(.NW(NW), .WLOG_W(WLOG_W)) u_gor_any (
    .in_i(is_k & direct), .wlog_i(ctrl_i.word_log2), .out_o(pred_any));
  group_or #(.NW(NW), .WLOG_W(WLOG_W)) u_gor_bit (
    .in_i(is_k & r_out), .wlog_i(ctrl_i.word_log2), .out_o(pbit));
  group_or #(.NW(NW), .WLOG_W(WLOG_W)) u_gor_wr (
    .in_i(is_k & rb_q), .wlog_i(ctrl_i.word_log2), .out_o(wbit));

  assign word_en = ctrl_i.wr_pred ? ~wbit : '1;

  // ---- row buffer and predicate latch ----
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rb_q   <= '0;
      pred_q <= '0;
    end else begin
      unique case (ctrl_i.rb_op)
        RB_EXT:    rb_q <= ext_i;
        RB_RESULT: rb_q <= r_out;
        RB_CLEAR:  rb_q <= '0;
        RB_PRED:   rb_q <= r_out & ~(pred_q & ~pbit);
        default:   ;
      endcase
      if (ctrl_i.pred_latch) pred_q <= pred_any;
    end
  end

  // ---- write drivers ----
  always_comb begin
    wr_data_o = drv;
    wr_l_o    = '0;
    wr_r_o    = '0;
    tw_o      = '0;
    unique case (ctrl_i.wr_mode)
      WR_PORT_L: wr_l_o = word_en;
      WR_PORT_R: wr_r_o = word_en;
      WR_TW:     tw_o   = word_en;
      WR_ADD: begin
        wr_l_o = is_k | is_k2;
        wr_r_o = is_k1;
      end
      default: ;
    endcase
  end

  assign rb_o   = rb_q;
  assign lvl1_o = direct;
endmodule
