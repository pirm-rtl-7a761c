// tb_tile_periphery -- the shared sensing/PIM/driver periphery with 32 bitlines.
// Segments are driven directly (no DBC). Checked against a testbench model:
//   - transverse read then row-buffer capture of OR, AND, XOR and the shifted read;
//   - add-window write enables and data for every step k of 8-bit words;
//   - predicated write enables from the row buffer's bit k of each word;
//   - latched "TR > 0" predicate and the predicated row-buffer reset of the maximum.
module tb_tile_periphery;
  import pirm_pkg::*;
  localparam int NW = 32;
  logic clk = 0, rst_n = 0;
  tile_ctrl_t ctrl_i;
  logic [TRD-1:0] seg_i [NW];
  logic [NW-1:0] ext_i, wr_data_o, wr_l_o, wr_r_o, tw_o, rb_o, lvl1_o;
  int checks = 0, failures = 0;
  int cnt [NW];

  tile_periphery #(.NW(NW)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic chk(input string what, input logic [NW-1:0] got, input logic [NW-1:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s got %h exp %h", what, got, exp); end
  endtask

  task automatic cyc(input tile_ctrl_t c);
    @(negedge clk); ctrl_i = c; @(posedge clk); #1; ctrl_i = CTRL_IDLE;
  endtask

  task automatic new_segments();
    for (int i = 0; i < NW; i++) begin
      seg_i[i] = TRD'($urandom);
      cnt[i] = $countones(seg_i[i]);
    end
  endtask

  initial begin
    tile_ctrl_t c;
    logic [NW-1:0] e;
    ctrl_i = CTRL_IDLE; ext_i = '0;
    for (int i = 0; i < NW; i++) seg_i[i] = '0;
    repeat (2) @(posedge clk); rst_n = 1;

    for (int t = 0; t < 50; t++) begin
      new_segments();
      c = CTRL_IDLE; c.sense = SN_TR; cyc(c);
      // OR (direct), AND, XOR, shifted OR
      c = CTRL_IDLE; c.rb_op = RB_RESULT; c.out_sel = OS_DIRECT; cyc(c);
      for (int i = 0; i < NW; i++) e[i] = cnt[i] > 0;
      chk("OR", rb_o, e);
      c.out_sel = OS_LOGIC; c.col_sel = CS_PIM; c.pim_op = PO_AND; cyc(c);
      for (int i = 0; i < NW; i++) e[i] = cnt[i] == 7;
      chk("AND", rb_o, e);
      c.pim_op = PO_XOR; cyc(c);
      for (int i = 0; i < NW; i++) e[i] = cnt[i] % 2;
      chk("XOR", rb_o, e);
      c.col_sel = CS_SHIFT; cyc(c);
      for (int i = 0; i < NW; i++) e[i] = (i > 0) ? cnt[i-1] > 0 : 1'b0;
      chk("shifted", rb_o, e);

      // add window, 8-bit words, step k
      begin
        int k;
        logic [NW-1:0] el, er, ed;
        k = $urandom_range(0, 7);
        @(negedge clk);
        ctrl_i = CTRL_IDLE; ctrl_i.wr_mode = WR_ADD; ctrl_i.bit_k = BIT_IDX_W'(k); ctrl_i.word_log2 = 3;
        #1;
        el = '0; er = '0; ed = '0;
        for (int i = 0; i < NW; i++) begin
          int j;
          j = i % 8;
          if (j == k)               begin el[i] = 1; ed[i] = cnt[i] % 2; end
          if (j == k+1 && k+1 < 8)  begin er[i] = 1; ed[i] = (cnt[i-1] >> 1) & 1; end
          if (j == k+2 && k+2 < 8)  begin el[i] = 1; ed[i] = (cnt[i-2] >> 2) & 1; end
        end
        chk("add wr_l", wr_l_o, el);
        chk("add wr_r", wr_r_o, er);
        chk("add data", wr_data_o & (el | er), ed);
        @(posedge clk); #1 ctrl_i = CTRL_IDLE;
      end

      // predicated write: row buffer = random, word enabled where its bit k is 0
      begin
        int k;
        logic [NW-1:0] rbv, ee;
        rbv = NW'($urandom); ext_i = rbv;
        c = CTRL_IDLE; c.rb_op = RB_EXT; cyc(c);
        k = $urandom_range(0, 15);
        @(negedge clk);
        ctrl_i = CTRL_IDLE; ctrl_i.wr_mode = WR_PORT_L; ctrl_i.wr_src = SRC_ZERO; ctrl_i.wr_pred = 1;
        ctrl_i.bit_k = BIT_IDX_W'(k); ctrl_i.word_log2 = 4;
        #1;
        for (int i = 0; i < NW; i++) ee[i] = !rbv[(i/16)*16 + k];
        chk("pred write enable", wr_l_o, ee);
        chk("pred write data zero", wr_data_o, '0);
        @(posedge clk); #1 ctrl_i = CTRL_IDLE;
      end

      // maximum step: latch TR>0 of bit p, then read and predicated reset
      begin
        int p;
        logic [NW-1:0] anyv, rd, ee;
        p = $urandom_range(0, 7);
        new_segments();
        c = CTRL_IDLE; c.sense = SN_TR; cyc(c);
        for (int i = 0; i < NW; i++) anyv[i] = cnt[(i/8)*8 + p] > 0;
        new_segments();
        c = CTRL_IDLE; c.sense = SN_READ_R; c.pred_latch = 1; c.bit_k = BIT_IDX_W'(p); c.word_log2 = 3; cyc(c);
        for (int i = 0; i < NW; i++) rd[i] = seg_i[i][TRD-1];
        c = CTRL_IDLE; c.rb_op = RB_PRED; c.out_sel = OS_DIRECT; c.bit_k = BIT_IDX_W'(p); c.word_log2 = 3; cyc(c);
        for (int i = 0; i < NW; i++) ee[i] = (anyv[i] && !rd[(i/8)*8 + p]) ? 1'b0 : rd[i];
        chk("max predicated reset", rb_o, ee);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
