// tb_pim_sequencer -- checks the control words the sequencer produces, cycle by cycle.
// Primitive commands must appear on ctrl_o in the cycle they are taken. An addition of
// n bits must give n pairs (transverse read, add-window write with bit_k = 0..n-1),
// i.e. 2n cycles, with done in the last. A maximum of n bits must give, per bit from
// the MSB down, one TR, then TRD rotations of (read port R with the predicate latched
// in the first, predicated row-buffer load, transverse write), then a final TR and a
// row-buffer capture: n*(1+3*TRD)+2 cycles.
module tb_pim_sequencer;
  import pirm_pkg::*;
  logic clk = 0, rst_n = 0;
  logic cmd_valid_i, cmd_ready_o, busy_o, done_o;
  tile_cmd_t cmd_i;
  tile_ctrl_t ctrl_o;
  int checks = 0, failures = 0;
  int n_prim = 0, n_add = 0, n_max = 0;

  pim_sequencer dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (30000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic expect_cycle(input string what, input sense_mode_e sn, input wr_mode_e wm,
                              input rb_op_e rb, input int k, input logic pl, input logic dn);
    @(negedge clk);
    checks++;
    if (ctrl_o.sense !== sn || ctrl_o.wr_mode !== wm || ctrl_o.rb_op !== rb ||
        (k >= 0 && ctrl_o.bit_k !== BIT_IDX_W'(k)) || ctrl_o.pred_latch !== pl || done_o !== dn ||
        !busy_o) begin
      failures++;
      $display("FAIL %s: sense=%s wr=%s rb=%s k=%0d pl=%b done=%b (exp k=%0d dn=%b)", what,
               ctrl_o.sense.name(), ctrl_o.wr_mode.name(), ctrl_o.rb_op.name(), ctrl_o.bit_k,
               ctrl_o.pred_latch, done_o, k, dn);
    end
    @(posedge clk);
  endtask

  task automatic give(input tile_cmd_t c);
    @(negedge clk);
    cmd_i = c; cmd_valid_i = 1;
    #1;
    checks++;
    if (!cmd_ready_o) begin failures++; $display("FAIL not ready"); end
    if (c.op == CMD_PRIM && ctrl_o !== c.ctrl) begin failures++; $display("FAIL prim pass-through"); end
    @(posedge clk); #1 cmd_valid_i = 0;
  endtask

  initial begin
    cmd_valid_i = 0; cmd_i = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    repeat (20) begin
      tile_cmd_t c;
      int n;
      c = tile_cmd_t'({$urandom, $urandom, $urandom});
      c.op = cmd_op_e'($urandom_range(0, 2));
      n = (c.op == CMD_MAX) ? $urandom_range(1, 8) : $urandom_range(1, 32);
      c.nbits = (BIT_IDX_W+1)'(n);
      c.ctrl.sense = sense_mode_e'($urandom_range(0, 3));
      c.ctrl.col_sel = col_sel_e'($urandom_range(0, 3));
      c.ctrl.pim_op = pim_op_e'($urandom_range(0, 4));
      c.ctrl.rb_op = rb_op_e'($urandom_range(0, 4));
      c.ctrl.wr_mode = wr_mode_e'($urandom_range(0, 4));
      c.ctrl.wr_src = wr_src_e'($urandom_range(0, 2));
      c.ctrl.shift = shift_e'($urandom_range(0, 2));
      give(c);
      if (c.op == CMD_PRIM) n_prim++;
      else if (c.op == CMD_ADD) begin
        n_add++;
        for (int k = 0; k < n; k++) begin
          expect_cycle("add TR", SN_TR, WR_NONE, RB_HOLD, -1, 0, 0);
          expect_cycle("add WR", SN_NONE, WR_ADD, RB_HOLD, k, 0, k == n-1);
        end
      end else begin
        n_max++;
        for (int p = n-1; p >= 0; p--) begin
          expect_cycle("max TR", SN_TR, WR_NONE, RB_HOLD, p, 0, 0);
          for (int r = 0; r < TRD; r++) begin
            expect_cycle("max read R", SN_READ_R, WR_NONE, RB_HOLD, p, r == 0, 0);
            expect_cycle("max rb pred", SN_NONE, WR_NONE, RB_PRED, p, 0, 0);
            expect_cycle("max TW", SN_NONE, WR_TW, RB_HOLD, p, 0, 0);
          end
        end
        expect_cycle("max final TR", SN_TR, WR_NONE, RB_HOLD, -1, 0, 0);
        expect_cycle("max final read", SN_NONE, WR_NONE, RB_RESULT, -1, 0, 1);
      end
      @(negedge clk);
      checks++;
      if (!cmd_ready_o || busy_o) begin failures++; $display("FAIL not idle after command"); end
    end
    $display("prim=%0d add=%0d max=%0d", n_prim, n_add, n_max);
    if (n_prim == 0 || n_add == 0 || n_max == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
