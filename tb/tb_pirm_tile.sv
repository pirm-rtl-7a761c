// tb_pirm_tile -- end-to-end test of a PIM-enabled tile at reduced width.
//
// The tile is driven only through its command port, as a memory controller would drive
// it. Sizes are reduced to 4 DBCs of 64 nanowires (nanowire length and port positions
// are the full ones). Scenarios, each checked against values the testbench computes
// itself from the operands:
//   1. seven-operand bulk-bitwise OR, NOR, AND, NAND, XOR, XNOR after one transverse read;
//   2. five-operand addition of packed 8-bit words, with its 16-cycle latency;
//   3. logical left shift through the shifted-read path;
//   4. pooling maximum of seven packed 8-bit words (predicated row-buffer reset);
//   5. 8-bit x 8-bit multiplication of packed words in 16-bit fields: shifted copies
//      placed along the nanowire by DW shifts, predicated zeroing by the multiplier's
//      bits, one 7->3 reduction written into a second DBC, and a final 5-operand add;
//   6. ReLU by a predicated zero write keyed on the sign bit.
// Every mechanism used is counted; one that never happened counts as a failure.
module tb_pirm_tile;
  import pirm_pkg::*;
  localparam int NDBC = 4, NW = 64;

  logic clk = 0, rst_n = 0;
  logic cmd_valid_i, cmd_ready_o, busy_o, done_o;
  tile_cmd_t cmd_i;
  logic [NW-1:0] ext_i, rb_o, sa_o;
  int checks = 0, failures = 0;
  int n_tr = 0, n_tw = 0, n_dwshift = 0, n_bitwise = 0, n_add = 0, n_lshift = 0;
  int n_max = 0, n_max_reset = 0, n_pred_zero = 0, n_reduce = 0, n_mult = 0, n_xdbc = 0;
  int n_relu = 0;

  pirm_tile #(.NDBC(NDBC), .NW(NW)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk); failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // ---------------- command helpers ----------------
  task automatic issue(input tile_cmd_t c);
    @(negedge clk);
    cmd_i = c; cmd_valid_i = 1'b1;
    if (!cmd_ready_o) begin failures++; $display("FAIL tile not ready"); end
    @(posedge clk);
    #1 cmd_valid_i = 1'b0;
    if (c.op == CMD_PRIM) begin
      if (c.ctrl.sense == SN_TR) n_tr++;
      if (c.ctrl.wr_mode == WR_TW) n_tw++;
      if (c.ctrl.shift != SH_NONE) n_dwshift++;
    end
  endtask

  task automatic prim(input tile_ctrl_t c);
    tile_cmd_t k;
    k = '{op: CMD_PRIM, ctrl: c, dbc: '0, nbits: '0, word_log2: 4'd3};
    issue(k);
  endtask

  function automatic tile_ctrl_t idle();
    return CTRL_IDLE;
  endfunction

  task automatic load_rb(input logic [NW-1:0] d);
    tile_ctrl_t c = idle();
    ext_i = d; c.rb_op = RB_EXT; prim(c);
  endtask

  task automatic tw(input int dbc, input wr_src_e src, input out_sel_e os = OS_DIRECT,
                    input col_sel_e cs = CS_PIM, input pim_op_e op = PO_XOR);
    tile_ctrl_t c = idle();
    c.wr_mode = WR_TW; c.wr_src = src; c.wr_dbc = DBC_IDX_W'(dbc);
    c.out_sel = os; c.col_sel = cs; c.pim_op = op;
    prim(c);
  endtask

  task automatic sense(input int dbc, input sense_mode_e m);
    tile_ctrl_t c = idle();
    c.sense = m; c.rd_dbc = DBC_IDX_W'(dbc); prim(c);
  endtask

  task automatic capture(input out_sel_e os, input col_sel_e cs = CS_PIM, input pim_op_e op = PO_XOR);
    tile_ctrl_t c = idle();
    c.rb_op = RB_RESULT; c.out_sel = os; c.col_sel = cs; c.pim_op = op; prim(c);
  endtask

  task automatic dwshift(input int dbc, input shift_e s);
    tile_ctrl_t c = idle();
    c.shift = s; c.sh_dbc = DBC_IDX_W'(dbc); prim(c);
  endtask

  task automatic macro(input cmd_op_e op, input int dbc, input int nbits, input int wlog,
                       output int cycles);
    tile_cmd_t k;
    k = '{op: op, ctrl: CTRL_IDLE, dbc: DBC_IDX_W'(dbc), nbits: (BIT_IDX_W+1)'(nbits),
          word_log2: WLOG_W'(wlog)};
    issue(k);
    cycles = 0;
    forever begin
      @(negedge clk); cycles++;
      if (done_o) break;
      if (cycles > 5000) begin failures++; $display("FAIL macro never done"); break; end
    end
    @(posedge clk); #1;
  endtask

  function automatic logic [NW-1:0] rnd_row();
    logic [NW-1:0] r;
    for (int i = 0; i < NW; i += 32) r[i +: 32] = $urandom;
    return r;
  endfunction

  task automatic expect_rb(input string what, input logic [NW-1:0] exp);
    @(negedge clk);
    checks++;
    if (rb_o !== exp) begin
      failures++;
      $display("FAIL %s\n  got %h\n  exp %h", what, rb_o, exp);
    end
  endtask

  // ---------------- scenarios ----------------
  logic [NW-1:0] ops [7];
  logic [NW-1:0] e_or, e_and, e_xor, exp;
  int cyc;

  initial begin
    cmd_valid_i = 0; cmd_i = '0; ext_i = '0;
    repeat (3) @(posedge clk); rst_n = 1;

    // 1. seven-operand bulk-bitwise operations in DBC 0
    for (int r = 0; r < 2; r++) begin
      e_or = '0; e_and = '1; e_xor = '0;
      for (int o = 0; o < 7; o++) begin
        ops[o] = rnd_row();
        if (r == 1 && o < 3) ops[o] = ops[o] | rnd_row();   // more ones for AND
        if (r == 1 && o >= 3) ops[o] = '1 ^ (rnd_row() & rnd_row() & rnd_row());
        e_or |= ops[o]; e_and &= ops[o]; e_xor ^= ops[o];
        load_rb(ops[o]); tw(0, SRC_RB);
      end
      sense(0, SN_TR);
      checks++;
      if (sa_o !== e_or) begin failures++; $display("FAIL sa_o after TR"); end
      capture(OS_DIRECT);               expect_rb("OR",   e_or);
      capture(OS_LOGIC, CS_PIM, PO_NOR);  expect_rb("NOR",  ~e_or);
      capture(OS_LOGIC, CS_PIM, PO_AND);  expect_rb("AND",  e_and);
      capture(OS_LOGIC, CS_PIM, PO_NAND); expect_rb("NAND", ~e_and);
      capture(OS_LOGIC, CS_PIM, PO_XOR);  expect_rb("XOR",  e_xor);
      capture(OS_LOGIC, CS_PIM, PO_XNOR); expect_rb("XNOR", ~e_xor);
      n_bitwise += 6;
      if (r == 1 && e_and == '0) $display("note: AND result all zero");
    end

    // 2. five-operand addition of packed 8-bit words in DBC 1
    for (int r = 0; r < 3; r++) begin
      tile_ctrl_t c;
      c = idle();
      c.rb_op = RB_CLEAR; prim(c); tw(1, SRC_RB);            // will end under port R
      for (int o = 0; o < 5; o++) begin
        ops[o] = rnd_row();
        load_rb(ops[o]); tw(1, SRC_RB);
      end
      c = idle(); c.rb_op = RB_CLEAR; prim(c); tw(1, SRC_RB); // free slot under port L
      macro(CMD_ADD, 1, 8, 3, cyc);
      checks++;
      if (cyc != 16) begin failures++; $display("FAIL add latency %0d, expected 16", cyc); end
      sense(1, SN_READ_L); capture(OS_DIRECT);
      for (int w = 0; w < NW/8; w++) begin
        logic [7:0] s;
        s = 0;
        for (int o = 0; o < 5; o++) s += ops[o][w*8 +: 8];
        exp[w*8 +: 8] = s;
      end
      expect_rb("5-operand add", exp);
      n_add++;
    end

    // 3. logical left shift: value under port L of DBC 0, shifted read into the row buffer
    ops[0] = rnd_row();
    begin
      tile_ctrl_t c;
      c = idle();
      load_rb(ops[0]);
      c.wr_mode = WR_PORT_L; c.wr_src = SRC_RB; c.wr_dbc = 0; prim(c);
      sense(0, SN_READ_L);
      capture(OS_LOGIC, CS_SHIFT);
      expect_rb("logical shift", ops[0] << 1);
      n_lshift++;
    end

    // 4. pooling maximum of seven packed 8-bit words in DBC 2
    for (int r = 0; r < 3; r++) begin
      logic [7:0] mx [NW/8];
      for (int w = 0; w < NW/8; w++) mx[w] = 0;
      for (int o = 0; o < 7; o++) begin
        ops[o] = rnd_row();
        if (r == 2) ops[o] = ops[o] & {(NW/8){8'h3f}};   // force bits with TR == 0
        load_rb(ops[o]); tw(2, SRC_RB);
        for (int w = 0; w < NW/8; w++) if (ops[o][w*8 +: 8] > mx[w]) mx[w] = ops[o][w*8 +: 8];
      end
      for (int w = 0; w < NW/8; w++) begin
        exp[w*8 +: 8] = mx[w];
        for (int o = 0; o < 7; o++) if (ops[o][w*8 +: 8] != mx[w]) n_max_reset++;
      end
      macro(CMD_MAX, 2, 8, 3, cyc);
      checks++;
      if (cyc != 8*(1+3*TRD)+2) begin failures++; $display("FAIL max latency %0d", cyc); end
      expect_rb("max", exp);
      n_max++;
    end

    // 5. multiplication of packed 8-bit words (16-bit fields), DBC 3 -> DBC 0
    for (int r = 0; r < 3; r++) begin
      logic [NW-1:0] a, b, p;
      int t0;
      tile_ctrl_t c;
      for (int w = 0; w < NW/16; w++) begin
        a[w*16 +: 16] = {8'h00, 8'($urandom)};
        b[w*16 +: 16] = {8'h00, 8'($urandom)};
        if (r == 0 && w == 0) b[7:0] = 8'hff;
        if (r == 0 && w == 1) b[23:16] = 8'h00;
        p[w*16 +: 16] = a[w*16 +: 8] * b[w*16 +: 8];
        for (int i = 0; i < 8; i++) if (!b[w*16+i]) n_pred_zero++;
      end
      t0 = $time;
      // shifted copies A<<0 .. A<<7 written in adjacent domains
      load_rb(a);
      for (int i = 0; i < 8; i++) begin
        c = idle(); c.wr_mode = WR_PORT_L; c.wr_src = SRC_RB; c.wr_dbc = 3; prim(c);
        if (i < 7) begin
          sense(3, SN_READ_L); capture(OS_LOGIC, CS_SHIFT);
          dwshift(3, SH_RIGHT);
        end
      end
      // predicated zeroing while walking back: copy i is zeroed where b_i = 0
      load_rb(b);
      for (int i = 7; i >= 0; i--) begin
        c = idle(); c.wr_mode = WR_PORT_L; c.wr_src = SRC_ZERO; c.wr_dbc = 3;
        c.wr_pred = 1'b1; c.bit_k = BIT_IDX_W'(i); c.word_log2 = 4; prim(c);
        if (i > 0) dwshift(3, SH_LEFT);
      end
      // copy i now lies i domains left of port L: bring copies 0..6 between the ports
      for (int i = 0; i < 6; i++) dwshift(3, SH_RIGHT);
      c = idle(); c.rb_op = RB_CLEAR; prim(c); tw(0, SRC_RB);
      sense(3, SN_TR);
      // one 7->3 reduction, S, C and C' written into DBC 0 by transverse writes
      tw(0, SRC_RESULT, OS_LOGIC, CS_PIM, PO_XOR);
      tw(0, SRC_RESULT, OS_LOGIC, CS_CARRY);
      tw(0, SRC_RESULT, OS_LOGIC, CS_SCARRY);
      n_reduce++; n_xdbc += 3;
      // copy 7 is one domain left of port L
      dwshift(3, SH_RIGHT);
      sense(3, SN_READ_L);
      tw(0, SRC_RESULT, OS_DIRECT);
      n_xdbc++;
      tw(0, SRC_ZERO); tw(0, SRC_ZERO);
      macro(CMD_ADD, 0, 16, 4, cyc);
      sense(0, SN_READ_L); capture(OS_DIRECT);
      expect_rb("multiply", p);
      $display("multiply: %0d cycles from first command to product in row buffer", ($time - t0) / 10 + 1);
      n_mult++;
      // return DBC 3 to its rest position for the next round
      for (int i = 0; i < 7; i++) dwshift(3, SH_LEFT);
    end

    // 6. ReLU of packed signed 8-bit words in DBC 1: NOT(x) into the row buffer through the
    //    single-operand NOR, then a predicated zero write keyed on bit 7 clears the words
    //    whose sign bit is 1
    for (int r = 0; r < 2; r++) begin
      tile_ctrl_t c;
      ops[0] = rnd_row();
      for (int w = 0; w < NW/8; w++)
        exp[w*8 +: 8] = ops[0][w*8 + 7] ? 8'h00 : ops[0][w*8 +: 8];
      load_rb(ops[0]);
      c = idle(); c.wr_mode = WR_PORT_L; c.wr_src = SRC_RB; c.wr_dbc = 1; prim(c);
      sense(1, SN_READ_L);
      capture(OS_LOGIC, CS_PIM, PO_NOR);
      c = idle(); c.wr_mode = WR_PORT_L; c.wr_src = SRC_ZERO; c.wr_dbc = 1;
      c.wr_pred = 1'b1; c.bit_k = 7; c.word_log2 = 3; prim(c);
      sense(1, SN_READ_L); capture(OS_DIRECT);
      expect_rb("relu", exp);
      n_relu++;
    end

    $display("mechanisms: TR=%0d TW=%0d DWshift=%0d bitwise=%0d add=%0d lshift=%0d max=%0d max_resets=%0d pred_zero=%0d reduce7to3=%0d mult=%0d cross_dbc_writes=%0d",
             n_tr, n_tw, n_dwshift, n_bitwise, n_add, n_lshift, n_max, n_max_reset, n_pred_zero,
             n_reduce, n_mult, n_xdbc);
    $display("relu=%0d", n_relu);
    foreach (ops[i]) ;
    if (n_tr == 0 || n_tw == 0 || n_dwshift == 0 || n_bitwise == 0 || n_add == 0 ||
        n_lshift == 0 || n_max == 0 || n_max_reset == 0 || n_pred_zero == 0 ||
        n_reduce == 0 || n_mult == 0 || n_xdbc == 0 || n_relu == 0) begin
      failures++; $display("FAIL a mechanism never happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
