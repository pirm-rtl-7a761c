// tb_bitmap_query -- bitmap-index query run on the tile, slice by slice.
// The query counts users that are male and were active in each of the last w weeks,
// w = 2, 3, 4. Each bitmap holds one bit per user. For every 64-user slice the tile gets
// the "male" row and the w weekly rows by transverse write into DBC 0. The remaining
// positions of the seven-domain segment are filled with all-ones rows so that they do
// not change an AND. One transverse read then yields the AND of all operands, which goes
// through the row buffer to the host side. The testbench counts the ones of each result
// row and compares the total with the count computed directly from the bitmaps. The tile
// is reduced to 2 DBCs of 64 nanowires; the operation is the same at 512.
module tb_bitmap_query;
  import pirm_pkg::*;
  localparam int NDBC = 2, NW = 64, SLICES = 16;

  logic clk = 0, rst_n = 0;
  logic cmd_valid_i, cmd_ready_o, busy_o, done_o;
  tile_cmd_t cmd_i;
  logic [NW-1:0] ext_i, rb_o, sa_o;
  int checks = 0, failures = 0;

  pirm_tile #(.NDBC(NDBC), .NW(NW)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk); failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic prim(input tile_ctrl_t c);
    @(negedge clk);
    cmd_i = '{op: CMD_PRIM, ctrl: c, dbc: '0, nbits: '0, word_log2: 4'd3};
    cmd_valid_i = 1'b1;
    if (!cmd_ready_o) begin failures++; $display("FAIL tile not ready"); end
    @(posedge clk); #1 cmd_valid_i = 1'b0;
  endtask

  // row buffer <- d, then transverse write into DBC 0
  task automatic put(input logic [NW-1:0] d);
    tile_ctrl_t c;
    ext_i = d;
    c = CTRL_IDLE; c.rb_op = RB_EXT; prim(c);
    c = CTRL_IDLE; c.wr_mode = WR_TW; c.wr_src = SRC_RB; c.wr_dbc = '0; prim(c);
  endtask

  function automatic logic [NW-1:0] rnd_row(input int ones_in_4);
    logic [NW-1:0] r;
    for (int i = 0; i < NW; i++) r[i] = ($urandom % 4) < ones_in_4;
    return r;
  endfunction

  logic [NW-1:0] male [SLICES];
  logic [NW-1:0] week [4][SLICES];

  initial begin
    cmd_valid_i = 0; cmd_i = '0; ext_i = '0;
    for (int s = 0; s < SLICES; s++) begin
      male[s] = rnd_row(2);
      for (int k = 0; k < 4; k++) week[k][s] = rnd_row(3);
    end
    repeat (3) @(posedge clk); rst_n = 1;

    for (int w = 2; w <= 4; w++) begin
      int got, exp;
      got = 0; exp = 0;
      for (int s = 0; s < SLICES; s++) begin
        logic [NW-1:0] ref_and;
        tile_ctrl_t c;
        ref_and = male[s];
        for (int k = 0; k < w; k++) ref_and &= week[k][s];
        exp += $countones(ref_and);
        put(male[s]);
        for (int k = 0; k < w; k++) put(week[k][s]);
        for (int p = w + 1; p < TRD; p++) put('1);
        c = CTRL_IDLE; c.sense = SN_TR; c.rd_dbc = '0; prim(c);
        c = CTRL_IDLE; c.rb_op = RB_RESULT; c.out_sel = OS_LOGIC; c.col_sel = CS_PIM;
        c.pim_op = PO_AND; prim(c);
        @(negedge clk);
        checks++;
        if (rb_o !== ref_and) begin
          failures++;
          $display("FAIL w=%0d slice %0d\n got %h\n exp %h", w, s, rb_o, ref_and);
        end
        got += $countones(rb_o);
      end
      checks++;
      if (got != exp) begin failures++; $display("FAIL w=%0d count %0d, expected %0d", w, got, exp); end
      $display("w=%0d weeks: %0d of %0d users match (%0d operands per TR)", w, got, SLICES*NW, w+1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
