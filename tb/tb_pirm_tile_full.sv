// tb_pirm_tile_full -- one complete operation on the tile at its full size.
// The tile keeps every default (16 DBCs of 512 nanowires, 57 domains). Five random
// 512-bit rows, each holding 64 packed 8-bit words, are placed between the ports of
// DBC 5 by transverse writes, added with one addition command (16 cycles), and the sums
// are read back through the row buffer and compared with sums computed here. A
// seven-operand XOR over the same segment is checked first. Last, the pooling maximum of
// seven rows of packed words is taken in DBC 12 (178 cycles) and compared.
module tb_pirm_tile_full;
  import pirm_pkg::*;
  localparam int NW = DEF_NW;

  logic clk = 0, rst_n = 0;
  logic cmd_valid_i, cmd_ready_o, busy_o, done_o;
  tile_cmd_t cmd_i;
  logic [NW-1:0] ext_i, rb_o, sa_o;
  int checks = 0, failures = 0;

  pirm_tile dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic prim(input tile_ctrl_t c);
    @(negedge clk);
    cmd_i = '{op: CMD_PRIM, ctrl: c, dbc: '0, nbits: '0, word_log2: 4'd3};
    cmd_valid_i = 1'b1;
    @(posedge clk); #1 cmd_valid_i = 1'b0;
  endtask

  task automatic put(input logic [NW-1:0] d, input int dbc);
    tile_ctrl_t c;
    c = CTRL_IDLE; c.rb_op = RB_EXT; ext_i = d; prim(c);
    c = CTRL_IDLE; c.wr_mode = WR_TW; c.wr_src = SRC_RB; c.wr_dbc = DBC_IDX_W'(dbc); prim(c);
  endtask

  function automatic logic [NW-1:0] rnd_row();
    logic [NW-1:0] r;
    for (int i = 0; i < NW; i += 32) r[i +: 32] = $urandom;
    return r;
  endfunction

  initial begin
    logic [NW-1:0] ops [5];
    logic [NW-1:0] e;
    tile_ctrl_t c;
    int cycles;
    cmd_valid_i = 0; cmd_i = '0; ext_i = '0;
    repeat (3) @(posedge clk); rst_n = 1;

    put('0, 5);
    for (int o = 0; o < 5; o++) begin ops[o] = rnd_row(); put(ops[o], 5); end
    put('0, 5);

    // seven-operand XOR over the segment (two of the seven are zero)
    c = CTRL_IDLE; c.sense = SN_TR; c.rd_dbc = 5; prim(c);
    c = CTRL_IDLE; c.rb_op = RB_RESULT; c.out_sel = OS_LOGIC; c.col_sel = CS_PIM; c.pim_op = PO_XOR; prim(c);
    @(negedge clk);
    checks++;
    if (rb_o !== (ops[0] ^ ops[1] ^ ops[2] ^ ops[3] ^ ops[4])) begin
      failures++; $display("FAIL 7-operand XOR");
    end

    // five-operand addition of 64 packed 8-bit words
    @(negedge clk);
    cmd_i = '{op: CMD_ADD, ctrl: CTRL_IDLE, dbc: 4'd5, nbits: 10'd8, word_log2: 4'd3};
    cmd_valid_i = 1'b1;
    @(posedge clk); #1 cmd_valid_i = 1'b0;
    cycles = 0;
    do begin @(negedge clk); cycles++; end while (!done_o && cycles < 100);
    @(posedge clk); #1;
    checks++;
    if (cycles != 16) begin failures++; $display("FAIL add took %0d cycles", cycles); end
    c = CTRL_IDLE; c.sense = SN_READ_L; c.rd_dbc = 5; prim(c);
    c = CTRL_IDLE; c.rb_op = RB_RESULT; c.out_sel = OS_DIRECT; prim(c);
    @(negedge clk);
    for (int w = 0; w < NW/8; w++) begin
      logic [7:0] s;
      s = 0;
      for (int o = 0; o < 5; o++) s += ops[o][w*8 +: 8];
      e[w*8 +: 8] = s;
    end
    checks++;
    if (rb_o !== e) begin failures++; $display("FAIL add\n got %h\n exp %h", rb_o, e); end

    // pooling maximum of seven rows of 64 packed 8-bit words in DBC 12
    begin
      logic [NW-1:0] mrow;
      logic [7:0] mx [NW/8];
      for (int w = 0; w < NW/8; w++) mx[w] = 0;
      for (int o = 0; o < 7; o++) begin
        mrow = rnd_row();
        put(mrow, 12);
        for (int w = 0; w < NW/8; w++) if (mrow[w*8 +: 8] > mx[w]) mx[w] = mrow[w*8 +: 8];
      end
      for (int w = 0; w < NW/8; w++) e[w*8 +: 8] = mx[w];
      @(negedge clk);
      cmd_i = '{op: CMD_MAX, ctrl: CTRL_IDLE, dbc: 4'd12, nbits: 10'd8, word_log2: 4'd3};
      cmd_valid_i = 1'b1;
      @(posedge clk); #1 cmd_valid_i = 1'b0;
      cycles = 0;
      do begin @(negedge clk); cycles++; end while (!done_o && cycles < 1000);
      @(posedge clk); #1;
      checks++;
      if (cycles != 8*(1+3*TRD)+2) begin failures++; $display("FAIL max took %0d cycles", cycles); end
      @(negedge clk);
      checks++;
      if (rb_o !== e) begin failures++; $display("FAIL max\n got %h\n exp %h", rb_o, e); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
