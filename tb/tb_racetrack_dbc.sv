// tb_racetrack_dbc -- random DW shifts, port writes and transverse writes on a DBC.
// A behavioural copy of every nanowire (an array of domains) is kept in the testbench
// and updated with the rules of the racetrack: a DW shift moves the whole wire, a port
// write changes one domain, a transverse write inserts at port L and pushes the segment
// toward port R. The exposed segment is compared after every cycle. The number of
// nanowires is reduced to 16; length and port positions keep the paper's values.
module tb_racetrack_dbc;
  import pirm_pkg::*;
  localparam int NW = 16, LEN = DEF_LEN, PL = DEF_PORT_L, PR = DEF_PORT_R;
  logic clk = 0, rst_n = 0;
  shift_e shift_i;
  logic [NW-1:0] wr_l_i, wr_r_i, tw_i, wr_data_i;
  logic [TRD-1:0] seg_o [NW];
  logic model [NW][LEN];
  int checks = 0, failures = 0;
  int n_shift = 0, n_tw = 0, n_wr = 0;

  racetrack_dbc #(.NW(NW)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    shift_i = SH_NONE; wr_l_i = '0; wr_r_i = '0; tw_i = '0; wr_data_i = '0;
    for (int i = 0; i < NW; i++) for (int d = 0; d < LEN; d++) model[i][d] = 1'b0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      int kind;
      @(negedge clk);
      kind = $urandom_range(0, 9);
      shift_i = SH_NONE; wr_l_i = '0; wr_r_i = '0; tw_i = '0;
      wr_data_i = NW'($urandom);
      if (kind == 0)      shift_i = SH_LEFT;
      else if (kind == 1) shift_i = SH_RIGHT;
      else if (kind < 5)  tw_i = NW'($urandom);
      else begin wr_l_i = NW'($urandom); wr_r_i = NW'($urandom); end
      @(posedge clk);
      for (int i = 0; i < NW; i++) begin
        if (shift_i == SH_RIGHT) begin
          for (int d = LEN-1; d > 0; d--) model[i][d] = model[i][d-1];
          model[i][0] = 1'b0;
        end else if (shift_i == SH_LEFT) begin
          for (int d = 0; d < LEN-1; d++) model[i][d] = model[i][d+1];
          model[i][LEN-1] = 1'b0;
        end else if (tw_i[i]) begin
          for (int d = PR; d > PL; d--) model[i][d] = model[i][d-1];
          model[i][PL] = wr_data_i[i];
        end else begin
          if (wr_l_i[i]) model[i][PL] = wr_data_i[i];
          if (wr_r_i[i]) model[i][PR] = wr_data_i[i];
        end
      end
      if (shift_i != SH_NONE) n_shift++;
      if (tw_i != '0) n_tw++;
      if ((wr_l_i | wr_r_i) != '0) n_wr++;
      #1;
      for (int i = 0; i < NW; i++) for (int d = 0; d < TRD; d++) begin
        checks++;
        if (seg_o[i][d] !== model[i][PL+d]) begin
          failures++;
          if (failures < 10) $display("FAIL t=%0d wire=%0d dom=%0d got=%b exp=%b", t, i, PL+d, seg_o[i][d], model[i][PL+d]);
        end
      end
    end
    $display("shifts=%0d transverse_writes=%0d port_writes=%0d", n_shift, n_tw, n_wr);
    if (n_shift == 0 || n_tw == 0 || n_wr == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
