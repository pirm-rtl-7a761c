// pirm_tile -- a PIM-enabled tile of a racetrack (domain-wall) main memory.
//
// NDBC domain block clusters (racetrack_dbc) share one set of sense amplifiers, PIM
// blocks, selectors, write drivers and one local row buffer (tile_periphery). The
// memory controller talks to the tile through pim_sequencer: single primitive cycles,
// or the multi-cycle addition and maximum commands. Data enters the tile through the
// row buffer (ext_i, from the shared/global row buffer, which is how inter-bank copies
// and host writes arrive) and leaves it through rb_o (the read port R toward the
// hierarchical row buffer); sa_o shows the latched direct sense value of each bitline.
// In one cycle the sense amplifiers read DBC ctrl.rd_dbc, the drivers write DBC
// ctrl.wr_dbc (which may be a different DBC, so a result can be written elsewhere), and
// DBC ctrl.sh_dbc may be DW-shifted. Other DBCs are untouched.
// Sizes follow the paper (16 DBCs per tile, 512 nanowires, 57 domains, ports at 14 and
// 20). The command interface and the per-cycle routing are this design's own.
// Lint reports rst_n as used both synchronously and asynchronously: the synchronous use
// is only the disable condition of assertions inside the DBCs and the sequencer.
module pirm_tile
  import pirm_pkg::*;
#(
  parameter int unsigned NDBC   = DEF_NDBC,
  parameter int unsigned NW     = DEF_NW,
  parameter int unsigned LEN    = DEF_LEN,
  parameter int unsigned PORT_L = DEF_PORT_L,
  parameter int unsigned PORT_R = DEF_PORT_R
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          cmd_valid_i,
  output logic          cmd_ready_o,
  input  tile_cmd_t     cmd_i,
  input  logic [NW-1:0] ext_i,
  output logic [NW-1:0] rb_o,
  output logic [NW-1:0] sa_o,       // direct (OR / single-domain) sense value of every bitline
  output logic          busy_o,
  output logic          done_o
);
  tile_ctrl_t     ctrl;
  logic [TRD-1:0] seg_all [NDBC][NW];
  logic [TRD-1:0] seg_rd  [NW];
  logic [NW-1:0]  wr_data, wr_l, wr_r, tw;

  pim_sequencer u_seq (
    .clk(clk), .rst_n(rst_n), .cmd_valid_i(cmd_valid_i), .cmd_ready_o(cmd_ready_o),
    .cmd_i(cmd_i), .ctrl_o(ctrl), .busy_o(busy_o), .done_o(done_o)
  );

  for (genvar d = 0; d < NDBC; d++) begin : g_dbc
    logic sel_w, sel_s;
    assign sel_w = (ctrl.wr_dbc == DBC_IDX_W'(d));
    assign sel_s = (ctrl.sh_dbc == DBC_IDX_W'(d));
    racetrack_dbc #(.NW(NW), .LEN(LEN), .PORT_L(PORT_L), .PORT_R(PORT_R)) u_dbc (
      .clk      (clk),
      .rst_n    (rst_n),
      .shift_i  (sel_s ? ctrl.shift : SH_NONE),
      .wr_l_i   (sel_w ? wr_l : '0),
      .wr_r_i   (sel_w ? wr_r : '0),
      .tw_i     (sel_w ? tw   : '0),
      .wr_data_i(wr_data),
      .seg_o    (seg_all[d])
    );
  end

  always_comb begin
    for (int i = 0; i < NW; i++) seg_rd[i] = seg_all[0][i];
    for (int d = 0; d < NDBC; d++)
      if (ctrl.rd_dbc == DBC_IDX_W'(d))
        for (int i = 0; i < NW; i++) seg_rd[i] = seg_all[d][i];
  end

  tile_periphery #(.NW(NW)) u_per (
    .clk(clk), .rst_n(rst_n), .ctrl_i(ctrl), .seg_i(seg_rd), .ext_i(ext_i),
    .wr_data_o(wr_data), .wr_l_o(wr_l), .wr_r_o(wr_r), .tw_o(tw),
    .rb_o(rb_o), .lvl1_o(sa_o)
  );

  if (NDBC > (1 << DBC_IDX_W)) begin : g_bad_ndbc
    $error("pirm_tile: NDBC exceeds the DBC index width");
  end
endmodule
