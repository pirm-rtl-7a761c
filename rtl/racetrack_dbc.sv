// racetrack_dbc -- one domain block cluster (DBC): NW parallel racetrack nanowires.
//
// Each nanowire is a row of LEN magnetic domains (position 0 at the left end) with two
// access ports at positions PORT_L and PORT_R. The PORT_R-PORT_L+1 = TRD domains between
// and including the ports form the transverse-read segment, which is exposed to the
// sense amplifiers on seg_o (seg_o[i][0] under port L, seg_o[i][TRD-1] under port R).
// Operations, one per cycle, applied at the rising edge:
//   shift_i = SH_LEFT/SH_RIGHT : every domain of every nanowire moves one position (a DW
//                                shift); the domain leaving an end is lost, a zero enters.
//   wr_l_i[i]                  : shift-based write of wr_data_i[i] under port L.
//   wr_r_i[i]                  : same under port R.
//   tw_i[i]                    : transverse write: wr_data_i[i] is written under port L
//                                and domains PORT_L..PORT_R-1 advance by one toward port
//                                R (segmented shift); the domain under port R is pushed
//                                out. The rest of the wire is not disturbed.
// A shift and a write in the same cycle is a protocol error (asserted).
// Sizes follow the paper: 512 nanowires, 32 data rows plus 25 overhead domains, ports at
// positions 14 and 20 so that their distance spans TRD = 7 domains. Which domains hold
// which rows and the zero that enters on a shift are this design's choices; the real
// memory is non-volatile, while this model clears to zero on reset.
// rst_n is an asynchronous reset of the storage and also the disable condition of the
// protocol assertions, which is why lint sees it used both ways; the assertions are not
// hardware.
module racetrack_dbc
  import pirm_pkg::*;
#(
  parameter int unsigned NW     = DEF_NW,
  parameter int unsigned LEN    = DEF_LEN,
  parameter int unsigned PORT_L = DEF_PORT_L,
  parameter int unsigned PORT_R = DEF_PORT_R
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  shift_e               shift_i,
  input  logic [NW-1:0]        wr_l_i,
  input  logic [NW-1:0]        wr_r_i,
  input  logic [NW-1:0]        tw_i,
  input  logic [NW-1:0]        wr_data_i,
  output logic [TRD-1:0]       seg_o [NW]
);
  if (PORT_R - PORT_L + 1 != TRD) begin : g_bad_ports
    $error("racetrack_dbc: ports must be TRD-1 domains apart");
  end
  if (PORT_R >= LEN) begin : g_bad_len
    $error("racetrack_dbc: port R outside the nanowire");
  end

  logic [LEN-1:0] dom_q [NW];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NW; i++) dom_q[i] <= '0;
    end else begin
      for (int i = 0; i < NW; i++) begin
        if (shift_i == SH_RIGHT)      dom_q[i] <= {dom_q[i][LEN-2:0], 1'b0};
        else if (shift_i == SH_LEFT)  dom_q[i] <= {1'b0, dom_q[i][LEN-1:1]};
        else if (tw_i[i]) begin
          for (int d = PORT_L + 1; d <= PORT_R; d++) dom_q[i][d] <= dom_q[i][d-1];
          dom_q[i][PORT_L] <= wr_data_i[i];
        end else begin
          if (wr_l_i[i]) dom_q[i][PORT_L] <= wr_data_i[i];
          if (wr_r_i[i]) dom_q[i][PORT_R] <= wr_data_i[i];
        end
      end
    end
  end

  always_comb begin
    for (int i = 0; i < NW; i++) seg_o[i] = dom_q[i][PORT_R:PORT_L];
  end

  // A DW shift moves the whole wire; it cannot be combined with a port access.
  a_no_shift_and_write: assert property (@(posedge clk) disable iff (!rst_n)
    (shift_i != SH_NONE) |-> (wr_l_i == '0 && wr_r_i == '0 && tw_i == '0));
  // A transverse write already writes port L and moves port R's domain.
  a_tw_exclusive: assert property (@(posedge clk) disable iff (!rst_n)
    ((tw_i & (wr_l_i | wr_r_i)) == '0));
endmodule
