// tr_sense_amp -- BEHAVIOURAL MODEL of the multi-level sense amplifier of one bitline.
//
// The real part is analog: it compares the resistance of the sensed path with seven
// references (eight resistance levels, three bits of information). This model stands in
// for it with the same terminals seen from the logic side: the TRD = 7 domains of the
// nanowire between and including the two access ports, a sense mode, a sense strobe and
// the latched 7-level output. Ports follow the paper's description (SA_i outputs seven
// level bits, SA_i[j] = 1 when >= j ones are in the TR); the latch on the output is this
// design's choice, so a sense takes one cycle and its result is used in the next.
//   SN_READ_L / SN_READ_R : only the domain under that port is in the path, so the code
//                           is 0000001 for a one and 0000000 for a zero (a normal read).
//   SN_TR                 : all seven domains are in the path.
//   SN_NONE               : the latch holds its value.
// Timing: lvl_q changes at the rising clock edge of a cycle with a sense mode other
// than SN_NONE. Reset clears it.
module tr_sense_amp
  import pirm_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  sense_mode_e       mode,
  input  logic [TRD-1:0]    seg,     // seg[0] under port L ... seg[TRD-1] under port R
  output sa_level_t         lvl_q
);
  logic [$clog2(TRD+1)-1:0] ones;
  sa_level_t                lvl_d;

  always_comb begin
    ones = '0;
    unique case (mode)
      SN_READ_L: ones = {{($clog2(TRD+1)-1){1'b0}}, seg[0]};
      SN_READ_R: ones = {{($clog2(TRD+1)-1){1'b0}}, seg[TRD-1]};
      SN_TR:     for (int d = 0; d < TRD; d++) ones = ones + {{($clog2(TRD+1)-1){1'b0}}, seg[d]};
      default:   ones = '0;
    endcase
    for (int j = 1; j <= TRD; j++) lvl_d[j-1] = (32'(ones) >= j);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)               lvl_q <= '0;
    else if (mode != SN_NONE) lvl_q <= lvl_d;
  end
endmodule
