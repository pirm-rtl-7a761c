// group_or -- OR of every aligned group of 2**wlog_i bits, broadcast back to the group.
//
// out_o[i] = OR of in_i[g*W .. g*W+W-1] where W = 2**wlog_i and g = i / W. It lets a
// packed word (W consecutive bitlines) act on a value found at one bit position of the
// same word, e.g. a predicate bit. Built as a butterfly: level l combines each bit with
// its partner at distance 2**(l-1). Purely combinational. wlog_i above log2(NW) is
// treated as log2(NW) (one group spanning all bitlines).
module group_or #(
  parameter int unsigned NW     = 512,
  parameter int unsigned WLOG_W = 4
) (
  input  logic [NW-1:0]     in_i,
  input  logic [WLOG_W-1:0] wlog_i,
  output logic [NW-1:0]     out_o
);
  localparam int unsigned LOGN = $clog2(NW);

  // bit i of the result is bit (i xor d) of x: each bit's partner at distance d
  function automatic logic [NW-1:0] partner(input logic [NW-1:0] x, input int unsigned d);
    logic [NW-1:0] r;
    for (int i = 0; i < NW; i++) r[i] = x[i ^ d];
    return r;
  endfunction

  logic [NW-1:0] lv [LOGN+1];

  for (genvar l = 0; l <= LOGN; l++) begin : g_lvl
    logic [NW-1:0] v;   // OR over aligned groups of 2**l bits
    if (l == 0) begin : g_in
      assign v = in_i;
    end else begin : g_or
      assign v = g_lvl[l-1].v | partner(g_lvl[l-1].v, 1 << (l-1));
    end
    assign lv[l] = v;
  end

  always_comb begin
    out_o = lv[LOGN];
    for (int l = 0; l <= LOGN; l++)
      if (wlog_i == WLOG_W'(l)) out_o = lv[l];
  end
endmodule
