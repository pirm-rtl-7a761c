// tb_group_or -- random check of the aligned group OR used for per-word predicates.
// For 64 bitlines and every group width 2**w (w = 0..6, plus out-of-range w that must
// act as one group over all bitlines), random inputs are applied and each output bit is
// compared with the OR of its group computed by a direct loop. Purely combinational, so
// the check samples after a short delay.
module tb_group_or;
  localparam int NW = 64;
  localparam int WLOG_W = 4;

  logic [NW-1:0]     in_i, out_o, exp;
  logic [WLOG_W-1:0] wlog_i;
  int checks = 0, failures = 0;

  group_or #(.NW(NW), .WLOG_W(WLOG_W)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 2000; n++) begin
      int w, gw;
      in_i = {$urandom, $urandom};
      // sparse inputs make group results differ
      if (n % 2 == 1) in_i = in_i & {$urandom, $urandom} & {$urandom, $urandom} & {$urandom, $urandom};
      w = n % 9;
      wlog_i = WLOG_W'(w);
      gw = (w > 6) ? NW : (1 << w);
      #1;
      for (int i = 0; i < NW; i++) begin
        int g;
        g = i / gw;
        exp[i] = |(in_i & ({NW{1'b1}} >> (NW - gw)) << (g * gw));
      end
      checks++;
      if (out_o !== exp) begin
        failures++;
        if (failures < 5) $display("FAIL w=%0d in=%h got=%h exp=%h", w, in_i, out_o, exp);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
