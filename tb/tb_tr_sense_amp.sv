// tb_tr_sense_amp -- random segments through the three sense modes and the hold mode.
// The expected thermometer code is computed from the number of ones in the sensed path
// (one domain for a port read, all seven for a transverse read); the output must change
// only at the clock edge of a sense cycle.
module tb_tr_sense_amp;
  import pirm_pkg::*;
  logic clk = 0, rst_n = 0;
  sense_mode_e mode;
  logic [TRD-1:0] seg;
  sa_level_t lvl_q, exp_q;
  int checks = 0, failures = 0;

  tr_sense_amp dut (.*);
  always #5 clk = ~clk;

  function automatic sa_level_t therm(input int n);
    sa_level_t t;
    for (int j = 1; j <= TRD; j++) t[j-1] = (n >= j);
    return t;
  endfunction

  initial begin
    repeat (5000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    mode = SN_NONE; seg = '0; exp_q = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      seg  = TRD'($urandom);
      mode = sense_mode_e'($urandom_range(0, 3));
      case (mode)
        SN_READ_L: exp_q = therm(int'(seg[0]));
        SN_READ_R: exp_q = therm(int'(seg[TRD-1]));
        SN_TR:     exp_q = therm($countones(seg));
        default:   ;
      endcase
      @(posedge clk); #1;
      checks++;
      if (lvl_q !== exp_q) begin
        failures++;
        $display("FAIL t=%0d mode=%s seg=%b got=%b exp=%b", t, mode.name(), seg, lvl_q, exp_q);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
