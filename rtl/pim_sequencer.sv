// pim_sequencer -- turns memory-controller commands into one tile control word per cycle.
//
// Commands (pirm_pkg::tile_cmd_t) arrive on a valid/ready handshake; ready is high when
// the sequencer is idle. A command is taken in a cycle with cmd_valid_i && cmd_ready_o.
//   CMD_PRIM : the command's ctrl word is applied in that same cycle (pass-through); this
//              is how the memory controller issues reads, writes, shifts, transverse
//              reads/writes, logical shifts and bulk-bitwise operations.
//   CMD_ADD  : multi-operand addition of the operands already placed between the ports
//              of DBC dbc. For k = 0 .. nbits-1: a transverse-read cycle, then a write
//              cycle of the add window (S_k, C_k, C'_k). This is the paper's "simple
//              counter circuit" that provides the selectors of a window of three
//              nanowires; it takes 2*nbits cycles after acceptance (16 for 8 bits).
//   CMD_MAX  : pooling maximum of the words held between the ports of DBC dbc, MSB to
//              LSB. For each bit p: a TR whose "> 0" result is latched per word, then
//              TRD rotations of the segment, each reading the word under port R into the
//              row buffer with the predicated reset (word cleared if TR > 0 and its bit p
//              is 0) and writing it back under port L by transverse write. Finally a TR
//              reads the maximum as the OR of the segment into the row buffer.
//              Takes nbits*(1+3*TRD)+2 cycles.
// done_o pulses in the last cycle of a CMD_ADD or CMD_MAX. While idle and not given a
// command, ctrl_o is CTRL_IDLE. The paper gives the step order of both operations; the
// cycle split (sense, then row buffer, then write) is this design's choice.
// rst_n resets the state asynchronously and also disables the command assertion; lint
// reports that double use, which is not a circuit issue.
module pim_sequencer
  import pirm_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       cmd_valid_i,
  output logic       cmd_ready_o,
  input  tile_cmd_t  cmd_i,
  output tile_ctrl_t ctrl_o,
  output logic       busy_o,
  output logic       done_o
);
  typedef enum logic [2:0] {
    S_IDLE, S_ADD_TR, S_ADD_WR, S_MAX_TR, S_MAX_RD, S_MAX_RB, S_MAX_TW, S_MAX_FIN
  } state_e;

  state_e               st_q;
  logic [DBC_IDX_W-1:0] dbc_q;
  logic [WLOG_W-1:0]    wlog_q;
  logic [BIT_IDX_W:0]   nbits_q;
  logic [BIT_IDX_W:0]   k_q;       // add: bit counter up; max: bit counter down
  logic [2:0]           rot_q;     // max: rotation within the segment
  logic                 fin_q;     // max: second cycle of the final read

  assign cmd_ready_o = (st_q == S_IDLE);
  assign busy_o      = (st_q != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q <= S_IDLE; dbc_q <= '0; wlog_q <= 4'd3; nbits_q <= '0; k_q <= '0;
      rot_q <= '0; fin_q <= 1'b0;
    end else begin
      unique case (st_q)
        S_IDLE: if (cmd_valid_i && cmd_i.nbits != 0) begin
          dbc_q <= cmd_i.dbc; wlog_q <= cmd_i.word_log2; nbits_q <= cmd_i.nbits;
          rot_q <= '0; fin_q <= 1'b0;
          if (cmd_i.op == CMD_ADD) begin
            st_q <= S_ADD_TR; k_q <= '0;
          end else if (cmd_i.op == CMD_MAX) begin
            st_q <= S_MAX_TR; k_q <= cmd_i.nbits - 1'b1;
          end
        end
        S_ADD_TR: st_q <= S_ADD_WR;
        S_ADD_WR: begin
          if (k_q + 1'b1 == nbits_q) st_q <= S_IDLE;
          else begin k_q <= k_q + 1'b1; st_q <= S_ADD_TR; end
        end
        S_MAX_TR: begin st_q <= S_MAX_RD; rot_q <= '0; end
        S_MAX_RD: st_q <= S_MAX_RB;
        S_MAX_RB: st_q <= S_MAX_TW;
        S_MAX_TW: begin
          if (rot_q != 3'(TRD - 1)) begin
            rot_q <= rot_q + 1'b1; st_q <= S_MAX_RD;
          end else if (k_q != 0) begin
            k_q <= k_q - 1'b1; st_q <= S_MAX_TR;
          end else begin
            st_q <= S_MAX_FIN; fin_q <= 1'b0;
          end
        end
        S_MAX_FIN: begin
          if (fin_q) st_q <= S_IDLE;
          fin_q <= 1'b1;
        end
        default: st_q <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    ctrl_o = CTRL_IDLE;
    done_o = 1'b0;
    ctrl_o.rd_dbc    = dbc_q;
    ctrl_o.wr_dbc    = dbc_q;
    ctrl_o.word_log2 = wlog_q;
    ctrl_o.bit_k     = k_q[BIT_IDX_W-1:0];
    unique case (st_q)
      S_IDLE: begin
        if (cmd_valid_i && cmd_i.op == CMD_PRIM) ctrl_o = cmd_i.ctrl;
      end
      S_ADD_TR: ctrl_o.sense = SN_TR;
      S_ADD_WR: begin
        ctrl_o.wr_mode = WR_ADD;
        done_o = (k_q + 1'b1 == nbits_q);
      end
      S_MAX_TR: ctrl_o.sense = SN_TR;
      S_MAX_RD: begin
        ctrl_o.sense      = SN_READ_R;
        ctrl_o.pred_latch = (rot_q == 0);
      end
      S_MAX_RB: begin
        ctrl_o.out_sel = OS_DIRECT;
        ctrl_o.rb_op   = RB_PRED;
      end
      S_MAX_TW: begin
        ctrl_o.wr_mode = WR_TW;
        ctrl_o.wr_src  = SRC_RB;
      end
      S_MAX_FIN: begin
        if (!fin_q) ctrl_o.sense = SN_TR;
        else begin
          ctrl_o.out_sel = OS_DIRECT;
          ctrl_o.rb_op   = RB_RESULT;
          done_o         = 1'b1;
        end
      end
      default: ;
    endcase
  end

  a_cmd_known: assert property (@(posedge clk) disable iff (!rst_n)
    (cmd_valid_i && cmd_ready_o) |-> (cmd_i.op inside {CMD_PRIM, CMD_ADD, CMD_MAX}));
endmodule
