// pirm_pkg -- types and constants shared by the racetrack processing-in-memory tile.
//
// The tile computes inside domain-wall (racetrack) memory by a transverse read (TR):
// the current is passed along the nanowire between two access ports, and the sense
// amplifier reports how many of the TRD domains in that segment hold a one. From that
// count the PIM block derives multi-operand logic, the sum bit and two carries.
//
// Constants taken from the paper: TRD = 7 domains between and including the ports,
// 7 sense levels, 512 bitlines per domain block cluster (DBC), 32 data rows per DBC,
// 16 DBCs per tile, ports at domain positions 14 and 20 of a 57-domain wire.
// The control encodings below (enums and the per-cycle control word) are this
// design's own; the paper gives the data path but no command encoding.
package pirm_pkg;

  // ---- sizes from the paper -------------------------------------------------------
  localparam int unsigned TRD        = 7;    // maximum transverse-read distance
  localparam int unsigned NUM_LEVELS = TRD;  // SA[j], j = 1..7
  localparam int unsigned DEF_NW     = 512;  // nanowires (bitlines) per DBC, X
  localparam int unsigned DEF_ROWS   = 32;   // data domains per nanowire, Y
  localparam int unsigned DEF_LEN    = DEF_ROWS + 25;  // 57: Y data + 25 overhead domains
  localparam int unsigned DEF_PORT_L = 14;   // left access port position
  localparam int unsigned DEF_PORT_R = 20;   // right access port position
  localparam int unsigned DEF_NDBC   = 16;   // DBCs per tile

  // ---- this design's own encodings -------------------------------------------------
  localparam int unsigned DBC_IDX_W  = 4;    // selects one of up to 16 DBCs
  localparam int unsigned BIT_IDX_W  = 9;    // bit position inside a packed word (< 512)
  localparam int unsigned WLOG_W     = 4;    // log2 of the packed word width

  // Thermometer code of one sense amplifier: lvl[j-1] = 1 when >= j ones were sensed.
  typedef logic [NUM_LEVELS-1:0] sa_level_t;

  // What the sense amplifiers look at in a sense cycle.
  typedef enum logic [1:0] {
    SN_NONE   = 2'd0,   // keep the latched levels
    SN_READ_L = 2'd1,   // normal read of the domain under the left port
    SN_READ_R = 2'd2,   // normal read of the domain under the right port
    SN_TR     = 2'd3    // transverse read of the TRD domains from port L to port R
  } sense_mode_e;

  // First (4-input) selector of Fig. 7, by the colour of the line in the figure.
  typedef enum logic [1:0] {
    CS_SHIFT  = 2'd0,   // brown : direct value of bitline i-1 (logical left shift)
    CS_CARRY  = 2'd1,   // red   : carry C of bitline i-1
    CS_SCARRY = 2'd2,   // green : super carry C' of bitline i-2
    CS_PIM    = 2'd3    // blue  : one of the five local PIM results
  } col_sel_e;

  // The five blue PIM outputs (OR is the orange direct path).
  typedef enum logic [2:0] {
    PO_NOR  = 3'd0,
    PO_AND  = 3'd1,
    PO_NAND = 3'd2,
    PO_XOR  = 3'd3,     // also the sum S
    PO_XNOR = 3'd4
  } pim_op_e;

  // Second selector: orange direct read or the selector tree.
  typedef enum logic {
    OS_DIRECT = 1'b0,
    OS_LOGIC  = 1'b1
  } out_sel_e;

  // Row-buffer action in a cycle.
  typedef enum logic [2:0] {
    RB_HOLD    = 3'd0,
    RB_EXT     = 3'd1,  // load from the shared/global row buffer (host data)
    RB_RESULT  = 3'd2,  // load R_i of every bitline
    RB_CLEAR   = 3'd3,  // reset to all zeros
    RB_PRED    = 3'd4   // load R_i, but reset a word when its predicate says so (max)
  } rb_op_e;

  // Write-driver action in a cycle.
  typedef enum logic [2:0] {
    WR_NONE   = 3'd0,
    WR_PORT_L = 3'd1,   // shift-based write of the domain under the left port
    WR_PORT_R = 3'd2,   // same under the right port
    WR_TW     = 3'd3,   // transverse write at port L with segmented shift toward port R
    WR_ADD    = 3'd4    // addition window: S to L of k, C to R of k+1, C' to L of k+2
  } wr_mode_e;

  // Source of the data a driver writes (third selector of Fig. 7, plus precharge).
  typedef enum logic [1:0] {
    SRC_RB     = 2'd0,  // W_i, the row buffer
    SRC_RESULT = 2'd1,  // R_i, the PIM/direct result
    SRC_ZERO   = 2'd2   // driver precharged to 0..0
  } wr_src_e;

  typedef enum logic [1:0] {
    SH_NONE  = 2'd0,
    SH_LEFT  = 2'd1,    // every domain moves toward position 0
    SH_RIGHT = 2'd2     // every domain moves toward position LEN-1
  } shift_e;

  // One cycle of tile control.
  typedef struct packed {
    sense_mode_e              sense;
    logic [DBC_IDX_W-1:0]     rd_dbc;
    col_sel_e                 col_sel;
    pim_op_e                  pim_op;
    out_sel_e                 out_sel;
    rb_op_e                   rb_op;
    wr_mode_e                 wr_mode;
    wr_src_e                  wr_src;
    logic                     wr_pred;    // write a word only where its predicate bit of the row buffer is 0
    logic [DBC_IDX_W-1:0]     wr_dbc;
    shift_e                   shift;
    logic [DBC_IDX_W-1:0]     sh_dbc;
    logic [BIT_IDX_W-1:0]     bit_k;      // add step / predicate bit position in the word
    logic [WLOG_W-1:0]        word_log2;  // packed word width = 2**word_log2
    logic                     pred_latch; // latch "TR > 0" of bit bit_k for every word
  } tile_ctrl_t;

  localparam tile_ctrl_t CTRL_IDLE = '{
    sense: SN_NONE, rd_dbc: '0, col_sel: CS_PIM, pim_op: PO_XOR, out_sel: OS_DIRECT,
    rb_op: RB_HOLD, wr_mode: WR_NONE, wr_src: SRC_RB, wr_pred: 1'b0, wr_dbc: '0,
    shift: SH_NONE, sh_dbc: '0, bit_k: '0, word_log2: 4'd3, pred_latch: 1'b0};

  // Commands the memory controller issues to the sequencer.
  typedef enum logic [1:0] {
    CMD_PRIM = 2'd0,    // one cycle of raw control (ctrl field)
    CMD_ADD  = 2'd1,    // multi-operand addition over nbits bit positions
    CMD_MAX  = 2'd2     // pooling maximum over nbits bit positions
  } cmd_op_e;

  typedef struct packed {
    cmd_op_e              op;
    tile_ctrl_t           ctrl;       // CMD_PRIM: the cycle to run
    logic [DBC_IDX_W-1:0] dbc;        // CMD_ADD / CMD_MAX: DBC to operate on
    logic [BIT_IDX_W:0]   nbits;      // CMD_ADD / CMD_MAX: bit positions to process
    logic [WLOG_W-1:0]    word_log2;  // CMD_ADD / CMD_MAX: packed word width
  } tile_cmd_t;

endpackage
