// cnn_pkg: types and constants shared by the 1-D PE-array convolution core.
//
// The core moves data over three pipelined chains that run from the core
// controller through every PE:
//   * the input interconnect (ibus_t): one 32-bit input per cycle plus the
//     4-bit receiver command that tells each PE whether to cache it;
//   * the weight interconnect (wbus_t): one 32-bit weight per cycle, used by
//     every active PE, with the control tags the controller attaches;
//   * the output interconnect (obus_t): a read request naming one PE and the
//     data slot that PE fills on the way back to the controller.
// The receiver command codes 0..13 are those of the paper's command table;
// 14 is the code the table of receiver transitions uses for the
// "already started" command that follows Start. The tag fields on the weight
// bus and the request format on the output bus are this design's own.
package cnn_pkg;

  localparam int unsigned DATA_W   = 32;  // one value per interconnect per cycle
  localparam int unsigned CMD_W    = 4;   // input-interconnect command width
  localparam int unsigned LANES    = 4;   // int8 lanes per vPE word
  localparam int unsigned LANE_W   = 8;
  localparam int unsigned ACC_W    = 32;  // int8 multiply, 32-bit accumulate
  localparam int unsigned KOFF_W   = 5;   // window offset (window <= 16 words)
  localparam int unsigned ID_W     = 10;  // PE index (up to 1024 PEs)
  localparam int unsigned DIM_W    = 10;  // Wo, Ho, Co fields
  localparam int unsigned CH_W     = 12;  // Ci field (packed channel words)
  localparam int unsigned K_W      = 4;   // Kx, Ky (1..15)
  localparam int unsigned S_W      = 4;   // strides

  // Receiver commands (input interconnect).
  typedef enum logic [CMD_W-1:0] {
    CMD_NOP      = 4'd0,
    CMD_DILATEX  = 4'd1,
    CMD_ERODEX   = 4'd2,
    CMD_SHIFTX   = 4'd3,
    CMD_ROTATEY  = 4'd4,
    CMD_DILATEY  = 4'd5,
    CMD_ERODEY   = 4'd6,
    CMD_SHIFTY   = 4'd7,
    CMD_I_SHIFTX = 4'd8,   // intermediate for ShiftX
    CMD_I_DILX   = 4'd9,   // intermediate for DilateX
    CMD_I_ERX    = 4'd10,  // intermediate for ErodeX
    CMD_I_Y11    = 4'd11,  // intermediate for DilateY and ShiftY
    CMD_I_Y12    = 4'd12,  // intermediate for DilateY and ShiftY
    CMD_START    = 4'd13,  // start (first input of a channel)
    CMD_STARTED  = 4'd14   // forwarded form of Start
  } icmd_e;

  typedef struct packed {
    logic              valid;
    icmd_e             cmd;
    logic [DATA_W-1:0] data;
  } ibus_t;

  typedef struct packed {
    logic              valid;
    logic [DATA_W-1:0] data;
    logic              first;    // first (ci,ky,kx) term: accumulate onto zero
    logic              last;     // last term: result goes to the output buffer
    logic              release_win; // last use of the window: free it
    logic [KOFF_W-1:0] koff;     // offset of the input inside the window
  } wbus_t;

  typedef struct packed {
    logic              req;      // a read request travels in this slot
    logic [ID_W-1:0]   req_id;   // PE that must answer
    logic              dvalid;   // slot holds a returned value
    logic [DATA_W-1:0] data;
  } obus_t;

  // One convolution tile, as scheduled by the host runtime.
  typedef struct packed {
    logic [DIM_W-1:0] wo;   // output tile width  (Wo*Ho <= NUM_PE)
    logic [DIM_W-1:0] ho;   // output tile height
    logic [DIM_W-1:0] co;   // output channels   (<= output buffer depth)
    logic [CH_W-1:0]  ci;   // input channel words (4 int8 channels each)
    logic [K_W-1:0]   kx;
    logic [K_W-1:0]   ky;
    logic [S_W-1:0]   sx;   // 1 <= sx <= kx
    logic [S_W-1:0]   sy;   // 1 <= sy <= ky
  } conv_cmd_t;

  // Status and event strobes of a core controller.
  typedef struct packed {
    logic busy;         // a tile is being loaded or computed
    logic rb_busy;      // outputs of a tile are being read back
    logic in_stall;     // weights wait for the inputs of their channel
    logic win_stall;    // inputs wait for a free input-buffer window
    logic out_stall;    // last channel waits for the previous read-back
    logic tile_done;    // all outputs of a tile returned
  } ctrl_stat_t;

endpackage
