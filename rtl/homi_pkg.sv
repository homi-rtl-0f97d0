// homi_pkg: types and constants shared by the HOMI event pre-processing and
// interface logic.
//
// The sizes follow the platform's main configuration: a 1280x720 event sensor
// mapped onto a 128x128 representation (16384 locations, 14-bit address),
// 16-bit representation words, 24-bit timestamps of which the upper 8 bits
// drive the shift-based decay. The EVT 3.0 word-type codes are those of the
// public Prophesee EVT 3.0 format (4-bit type in bits [15:12]); the
// representation/accumulation mode encodings and the configuration struct
// are this design's own choice.
package homi_pkg;

  localparam int unsigned SENSOR_W  = 1280;
  localparam int unsigned SENSOR_H  = 720;
  localparam int unsigned FRAME_W   = 128;
  localparam int unsigned FRAME_H   = 128;
  localparam int unsigned FRAME_PIX = FRAME_W * FRAME_H;   // 16384
  localparam int unsigned ADDR_W    = $clog2(FRAME_PIX);   // 14
  localparam int unsigned XY_W      = 11;
  localparam int unsigned TS_W      = 24;
  localparam int unsigned TS_HI_W   = 8;                   // timestamp bits [23:16]
  localparam int unsigned REP_W     = 16;
  localparam int unsigned EVT_W     = 16;

  // EVT 3.0 word types, bits [15:12]
  typedef enum logic [3:0] {
    EVT_ADDR_Y    = 4'h0,
    EVT_ADDR_X    = 4'h2,
    VECT_BASE_X   = 4'h3,
    VECT_12       = 4'h4,
    VECT_8        = 4'h5,
    EVT_TIME_LOW  = 4'h6,
    CONTINUED_4   = 4'h7,
    EVT_TIME_HIGH = 4'h8,
    EXT_TRIGGER   = 4'hA,
    OTHERS        = 4'hE,
    CONTINUED_12  = 4'hF
  } evt3_type_e;

  // Event representation computed by the ALUs
  typedef enum logic [1:0] {
    REP_BINARY    = 2'd0,   // location set to 255
    REP_HISTOGRAM = 2'd1,   // location incremented
    REP_SLTS      = 2'd2,   // shift-based linear time surface
    REP_SETS      = 2'd3    // shift-based exponential time surface
  } rep_mode_e;

  // When a frame is complete
  typedef enum logic {
    ACC_CONST_EVENT = 1'b0,  // after a fixed number of events
    ACC_CONST_TIME  = 1'b1   // after a fixed number of pre-processing clocks
  } acc_mode_e;

  // Static configuration of the pre-processing block (5 ns domain)
  typedef struct packed {
    rep_mode_e   rep_mode;
    acc_mode_e   acc_mode;
    logic [31:0] threshold;   // events or clock cycles per frame
    logic [7:0]  scale;       // scale-shift: (v*scale)>>shift
    logic [3:0]  shift;
    logic        disp_neg;    // display channel: 0 positive, 1 negative
  } pp_cfg_t;

  // Output transmission multiplexer select (AXI DMA packetizer)
  typedef enum logic [1:0] {
    TX_RAW        = 2'd0,
    TX_FRAME      = 2'd1,
    TX_CLASS      = 2'd2,
    TX_FRAME_CLASS = 2'd3
  } tx_sel_e;

endpackage
