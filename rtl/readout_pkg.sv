// readout_pkg -- types and constants shared by the X-ray CMOS readout design.
//
// The sensor is a 2048 x 2048 pixel array read out with 12-bit pixel values
// (these two numbers follow the paper). Subtracting two frames gives a signed
// value one bit wider. The operating-mode encoding, the event record layout and
// the packet codes of the data line are this design's own choices.
package readout_pkg;

  // Sensor geometry and pixel format (from the sensor specification).
  localparam int unsigned PIX_W       = 12;
  localparam int unsigned DIFF_W      = PIX_W + 1;   // signed N - (N-1) value
  localparam int unsigned SENSOR_COLS = 2048;
  localparam int unsigned SENSOR_ROWS = 2048;
  localparam int unsigned COORD_W     = 11;          // $clog2(2048)
  localparam int unsigned ENERGY_W    = 16;          // 9 x 4095 < 2**16
  localparam int unsigned FRAME_CNT_W = 16;

  typedef logic        [PIX_W-1:0]  pixel_t;
  typedef logic signed [DIFF_W-1:0] diff_t;

  // Operating modes. The paper names frame, event and housekeeping modes;
  // IDLE is the state after reset.
  typedef enum logic [1:0] {
    MODE_IDLE  = 2'd0,
    MODE_FRAME = 2'd1,
    MODE_EVENT = 2'd2,
    MODE_HK    = 2'd3
  } mode_e;

  // One extracted X-ray event: position of the primary pixel, summed energy,
  // frame number as time stamp, single/multi-pixel label and the 3x3 split
  // pattern (bit k set when neighbour k exceeds the split threshold; neighbours
  // numbered 0..7 in raster order skipping the centre).
  typedef struct packed {
    logic [FRAME_CNT_W-1:0] frame;
    logic [COORD_W-1:0]     x;
    logic [COORD_W-1:0]     y;
    logic [ENERGY_W-1:0]    energy;
    logic                   multi;
    logic [7:0]             pattern;
  } event_t;

  // Configuration register map (words of 16 bits held in triplicated storage).
  localparam int unsigned CFG_WORDS     = 16;
  localparam int unsigned CFG_EVENT_TH  = 0;
  localparam int unsigned CFG_SPLIT_TH  = 1;
  // Words 2..15 hold sensor settings passed to the sensor board.
  localparam int unsigned CFG_SENSOR0   = 2;

  // Data-line packet header: {PKT_SYNC, type}.
  localparam logic [7:0] PKT_SYNC  = 8'hA5;
  localparam logic [7:0] PKT_EVENT = 8'h01;
  localparam logic [7:0] PKT_FRAME = 8'h02;
  localparam logic [7:0] PKT_HK    = 8'h03;

endpackage
