// event_extraction -- onboard X-ray event extraction chain.
//
// Frame differencing against the one-frame buffer (frame_subtractor), three
// rotating line buffers forming a 3x3 window (line_buffers) and 3x3 pattern
// matching with event and split thresholds (event_detector), in a pipeline that
// accepts one pixel per clock with arbitrary gaps and never stalls, so it keeps
// pace with the sensor. Events leave as event_t records time-stamped with the
// frame number the pixel belongs to.
//
// en enables the chain (event mode); while it is low the frame buffer is not
// updated and the first complete frame after it rises only fills the buffer.
// Latency: ev_valid is high after the 5th rising edge following the edge that
// accepts the pixel below-right of the primary pixel. The chain follows the
// paper's Fig. 4 procedure.
module event_extraction
  import readout_pkg::*;
#(
  parameter int unsigned COLS = SENSOR_COLS,
  parameter int unsigned ROWS = SENSOR_ROWS,
  localparam int unsigned XW = $clog2(COLS),
  localparam int unsigned YW = $clog2(ROWS),
  localparam int unsigned AW = $clog2(COLS*ROWS)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   en,
  input  pixel_t                 event_th,
  input  pixel_t                 split_th,
  input  logic [FRAME_CNT_W-1:0] frame,
  input  logic                   px_valid,
  input  pixel_t                 px_data,
  input  logic [XW-1:0]          px_x,
  input  logic [YW-1:0]          px_y,
  input  logic [AW-1:0]          px_addr,
  input  logic                   px_sof,
  input  logic                   px_eof,
  output logic                   primed,
  output logic                   ev_valid,
  output event_t                 ev
);

  logic          d_valid, w_valid;
  diff_t         d_diff;
  logic [XW-1:0] d_x, w_x;
  logic [YW-1:0] d_y, w_y;
  diff_t         w [9];

  frame_subtractor #(.COLS(COLS), .ROWS(ROWS)) u_sub (
    .clk, .rst_n, .en,
    .px_valid, .px_data, .px_x, .px_y, .px_addr, .px_sof, .px_eof,
    .d_valid, .d_diff, .d_x, .d_y, .primed
  );

  line_buffers #(.COLS(COLS), .ROWS(ROWS)) u_lines (
    .clk, .rst_n,
    .d_valid, .d_diff, .d_x, .d_y,
    .w_valid, .w, .w_x, .w_y
  );

  event_detector #(.COLS(COLS), .ROWS(ROWS)) u_det (
    .clk, .rst_n, .event_th, .split_th, .frame,
    .w_valid, .w, .w_x, .w_y,
    .ev_valid, .ev
  );

endmodule
