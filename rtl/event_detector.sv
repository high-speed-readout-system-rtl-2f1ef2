// event_detector -- 3x3 pattern matching for X-ray events.
//
// Works on one 3x3 window of frame-differenced values per w_valid. The centre
// pixel is the primary pixel of an event when its value exceeds the event
// threshold and it is the maximum of the window. Each of the eight neighbours
// that exceeds the split threshold sets one bit of the split pattern (bit k
// for neighbour k, neighbours counted in raster order skipping the centre).
// With no such neighbour the event is a single-pixel event; otherwise it is a
// multi-pixel event and the energy is the centre value plus every neighbour
// above the split threshold.
//
// To make exactly one pixel the primary one when two neighbours carry the same
// peak value, the centre must be strictly larger than the neighbours that come
// before it in raster order and at least equal to those after it.
//
// Timing: one clock from w_valid to ev_valid. Thresholds are unsigned ADU.
// The two thresholds, the single/multi rule and the energy sum follow the
// paper (Sec. 3, offline steps 2-4). The local-maximum rule is the usual
// ASCA/SIS convention, which the paper cites but does not spell out; the
// ASCA grade itself is not assigned here, the split pattern is passed on.
module event_detector
  import readout_pkg::*;
#(
  parameter int unsigned COLS = SENSOR_COLS,
  parameter int unsigned ROWS = SENSOR_ROWS,
  localparam int unsigned XW = $clog2(COLS),
  localparam int unsigned YW = $clog2(ROWS)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  pixel_t                 event_th,
  input  pixel_t                 split_th,
  input  logic [FRAME_CNT_W-1:0] frame,
  input  logic                   w_valid,
  input  diff_t                  w [9],
  input  logic [XW-1:0]          w_x,
  input  logic [YW-1:0]          w_y,
  output logic                   ev_valid,
  output event_t                 ev
);

  localparam int unsigned SUM_W = DIFF_W + 4;

  diff_t                   center;
  logic                    is_event;
  logic [7:0]              pattern;
  logic signed [SUM_W-1:0] sum;

  always_comb begin
    center   = w[4];
    is_event = center > $signed({1'b0, event_th});
    pattern  = '0;
    sum      = SUM_W'(center);
    for (int i = 0; i < 9; i++) begin
      if (i < 4 && !(center > w[i])) is_event = 1'b0;
      if (i > 4 && !(center >= w[i])) is_event = 1'b0;
    end
    for (int k = 0; k < 8; k++) begin
      // neighbour k sits at window index k (k < 4) or k+1 (k >= 4)
      if (w[k < 4 ? k : k + 1] > $signed({1'b0, split_th})) begin
        pattern[k] = 1'b1;
        sum        = sum + SUM_W'(w[k < 4 ? k : k + 1]);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ev_valid <= 1'b0;
      ev       <= '0;
    end else begin
      ev_valid <= w_valid && is_event;
      if (w_valid && is_event) begin
        ev.frame   <= frame;
        ev.x       <= COORD_W'(w_x);
        ev.y       <= COORD_W'(w_y);
        ev.energy  <= ENERGY_W'(sum);
        ev.multi   <= |pattern;
        ev.pattern <= pattern;
      end
    end
  end

endmodule
