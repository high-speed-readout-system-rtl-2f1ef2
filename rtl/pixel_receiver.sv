// pixel_receiver -- receiver for the raster pixel stream of the image sensor.
//
// The sensor delivers its pixels row by row, first pixel of the top row first,
// framed by a frame-valid and a line-valid signal; a pixel is present in every
// clock where s_fval, s_lval and s_dval are all high. The receiver registers the
// pixel and labels it with its column, row and linear index (row*COLS+col), the
// address the frame buffer uses, and with start/end-of-frame flags. A frame
// counter, used as the event time stamp, advances when s_fval falls.
//
// Timing: one clock of latency from s_* to px_*. Lines shorter or longer than
// COLS are not checked; the column counter restarts on every line.
//
// The paper only names this block ("Internal Receiver Circuit") and states the
// raster order; the frame/line-valid framing, the single pixel lane and the
// counters are this design's choices.
module pixel_receiver
  import readout_pkg::*;
#(
  parameter int unsigned COLS = SENSOR_COLS,
  parameter int unsigned ROWS = SENSOR_ROWS,
  localparam int unsigned XW = $clog2(COLS),
  localparam int unsigned YW = $clog2(ROWS),
  localparam int unsigned AW = $clog2(COLS*ROWS)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // sensor side
  input  logic                    s_fval,
  input  logic                    s_lval,
  input  logic                    s_dval,
  input  pixel_t                  s_data,
  // labelled pixel stream
  output logic                    px_valid,
  output pixel_t                  px_data,
  output logic [XW-1:0]           px_x,
  output logic [YW-1:0]           px_y,
  output logic [AW-1:0]           px_addr,
  output logic                    px_sof,
  output logic                    px_eof,
  output logic [FRAME_CNT_W-1:0]  frame_cnt,
  output logic                    frame_done
);

  logic [XW-1:0] col_q;
  logic [YW-1:0] row_q;
  logic [AW-1:0] addr_q;
  logic          lval_q, fval_q, first_q;
  logic          take;

  assign take = s_fval && s_lval && s_dval;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      col_q      <= '0;
      row_q      <= '0;
      addr_q     <= '0;
      lval_q     <= 1'b0;
      fval_q     <= 1'b0;
      first_q    <= 1'b1;
      px_valid   <= 1'b0;
      px_data    <= '0;
      px_x       <= '0;
      px_y       <= '0;
      px_addr    <= '0;
      px_sof     <= 1'b0;
      px_eof     <= 1'b0;
      frame_cnt  <= '0;
      frame_done <= 1'b0;
    end else begin
      lval_q     <= s_fval && s_lval;
      fval_q     <= s_fval;
      px_valid   <= take;
      frame_done <= fval_q && !s_fval;
      px_sof     <= take && first_q;
      px_eof     <= take && (int'(col_q) == COLS-1) && (int'(row_q) == ROWS-1);
      if (take) begin
        px_data <= s_data;
        px_x    <= col_q;
        px_y    <= row_q;
        px_addr <= addr_q;
        col_q   <= col_q + 1'b1;
        addr_q  <= addr_q + 1'b1;
        first_q <= 1'b0;
      end
      // end of a line: next line starts at column 0 of the next row
      if (lval_q && !(s_fval && s_lval)) begin
        col_q <= '0;
        row_q <= row_q + 1'b1;
      end
      // end of a frame: restart the raster and count the frame
      if (fval_q && !s_fval) begin
        col_q     <= '0;
        row_q     <= '0;
        addr_q    <= '0;
        first_q   <= 1'b1;
        frame_cnt <= frame_cnt + 1'b1;
      end
    end
  end

endmodule
