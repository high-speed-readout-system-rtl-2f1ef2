// line_buffers -- three rotating line buffers that present a 3x3 pixel window.
//
// Subtracted pixel values arrive in raster order. Row y is written into line
// buffer (y mod 3) at its column, so the three buffers always hold the current
// row and the two rows above it; once the third buffer is full, the next row
// starts over in buffer 1, and which buffer holds the top, middle and bottom
// row of the window rotates with the row number (paper Sec. 3 step 4, Fig. 4).
// For each arriving pixel (x, y) the column x of rows y-2 and y-1 is read from
// the buffers and, with the new value as bottom element, shifted into a 3x3
// register window. When x >= 2 and y >= 2 the window is complete and centred
// on pixel (x-1, y-1); w_valid then pulses. Pixels in the outermost row and
// column of the frame are therefore never a window centre.
//
// Window order: w[3*r+c], r = 0 top .. 2 bottom, c = 0 left .. 2 right, so
// w[4] is the centre. Latency: two clocks from d_valid to w_valid. The buffers
// are one block RAM each with a registered read port; the register window
// and this latency are this design's choices.
module line_buffers
  import readout_pkg::*;
#(
  parameter int unsigned COLS = SENSOR_COLS,
  parameter int unsigned ROWS = SENSOR_ROWS,
  localparam int unsigned XW = $clog2(COLS),
  localparam int unsigned YW = $clog2(ROWS)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          d_valid,
  input  diff_t         d_diff,
  input  logic [XW-1:0] d_x,
  input  logic [YW-1:0] d_y,
  output logic          w_valid,
  output diff_t         w [9],
  output logic [XW-1:0] w_x,
  output logic [YW-1:0] w_y
);

  logic [1:0]    sel;          // buffer that receives the current row
  diff_t         rd [3];       // column x of each buffer
  logic          a_valid;
  diff_t         a_diff;
  logic [XW-1:0] a_x;
  logic [YW-1:0] a_y;
  logic [1:0]    a_sel;
  diff_t         col_top, col_mid;

  assign sel = 2'(d_y % 3);

  for (genvar b = 0; b < 3; b++) begin : g_line
    diff_t mem [COLS];
    always_ff @(posedge clk) begin
      if (d_valid) begin
        rd[b] <= mem[d_x];
        if (sel == 2'(b)) mem[d_x] <= d_diff;
      end
    end
  end

  // row y-1 sits in buffer (sel+2) mod 3, row y-2 in (sel+1) mod 3
  always_comb begin
    unique case (a_sel)
      2'd0:    begin col_mid = rd[2]; col_top = rd[1]; end
      2'd1:    begin col_mid = rd[0]; col_top = rd[2]; end
      default: begin col_mid = rd[1]; col_top = rd[0]; end
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_valid <= 1'b0;
      a_diff  <= '0;
      a_x     <= '0;
      a_y     <= '0;
      a_sel   <= '0;
      w_valid <= 1'b0;
      w_x     <= '0;
      w_y     <= '0;
      for (int i = 0; i < 9; i++) w[i] <= '0;
    end else begin
      a_valid <= d_valid;
      if (d_valid) begin
        a_diff <= d_diff;
        a_x    <= d_x;
        a_y    <= d_y;
        a_sel  <= sel;
      end
      w_valid <= a_valid && (a_x >= XW'(2)) && (a_y >= YW'(2));
      if (a_valid) begin
        for (int r = 0; r < 3; r++) begin
          w[3*r]   <= w[3*r+1];
          w[3*r+1] <= w[3*r+2];
        end
        w[2] <= col_top;
        w[5] <= col_mid;
        w[8] <= a_diff;
        w_x  <= a_x - 1'b1;
        w_y  <= a_y - 1'b1;
      end
    end
  end

endmodule
