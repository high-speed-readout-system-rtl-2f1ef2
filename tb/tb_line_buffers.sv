// tb_line_buffers -- checks the 3x3 window formed by the rotating line buffers.
//
// Streams two frames of random signed values (7 x 6 pixels) with random gaps.
// For every window the block emits, checks its centre coordinates, all nine
// values against the stored image, the raster order and the two-clock latency
// after the pixel below-right of the centre; checks that exactly the
// (COLS-2) x (ROWS-2) interior pixels of each frame become centres, so every
// rotation of the three buffers is used.
module tb_line_buffers;
  import readout_pkg::*;
  localparam int COLS = 7, ROWS = 6;
  localparam int XW = $clog2(COLS), YW = $clog2(ROWS);
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic d_valid, w_valid;
  diff_t d_diff;
  logic [XW-1:0] d_x, w_x;
  logic [YW-1:0] d_y, w_y;
  diff_t w [9];
  line_buffers #(.COLS(COLS), .ROWS(ROWS)) dut (.*);

  int checks = 0, failures = 0, cycle = 0, n_win = 0;
  int img [ROWS][COLS];
  int sent [ROWS][COLS];
  int exp_x, exp_y;
  always @(posedge clk) cycle <= cycle + 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) if (rst_n && w_valid) begin
    int cx, cy;
    n_win++;
    cx = int'(w_x); cy = int'(w_y);
    check(cx == exp_x && cy == exp_y, $sformatf("centre %0d,%0d expected %0d,%0d", cx, cy, exp_x, exp_y));
    for (int i = 0; i < 9; i++)
      check(w[i] == DIFF_W'(img[cy - 1 + i / 3][cx - 1 + i % 3]), $sformatf("window %0d,%0d element %0d", cx, cy, i));
    // sent[] is taken before the accepting edge: two register stages = 3 edges
    check(cycle - sent[cy + 1][cx + 1] == 3, $sformatf("window latency %0d", cycle - sent[cy + 1][cx + 1]));
    exp_x = (cx == COLS - 2) ? 1 : cx + 1;
    exp_y = (cx == COLS - 2) ? ((cy == ROWS - 2) ? 1 : cy + 1) : cy;
  end

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    d_valid = 0; d_diff = 0; d_x = 0; d_y = 0; exp_x = 1; exp_y = 1;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int f = 0; f < 2; f++) begin
      for (int r = 0; r < ROWS; r++)
        for (int c = 0; c < COLS; c++) begin
          while ($urandom_range(0, 2) == 0) begin
            d_valid <= 0;
            @(posedge clk);
          end
          img[r][c] = int'($urandom_range(0, 8190)) - 4095;
          d_valid <= 1; d_diff <= DIFF_W'(img[r][c]); d_x <= XW'(c); d_y <= YW'(r);
          sent[r][c] = cycle;
          @(posedge clk);
        end
      d_valid <= 0;
      repeat (4) @(posedge clk);
      check(n_win == (f + 1) * (COLS - 2) * (ROWS - 2), $sformatf("window count %0d", n_win));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
