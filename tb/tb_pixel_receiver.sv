// tb_pixel_receiver -- checks pixel labelling and frame counting.
//
// Drives three frames of a 10 x 6 sensor with frame/line valid framing,
// blanking between lines and frames, and random data-valid gaps inside lines.
// Checks every received pixel's data, column, row, linear address and
// start/end-of-frame flags, the one-clock latency, the number of pixels, and
// that the frame counter advances once per frame.
module tb_pixel_receiver;
  import readout_pkg::*;
  localparam int COLS = 10, ROWS = 6, NFR = 3;
  localparam int XW = $clog2(COLS), YW = $clog2(ROWS), AW = $clog2(COLS*ROWS);
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic s_fval, s_lval, s_dval;
  pixel_t s_data;
  logic px_valid, px_sof, px_eof, frame_done;
  pixel_t px_data;
  logic [XW-1:0] px_x;
  logic [YW-1:0] px_y;
  logic [AW-1:0] px_addr;
  logic [FRAME_CNT_W-1:0] frame_cnt;
  pixel_receiver #(.COLS(COLS), .ROWS(ROWS)) dut (.*);

  int checks = 0, failures = 0, n_px = 0, n_done = 0;
  typedef struct { int x; int y; int d; } px_s;
  px_s q [$];
  logic take_d;
  px_s last;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // one-clock latency: a pixel taken at one edge appears after it
  always @(posedge clk) begin
    if (rst_n) begin
      check(px_valid == take_d, "px_valid one clock after the sensor pixel");
      if (px_valid) begin
        px_s e;
        n_px++;
        e = q.pop_front();
        check(px_data == PIX_W'(e.d) && px_x == XW'(e.x) && px_y == YW'(e.y)
              && px_addr == AW'(e.y * COLS + e.x),
              $sformatf("pixel got %0d,%0d a%0d d%0d exp %0d,%0d d%0d", px_x, px_y, px_addr, px_data, e.x, e.y, e.d));
        check(px_sof == (e.x == 0 && e.y == 0), "sof flag");
        check(px_eof == (e.x == COLS-1 && e.y == ROWS-1), "eof flag");
      end
      if (frame_done) n_done++;
    end
    take_d <= s_fval && s_lval && s_dval;
  end

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    s_fval = 0; s_lval = 0; s_dval = 0; s_data = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int f = 0; f < NFR; f++) begin
      check(frame_cnt == FRAME_CNT_W'(f), $sformatf("frame counter %0d before frame %0d", frame_cnt, f));
      @(negedge clk); s_fval = 1;
      repeat (2) @(negedge clk);
      for (int r = 0; r < ROWS; r++) begin
        s_lval = 1;
        for (int c = 0; c < COLS; c++) begin
          while ($urandom_range(0, 3) == 0) begin
            s_dval = 0;
            @(negedge clk);
          end
          s_dval = 1;
          s_data = PIX_W'($urandom);
          q.push_back('{x: c, y: r, d: int'(s_data)});
          @(negedge clk);
        end
        s_dval = 0; s_lval = 0;
        repeat (3) @(negedge clk);
      end
      s_fval = 0;
      repeat (5) @(negedge clk);
    end
    check(frame_cnt == FRAME_CNT_W'(NFR), "frame counter after all frames");
    check(n_px == NFR * ROWS * COLS, $sformatf("pixel count %0d", n_px));
    check(n_done == NFR, "frame_done pulses");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
