// tb_frame_subtractor -- checks frame differencing through the frame buffer.
//
// Streams frames of an 8 x 4 sensor with random pixel values and random gaps.
// Checks that nothing comes out while the first frame primes the buffer, that
// afterwards every pixel comes out as (this frame - previous frame) with its
// coordinates, two clocks after it was accepted, and that dropping en
// forgets the buffer so the next frame primes it again.
module tb_frame_subtractor;
  import readout_pkg::*;
  localparam int COLS = 8, ROWS = 4;
  localparam int XW = $clog2(COLS), YW = $clog2(ROWS), AW = $clog2(COLS*ROWS);
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic en, px_valid, px_sof, px_eof, d_valid, primed;
  pixel_t px_data;
  logic [XW-1:0] px_x, d_x;
  logic [YW-1:0] px_y, d_y;
  logic [AW-1:0] px_addr;
  diff_t d_diff;
  frame_subtractor #(.COLS(COLS), .ROWS(ROWS)) dut (.*);

  int checks = 0, failures = 0, cycle = 0, n_out = 0;
  int prev [ROWS][COLS];
  typedef struct { int x; int y; int d; int t; } exp_s;
  exp_s q [$];
  always @(posedge clk) cycle <= cycle + 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) if (rst_n && d_valid) begin
    exp_s e;
    n_out++;
    if (q.size() == 0) check(0, "unexpected output");
    else begin
      e = q.pop_front();
      check(d_diff == DIFF_W'(e.d) && d_x == XW'(e.x) && d_y == YW'(e.y),
            $sformatf("diff at %0d,%0d = %0d, expected %0d at %0d,%0d", d_x, d_y, d_diff, e.d, e.x, e.y));
      // e.t is taken before the accepting edge: two register stages = 3 edges
      check(cycle - e.t == 3, $sformatf("latency %0d", cycle - e.t));
    end
  end

  task automatic send_frame(input bit expect_out);
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) begin
        int v;
        while ($urandom_range(0, 2) == 0) begin
          px_valid <= 0; px_sof <= 0; px_eof <= 0;
          @(posedge clk);
        end
        v = int'($urandom_range(0, 4095));
        px_valid <= 1; px_data <= PIX_W'(v);
        px_x <= XW'(c); px_y <= YW'(r); px_addr <= AW'(r * COLS + c);
        px_sof <= (r == 0 && c == 0); px_eof <= (r == ROWS-1 && c == COLS-1);
        if (expect_out) q.push_back('{x: c, y: r, d: v - prev[r][c], t: cycle});
        prev[r][c] = v;
        @(posedge clk);
      end
    px_valid <= 0; px_sof <= 0; px_eof <= 0;
    repeat (4) @(posedge clk);
  endtask

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    en = 1; px_valid = 0; px_sof = 0; px_eof = 0; px_data = 0; px_x = 0; px_y = 0; px_addr = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    send_frame(0);
    check(n_out == 0 && primed, "first frame only primes the buffer");
    send_frame(1);
    send_frame(1);
    check(n_out == 2 * ROWS * COLS, $sformatf("output count %0d", n_out));
    en <= 0;
    repeat (2) @(posedge clk);
    check(!primed, "disable forgets the buffer");
    send_frame(0);
    en <= 1;
    @(posedge clk);
    send_frame(0);
    check(n_out == 2 * ROWS * COLS, "no output while re-priming");
    send_frame(1);
    check(q.size() == 0 && n_out == 3 * ROWS * COLS, "all differences delivered");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
