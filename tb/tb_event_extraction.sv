// tb_event_extraction -- self-checking test of the event extraction chain.
//
// Streams NFR frames of a small sensor (16 x 12) into the chain with random
// gaps between pixels. Each frame is a fixed per-pixel offset pattern plus a
// little noise plus injected X-ray events (single-pixel and split ones).
// The expected event list is worked out here from whole frames, the way the
// offline analysis does it: difference of consecutive frames, event threshold
// on a local-maximum centre, split threshold on the 8 neighbours, sum of the
// pixels above threshold. Checks: no output while the buffer is being primed,
// every event field, the event count, and the fixed pipeline latency from the
// pixel below-right of the centre to the event.
module tb_event_extraction;
  import readout_pkg::*;

  localparam int COLS = 16;
  localparam int ROWS = 12;
  localparam int NFR  = 5;
  localparam int XW = $clog2(COLS), YW = $clog2(ROWS), AW = $clog2(COLS*ROWS);
  localparam int LATENCY = 5;   // edges from accepting the pixel to sampling ev_valid
  localparam int EV_TH = 100, SP_TH = 20;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic          en;
  pixel_t        event_th, split_th;
  logic [FRAME_CNT_W-1:0] frame;
  logic          px_valid, px_sof, px_eof;
  pixel_t        px_data;
  logic [XW-1:0] px_x;
  logic [YW-1:0] px_y;
  logic [AW-1:0] px_addr;
  logic          primed, ev_valid;
  event_t        ev;

  event_extraction #(.COLS(COLS), .ROWS(ROWS)) dut (.*);

  int checks = 0, failures = 0;
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  int img [NFR][ROWS][COLS];
  int sent_cycle [ROWS][COLS];
  event_t exp_q [$];
  int n_single = 0, n_multi = 0, n_seen = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // reference: events of frame k (k >= 1) from full images
  task automatic reference(input int k);
    int d [ROWS][COLS];
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) d[r][c] = img[k][r][c] - img[k-1][r][c];
    for (int r = 1; r < ROWS - 1; r++)
      for (int c = 1; c < COLS - 1; c++) begin
        bit is_ev;
        int n, e;
        event_t x;
        is_ev = d[r][c] > EV_TH;
        n = 0; e = d[r][c];
        x = '0;
        for (int dr = -1; dr <= 1; dr++)
          for (int dc = -1; dc <= 1; dc++) begin
            int v;
            if (dr == 0 && dc == 0) continue;
            v = d[r+dr][c+dc];
            // earlier neighbours must be strictly smaller, later ones not larger
            if ((dr < 0 || (dr == 0 && dc < 0)) ? v >= d[r][c] : v > d[r][c]) is_ev = 0;
            if (v > SP_TH) begin
              x.pattern[n] = 1'b1;
              e += v;
            end
            n++;
          end
        if (is_ev) begin
          x.frame  = FRAME_CNT_W'(k);
          x.x      = COORD_W'(c);
          x.y      = COORD_W'(r);
          x.energy = ENERGY_W'(e);
          x.multi  = |x.pattern;
          exp_q.push_back(x);
          if (x.multi) n_multi++; else n_single++;
        end
      end
  endtask

  // compare outputs as they appear
  always @(posedge clk) begin
    if (rst_n && ev_valid) begin
      event_t x;
      n_seen++;
      if (exp_q.size() == 0) check(0, $sformatf("unexpected event at %0d,%0d", ev.x, ev.y));
      else begin
        x = exp_q.pop_front();
        check(ev == x, $sformatf("event got f%0d (%0d,%0d) E=%0d m=%0d p=%b, exp f%0d (%0d,%0d) E=%0d m=%0d p=%b",
              ev.frame, ev.x, ev.y, ev.energy, ev.multi, ev.pattern,
              x.frame, x.x, x.y, x.energy, x.multi, x.pattern));
        check(cycle - sent_cycle[ev.y+1][ev.x+1] == LATENCY,
              $sformatf("latency %0d", cycle - sent_cycle[ev.y+1][ev.x+1]));
      end
    end
  end

  initial begin
    #200000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    en = 1'b1; event_th = EV_TH; split_th = SP_TH; frame = '0;
    px_valid = 0; px_sof = 0; px_eof = 0; px_data = '0; px_x = '0; px_y = '0; px_addr = '0;
    // images: offsets 200..599, noise 0..4, events injected from frame 1 on
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) begin
        int base;
        base = 200 + int'($urandom_range(0, 399));
        for (int k = 0; k < NFR; k++) img[k][r][c] = base + int'($urandom_range(0, 4));
      end
    for (int k = 1; k < NFR; k++)
      for (int j = 0; j < 4; j++) begin
        int r, c;
        r = int'($urandom_range(1, ROWS - 2));
        c = int'($urandom_range(1, COLS - 2));
        img[k][r][c] += 300 + int'($urandom_range(0, 200));
        if (j % 2 == 1) begin
          img[k][r][c+1] += 40 + int'($urandom_range(0, 50));
          img[k][r+1][c] += 30 + int'($urandom_range(0, 50));
        end
      end
    for (int k = 1; k < NFR; k++) reference(k);

    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < NFR; k++) begin
      frame = FRAME_CNT_W'(k);
      for (int r = 0; r < ROWS; r++)
        for (int c = 0; c < COLS; c++) begin
          int gap;
          gap = int'($urandom_range(0, 2));
          repeat (gap) begin
            px_valid <= 1'b0;
            px_sof   <= 1'b0;
            px_eof   <= 1'b0;
            @(posedge clk);
          end
          px_valid <= 1'b1;
          px_data  <= PIX_W'(img[k][r][c]);
          px_x     <= XW'(c);
          px_y     <= YW'(r);
          px_addr  <= AW'(r * COLS + c);
          px_sof   <= (r == 0 && c == 0);
          px_eof   <= (r == ROWS - 1 && c == COLS - 1);
          @(posedge clk);
          sent_cycle[r][c] = cycle;
        end
      px_valid <= 1'b0;
      px_sof   <= 1'b0;
      px_eof   <= 1'b0;
      repeat (10) @(posedge clk);
      if (k == 0) begin
        check(n_seen == 0, "no events while priming");
        check(primed, "primed after first frame");
      end
    end
    repeat (10) @(posedge clk);
    check(exp_q.size() == 0, $sformatf("%0d expected events missing", exp_q.size()));
    check(n_single > 0 && n_multi > 0, "both single and multi-pixel events exercised");
    $display("events: %0d single, %0d multi, %0d seen", n_single, n_multi, n_seen);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
