// tb_event_detector -- checks the 3x3 pattern matching rules.
//
// Directed windows: a single-pixel event, a split event, a centre below the
// event threshold, a centre that is not the maximum, two equal peaks (only the
// earlier one in raster order may count), negative neighbours. Then random
// windows with values spread around the thresholds. Each result is compared
// with the rules evaluated here: centre above the event threshold and the
// window maximum, pattern of neighbours above the split threshold, energy =
// centre + those neighbours, multi = any neighbour above split. Also checks
// the one-clock latency and that non-events give no output.
module tb_event_detector;
  import readout_pkg::*;
  localparam int COLS = 64, ROWS = 64;
  localparam int XW = $clog2(COLS), YW = $clog2(ROWS);
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  pixel_t event_th, split_th;
  logic [FRAME_CNT_W-1:0] frame;
  logic w_valid, ev_valid;
  diff_t w [9];
  logic [XW-1:0] w_x;
  logic [YW-1:0] w_y;
  event_t ev;
  event_detector #(.COLS(COLS), .ROWS(ROWS)) dut (.*);

  int checks = 0, failures = 0, n_ev = 0, n_multi = 0, n_single = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic apply(input int v [9]);
    bit is_ev;
    int e;
    logic [7:0] p;
    is_ev = v[4] > int'(event_th);
    e = v[4]; p = '0;
    for (int i = 0; i < 9; i++) begin
      int k;
      if (i == 4) continue;
      if (i < 4 ? v[i] >= v[4] : v[i] > v[4]) is_ev = 0;
      k = i < 4 ? i : i - 1;
      if (v[i] > int'(split_th)) begin p[k] = 1; e += v[i]; end
    end
    @(negedge clk);
    for (int i = 0; i < 9; i++) w[i] = DIFF_W'(v[i]);
    w_valid = 1;
    w_x = XW'($urandom); w_y = YW'($urandom);
    frame = FRAME_CNT_W'($urandom);
    @(negedge clk);
    w_valid = 0;
    check(ev_valid == is_ev, $sformatf("event flag %0d expected %0d (centre %0d)", ev_valid, is_ev, v[4]));
    if (is_ev && ev_valid) begin
      n_ev++;
      if (|p) n_multi++; else n_single++;
      check(ev.energy == ENERGY_W'(e), $sformatf("energy %0d expected %0d", ev.energy, e));
      check(ev.pattern == p, $sformatf("pattern %b expected %b", ev.pattern, p));
      check(ev.multi == (|p), "multi flag");
      check(ev.x == COORD_W'(w_x) && ev.y == COORD_W'(w_y) && ev.frame == frame, "position and time");
    end
    @(negedge clk);
    check(!ev_valid, "single-clock event pulse");
  endtask

  initial begin
    #500000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    w_valid = 0; w_x = 0; w_y = 0; frame = 0;
    for (int i = 0; i < 9; i++) w[i] = 0;
    event_th = 100; split_th = 20;
    repeat (2) @(negedge clk);
    rst_n = 1;
    apply('{0, 3, -2, 1, 500, 4, 0, -1, 2});          // single
    apply('{0, 30, -2, 1, 500, 40, 0, 21, 2});        // split
    apply('{0, 3, -2, 1, 100, 4, 0, -1, 2});          // at threshold: no event
    apply('{0, 3, -2, 1, 300, 400, 0, -1, 2});        // not the maximum
    apply('{0, 3, -2, 300, 300, 4, 0, -1, 2});        // equal earlier peak
    apply('{0, 3, -2, 1, 300, 300, 0, -1, 2});        // equal later peak: counts
    apply('{-900, -50, -4095, 1, 4095, 21, 4095, 20, 2}); // extremes
    for (int n = 0; n < 2000; n++) begin
      int v [9];
      for (int i = 0; i < 9; i++) v[i] = int'($urandom_range(0, 600)) - 150;
      if (n % 3 == 0) v[4] = int'($urandom_range(0, 4095));
      event_th = PIX_W'($urandom_range(50, 300));
      split_th = PIX_W'($urandom_range(0, 60));
      apply(v);
    end
    check(n_single > 0 && n_multi > 0, "single and multi events seen");
    $display("events %0d (single %0d, multi %0d)", n_ev, n_single, n_multi);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
