// tb_workload_frame_mode -- frame mode at the full sensor size.
//
// The readout system with every parameter at its default is switched to frame
// mode. One full 2048 x 2048 frame is streamed in and every raw pixel must
// reach the DDR3 frame-store model at its pixel index, with the DDR3 supply
// enabled. The stored frame is then played back through the read stream, and
// the first NROWS rows are checked as they arrive on the SPI data line: one
// packet of 2050 words per row, rows in order, pixels unchanged. The test also
// checks the row rate: a row packet is 2050 16-bit words at 4 clocks per bit,
// so rows can leave no faster than that, and no more than about two clocks
// per word slower (the line carries ~3 MB/s). Reading back the whole
// frame (about 8.4 MB at ~3 MB/s, some 2.8 s of simulated time) is cut short
// at NROWS rows to keep the run short; the path is the same for every row.
module tb_workload_frame_mode;
  import readout_pkg::*;

  localparam int COLS = SENSOR_COLS, ROWS = SENSOR_ROWS;
  localparam int CPB = 868;
  localparam int AW = $clog2(COLS * ROWS);
  localparam int NIMG = 1;
  localparam int EV_TH = 100, SP_TH = 20;
  localparam int NROWS = 96;

  `include "tb_readout_env.svh"

  xray_readout_top dut (.*);

  initial begin
    #2s;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint cyc;
    int n;
    env_init();
    wait (cfg_loaded);
    command(8'h01, 8'h00, 16'h0001, 8'h06, 16'h0001);
    check(ddr_pwr_en, "DDR3 supply on in frame mode");
    make_frame(0, 25);
    send_frame(0);
    check(ddr_frame_ok(0), "full frame written to the frame store");
    clear_packets();
    cyc = 0;
    fork
      playback();
    join_none
    while (pkt_type.size() < NROWS + 1) begin
      @(posedge clk);
      cyc++;
    end
    n = 0;
    for (int i = 0; i < NROWS; i++) begin
      int s;
      bit ok;
      s = pkt_start[i];
      ok = pkt_type[i] == PKT_FRAME && int'(words[s + 1]) == i;
      for (int c = 0; c < COLS; c++) if (words[s + 2 + c] != {4'b0, img[0][i * COLS + c]}) ok = 0;
      check(ok, $sformatf("row packet %0d", i));
      if (ok) n++;
    end
    check(n == NROWS, $sformatf("%0d of %0d rows correct", n, NROWS));
    // NROWS whole packets of COLS+2 words, 16 bits at 4 clocks each
    check(cyc >= longint'(NROWS) * (COLS + 2) * 16 * 4,
          $sformatf("%0d rows took %0d clocks", NROWS, cyc));
    // and at most about 2 clocks of chip-select overhead per word (~3 MB/s)
    check(cyc <= longint'(NROWS + 1) * (COLS + 2) * 66,
          $sformatf("%0d rows took %0d clocks", NROWS, cyc));
    check(rows_sent >= 16'(NROWS), $sformatf("rows_sent %0d", rows_sent));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
