// tb_xray_readout_full -- one complete operation at the full sensor size.
//
// The readout system with every parameter at its default: 2048 x 2048 pixels,
// 12-bit pixels, 115200-baud control line at a 100 MHz clock. Boots from
// FRAM, sends a housekeeping packet, writes one raw frame to the frame store
// in frame mode, then in event mode streams three frames (the first primes the
// one-frame buffer) with injected X-ray events and compares every event packet
// on the SPI data line with the reference computed from the whole frames.
// (Reading a full frame back over the data line, about 8 MB at ~3 MB/s, is
// left to the reduced-size system test.)
module tb_xray_readout_full;
  import readout_pkg::*;

  localparam int COLS = SENSOR_COLS, ROWS = SENSOR_ROWS;
  localparam int CPB = 868;
  localparam int AW = $clog2(COLS * ROWS);
  localparam int NIMG = 4;
  localparam int EV_TH = 100, SP_TH = 20;

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
    int nev, total;
    total = 0;
    env_init();
    wait (cfg_loaded);
    @(posedge clk);
    for (int i = 0; i < CFG_WORDS - CFG_SENSOR0; i++)
      check(sensor_cfg[i] == fram_word(CFG_SENSOR0 + i), $sformatf("sensor setting %0d", i));
    command(8'h01, 8'h00, 16'h0003, 8'h06, 16'h0003);
    wait_packets(PKT_HK, 2);
    check_hk_packets();
    command(8'h01, 8'h00, 16'h0001, 8'h06, 16'h0001);
    make_frame(0, 0);
    send_frame(0);
    check(ddr_frame_ok(0), "full frame written to the frame store");
    command(8'h01, 8'h00, 16'h0002, 8'h06, 16'h0002);
    check(!ddr_pwr_en, "DDR3 off in event mode");
    clear_packets();
    for (int k = 1; k < NIMG; k++) begin
      make_frame(k, 40);
      send_frame(k);
      if (k == 1) check(dut.primed && pkt_type.size() == 0, "first frame primes the buffer");
      else begin
        reference(k, EV_TH, SP_TH);
        check_events($sformatf("frame %0d", k), nev);
        total += nev;
      end
      $display("frame %0d done at %0t", k, $time);
    end
    check(total > 40, $sformatf("%0d events matched", total));
    check(ev_dropped == 0, "no events dropped");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
