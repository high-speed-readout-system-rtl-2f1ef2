// tb_xray_readout_top -- end-to-end test of the readout system.
//
// A reduced sensor (16 x 12 pixels) and fast serial lines keep the run short.
// Around the top sit a raster pixel source, behavioural FRAM and ADC chips, a
// DDR3 frame-store model (stores written pixels, plays a frame back through
// the valid/ready port), a host that sends RS-422 commands and decodes the
// replies, and an SPI receiver that splits the data line into packets.
// Sequence and mechanisms counted (each must occur at least once):
//   boot load of the configuration from FRAM, sensor settings presented;
//   housekeeping mode: packets carry the ADC values of all 8 channels;
//   frame mode: raw pixels written to the frame store, DDR3 supply on,
//     a stored frame read back and sent as row packets;
//   event mode: DDR3 supply off, first frame primes the buffer, then events
//     are sent and compared with a reference computed here from whole frames;
//   an upset injected into one configuration copy is outvoted (events still
//     exact), flagged, and repaired by a configuration write;
//   a threshold update by command changes what is detected;
//   an event burst overflows the event queue: dropped + sent = expected;
//   a FRAM store command writes the configuration back to the FRAM, and a
//   FRAM reload command restores the stored thresholds and settings.
module tb_xray_readout_top;
  import readout_pkg::*;

  localparam int COLS = 16, ROWS = 12;
  localparam int CPB = 16;                 // clocks per RS-422 bit
  localparam int EV_DEPTH = 4;
  localparam int AW = $clog2(COLS * ROWS);
  localparam int EV_TH = 100, SP_TH = 20;
  localparam int NIMG = 7;

  `include "tb_readout_env.svh"

  xray_readout_top #(
    .COLS(COLS), .ROWS(ROWS), .CLKS_PER_BIT(CPB), .FRAM_SCLK_HALF(2),
    .ADC_SCLK_HALF(2), .ADC_CONV_GAP(20), .SPI_SCLK_HALF(2), .EV_DEPTH(EV_DEPTH)
  ) dut (.*);

  int n_boot = 0, n_hk = 0, n_frame_rows = 0, n_prime = 0, n_events = 0, n_seu = 0,
      n_update = 0, n_overflow = 0, n_reload = 0, n_ddr_off = 0, n_store = 0;

  initial begin
    #20ms;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int nev, k;
    env_init();
    // --- boot: configuration from FRAM
    wait (cfg_loaded);
    @(posedge clk);
    for (int i = 0; i < CFG_WORDS - CFG_SENSOR0; i++)
      check(sensor_cfg[i] == fram_word(CFG_SENSOR0 + i), $sformatf("sensor setting %0d", i));
    check(!cfg_mismatch, "no mismatch after boot");
    n_boot++;

    // --- housekeeping mode
    command(8'h01, 8'h00, 16'h0003, 8'h06, 16'h0003);
    check(mode == MODE_HK, "housekeeping mode");
    wait_packets(PKT_HK, 3);
    check_hk_packets();
    n_hk = count_type(PKT_HK);

    // --- frame mode
    command(8'h01, 8'h00, 16'h0001, 8'h06, 16'h0001);
    check(mode == MODE_FRAME && ddr_pwr_en, "frame mode, DDR3 powered");
    make_frame(0, 0);
    send_frame(0);
    check(ddr_frame_ok(0), "frame written to the frame store");
    playback();
    wait_packets(PKT_FRAME, ROWS);
    n_frame_rows = check_frame_packets(0);

    // --- event mode
    command(8'h01, 8'h00, 16'h0002, 8'h06, 16'h0002);
    check(mode == MODE_EVENT && !ddr_pwr_en, "event mode, DDR3 off");
    if (!ddr_pwr_en) n_ddr_off++;
    clear_packets();
    for (k = 1; k <= 3; k++) begin
      make_frame(k, 3);
      send_frame(k);
      if (k == 1) begin
        check(dut.primed && pkt_type.size() == 0, "first event-mode frame primes the buffer");
        n_prime++;
      end else reference(k, EV_TH, SP_TH);
    end
    check_events("events", nev);
    n_events += nev;

    // --- upset in one copy of the event threshold
    upset(1, CFG_EVENT_TH, 16'h0FFF);
    check(cfg_mismatch, "upset flagged");
    make_frame(4, 3);
    send_frame(4);
    reference(4, EV_TH, SP_TH);
    check_events("events under upset", nev);
    if (cfg_mismatch && nev > 0) n_seu++;
    command(8'h02, 8'(CFG_EVENT_TH), 16'(EV_TH), 8'h06, 16'(EV_TH));
    check(!cfg_mismatch, "rewrite repairs the upset");

    // --- threshold update by command
    command(8'h02, 8'(CFG_EVENT_TH), 16'd250, 8'h06, 16'd250);
    command(8'h03, 8'(CFG_EVENT_TH), 16'd0, 8'h06, 16'd250);
    make_frame(5, 4);
    send_frame(5);
    reference(5, 250, SP_TH);
    check_events("events with raised threshold", nev);
    n_update++;

    // --- burst larger than the event queue
    begin
      int before_sent, before_drop, expected;
      before_sent = int'(ev_sent);
      before_drop = int'(ev_dropped);
      make_frame(6, 14);
      send_frame(6);
      reference(6, 250, SP_TH);
      expected = exp_q.size();
      wait_idle();
      check(int'(ev_sent) - before_sent + int'(ev_dropped) - before_drop == expected,
            $sformatf("sent %0d + dropped %0d != %0d", int'(ev_sent) - before_sent,
                      int'(ev_dropped) - before_drop, expected));
      if (int'(ev_dropped) > before_drop) n_overflow++;
      check(events_subsequence(), "sent events are a subsequence of the expected ones");
    end

    // --- store a new sensor setting into the FRAM; it survives the reload
    command(8'h02, 8'(CFG_SENSOR0 + 1), 16'h5A3C, 8'h06, 16'h5A3C);
    command(8'h05, 8'h00, 16'h0000, 8'h06, 16'h0000);
    wait (dut.fram_busy);
    wait (!dut.fram_busy);
    check(fram_word(CFG_SENSOR0 + 1) == 16'h5A3C, "setting stored in the FRAM");
    check(fram_word(CFG_EVENT_TH) == 16'(dut.u_cfg.cfg[CFG_EVENT_TH]), "threshold stored in the FRAM");
    n_store++;
    // set the event threshold back to the boot value before reloading
    command(8'h02, 8'(CFG_EVENT_TH), 16'(EV_TH), 8'h06, 16'(EV_TH));
    command(8'h05, 8'h00, 16'h0000, 8'h06, 16'h0000);
    wait (dut.fram_busy);
    wait (!dut.fram_busy);
    command(8'h02, 8'(CFG_EVENT_TH), 16'd999, 8'h06, 16'd999);

    // --- reload from FRAM restores the threshold
    command(8'h04, 8'h00, 16'h0000, 8'h06, 16'h0000);
    wait (!dut.fram_busy);
    repeat (5) @(posedge clk);
    command(8'h03, 8'(CFG_EVENT_TH), 16'd0, 8'h06, 16'(EV_TH));
    n_reload++;
    check(sensor_cfg[1] == 16'h5A3C, "stored setting reloaded");

    $display("mechanisms: boot %0d hk %0d frame-rows %0d prime %0d events %0d seu %0d update %0d overflow %0d reload %0d ddr-off %0d store %0d",
             n_boot, n_hk, n_frame_rows, n_prime, n_events, n_seu, n_update, n_overflow, n_reload, n_ddr_off, n_store);
    check(n_boot > 0 && n_hk > 0 && n_frame_rows > 0 && n_prime > 0 && n_events > 0 && n_seu > 0
          && n_update > 0 && n_overflow > 0 && n_reload > 0 && n_ddr_off > 0 && n_store > 0, "every mechanism exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
