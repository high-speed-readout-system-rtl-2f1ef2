// tb_workload_lightcurve -- a transient light curve through the event mode,
// at the full sensor size.
//
// The readout system with every parameter at its default (2048 x 2048 pixels,
// 100 MHz clock, 115200-baud control line) is put in event mode and fed a
// sequence of full frames, one per 0.1 s exposure, whose number of charge
// clouds rises to a spike of 60 per frame and decays again, the shape of a
// short X-ray transient. Almost all clouds are split over two to four pixels,
// as for the beta-ray illumination such a test uses. For every frame the event
// packets on the SPI data line are compared one by one with the reference
// extraction of that frame, and the per-frame packet count (the light curve)
// must equal the reference count with no event dropped. The frames are sent
// back to back in simulated time; only the pixel stream, not the exposure
// time, is modelled. Only the last two frames are kept in memory.
module tb_workload_lightcurve;
  import readout_pkg::*;

  localparam int COLS = SENSOR_COLS, ROWS = SENSOR_ROWS;
  localparam int CPB = 868;
  localparam int AW = $clog2(COLS * ROWS);
  localparam int NIMG = 2;
  localparam int EV_TH = 100, SP_TH = 20;
  localparam int NFR = 10;
  localparam int PROFILE [NFR] = '{0, 0, 2, 8, 25, 60, 30, 10, 3, 0};

  `include "tb_readout_env.svh"

  xray_readout_top dut (.*);

  initial begin
    #2s;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // frame in slot 1 with n split clouds; slot 0 holds the previous frame
  task automatic make_beta_frame(input int n);
    for (int p = 0; p < COLS * ROWS; p++) img[1][p] = base_img[p] + PIX_W'($urandom_range(0, 4));
    for (int j = 0; j < n; j++) begin
      int r, c;
      r = int'($urandom_range(1, ROWS - 2));
      c = int'($urandom_range(1, COLS - 2));
      img[1][r * COLS + c]       += PIX_W'(300 + $urandom_range(0, 200));
      img[1][r * COLS + c + 1]   += PIX_W'(40 + $urandom_range(0, 50));
      if (j % 4 != 0) img[1][(r + 1) * COLS + c] += PIX_W'(30 + $urandom_range(0, 50));
      if (j % 3 == 0) img[1][r * COLS + c - 1]   += PIX_W'(30 + $urandom_range(0, 30));
    end
  endtask

  initial begin
    int lc [NFR];
    int nexp, nev, nmulti, total;
    total = 0;
    nmulti = 0;
    env_init();
    wait (cfg_loaded);
    command(8'h01, 8'h00, 16'h0002, 8'h06, 16'h0002);
    clear_packets();
    for (int f = 0; f < NFR; f++) begin
      if (f > 0) foreach (img[1][p]) img[0][p] = img[1][p];
      make_beta_frame(PROFILE[f]);
      send_frame(1);
      if (f == 0) begin
        check(dut.primed && pkt_type.size() == 0, "first frame primes the buffer");
        lc[f] = 0;
        continue;
      end
      reference(1, EV_TH, SP_TH);
      foreach (exp_q[i]) begin
        exp_q[i].frame = FRAME_CNT_W'(f);
        if (exp_q[i].multi) nmulti++;
      end
      nexp = exp_q.size();
      check_events($sformatf("frame %0d", f), nev);
      lc[f] = nev;
      total += nev;
      check(nev == nexp, $sformatf("frame %0d: %0d events matched of %0d", f, nev, nexp));
      check(nexp >= PROFILE[f] * 3 / 4, $sformatf("frame %0d: %0d clouds found of %0d", f, nexp, PROFILE[f]));
    end
    $write("light curve (events per frame):");
    for (int f = 0; f < NFR; f++) $write(" %0d", lc[f]);
    $write("\n");
    check(lc[5] > 2 * lc[3] && lc[5] > 2 * lc[8], "spike stands out of the light curve");
    check(nmulti * 10 >= total * 7, $sformatf("%0d of %0d events multi-pixel", nmulti, total));
    check(ev_dropped == 0, "no events dropped");
    check(int'(ev_sent) == total, $sformatf("%0d events sent", ev_sent));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
