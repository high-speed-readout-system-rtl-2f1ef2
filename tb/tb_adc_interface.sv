// tb_adc_interface -- checks the housekeeping ADC scan against an ADC model.
//
// Runs the scanner against a behavioural AD7928-type ADC with known channel
// values, changes the values between scans, and checks that after each scan
// every channel's stored result equals the value the ADC held, that channels
// are converted in order 0..7, that each frame has 16 sclk cycles, that
// scan_done pulses once per scan and that the frame rate follows SCLK_HALF
// and CONV_GAP.
module tb_adc_interface;
  localparam int SCLK_HALF = 3, CONV_GAP = 20, NCH = 8;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic en, adc_cs_n, adc_sclk, adc_din, adc_dout, scan_done;
  logic [11:0] ch_data [NCH];
  logic [NCH-1:0] ch_valid;
  adc_interface #(.SCLK_HALF(SCLK_HALF), .CONV_GAP(CONV_GAP), .NCH(NCH)) dut (.*);
  ad7928_model adc (.cs_n(adc_cs_n), .sclk(adc_sclk), .din(adc_din), .dout(adc_dout));

  int checks = 0, failures = 0, n_scan = 0, cycles = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) if (rst_n && scan_done) n_scan++;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int start_frames;
    en = 0;
    for (int i = 0; i < NCH; i++) adc.value[i] = 12'($urandom);
    repeat (3) @(posedge clk);
    rst_n <= 1;
    en <= 1;
    // first scan: the first frame returns the power-on channel, so wait for two
    wait (n_scan == 1);
    for (int s = 0; s < 4; s++) begin
      logic [11:0] v [NCH];
      // new values; they are seen by the next complete scan
      @(posedge clk);
      for (int i = 0; i < NCH; i++) begin adc.value[i] = 12'($urandom); v[i] = adc.value[i]; end
      start_frames = adc.frames;
      cycles = 0;
      wait (n_scan == s + 3);
      @(posedge clk);
      check(&ch_valid, "all channels valid");
      for (int i = 0; i < NCH; i++)
        check(ch_data[i] == v[i], $sformatf("scan %0d ch %0d = %h expected %h", s, i, ch_data[i], v[i]));
    end
    // channel order: frame i converts the channel chosen in frame i-1
    for (int i = 1; i < adc.chan_log.size(); i++)
      check(adc.chan_log[i] == (i - 1) % NCH, $sformatf("conversion %0d on channel %0d", i, adc.chan_log[i]));
    check(adc.frames >= 6 * NCH, $sformatf("frames %0d", adc.frames));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // frame length: 16 sclk periods; frame period CONV_GAP + 16*2*SCLK_HALF + 2
  int fall_cnt = 0, last_start = -1, now = 0;
  always @(posedge clk) now <= now + 1;
  always @(negedge adc_sclk) if (!adc_cs_n) fall_cnt++;
  always @(negedge adc_cs_n) begin
    if (last_start >= 0)
      check(now - last_start == CONV_GAP + 16 * 2 * SCLK_HALF + 2,
            $sformatf("frame period %0d", now - last_start));
    last_start = now;
  end
  always @(posedge adc_cs_n) if (rst_n) begin
    check(fall_cnt == 16, $sformatf("%0d sclk cycles in a frame", fall_cnt));
    fall_cnt = 0;
  end
endmodule
