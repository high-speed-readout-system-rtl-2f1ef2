// tb_data_link -- checks packet formation and the SPI data line.
//
// An SPI receiver model collects 16-bit words (mode 0, MSB first, one word
// per chip-select low period) and the testbench compares them with the
// packets it expects. Covers: event packets; an event burst larger than the
// queue, where the first EV_DEPTH events must be sent and the rest counted as
// dropped; a housekeeping packet with snapshot values; frame-mode row packets
// pulled from a valid/ready pixel source with stalls, with row numbers
// restarting at the start-of-frame pixel; the SPI word timing.
module tb_data_link;
  import readout_pkg::*;
  localparam int COLS = 8, EV_DEPTH = 8, SCLK_HALF = 2;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  mode_e mode;
  logic ev_valid, hk_trigger, fr_valid, fr_ready, fr_sof, spi_cs_n, spi_sclk, spi_mosi;
  event_t ev;
  logic [11:0] hk_data [8];
  logic [15:0] hk_status, ev_sent, ev_dropped, hk_sent, rows_sent;
  pixel_t fr_data;
  data_link #(.COLS(COLS), .EV_DEPTH(EV_DEPTH), .SCLK_HALF(SCLK_HALF)) dut (.*);

  int checks = 0, failures = 0;
  logic [15:0] got [$];
  logic [15:0] expw [$];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // SPI receiver
  logic [15:0] sr;
  int nbit = 0, cs_low = 0;
  always @(posedge spi_sclk) if (!spi_cs_n) begin sr = {sr[14:0], spi_mosi}; nbit++; end
  always @(posedge spi_cs_n) if (rst_n) begin
    check(nbit == 16, $sformatf("%0d bits in a word", nbit));
    got.push_back(sr);
    nbit = 0;
  end
  always @(posedge clk) if (rst_n && !spi_cs_n) cs_low++;

  task automatic expect_event(input event_t e);
    expw.push_back({PKT_SYNC, PKT_EVENT});
    expw.push_back(16'(e.frame));
    expw.push_back(16'(e.x));
    expw.push_back({e.multi, 4'b0, e.y});
    expw.push_back(e.energy);
    expw.push_back({8'h00, e.pattern});
  endtask

  task automatic wait_words(input int n);
    int t = 0;
    while (got.size() < n && t < 200000) begin @(posedge clk); t++; end
  endtask

  task automatic compare(input string what);
    wait_words(expw.size());
    repeat (100) @(posedge clk);
    check(got.size() == expw.size(), $sformatf("%s: %0d words, expected %0d", what, got.size(), expw.size()));
    for (int i = 0; i < expw.size() && i < got.size(); i++)
      check(got[i] == expw[i], $sformatf("%s: word %0d = %h expected %h", what, i, got[i], expw[i]));
    got.delete();
    expw.delete();
  endtask

  function automatic event_t rand_event();
    event_t e;
    e = event_t'({$urandom, $urandom, $urandom});
    return e;
  endfunction

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    mode = MODE_EVENT; ev_valid = 0; ev = '0; hk_trigger = 0; hk_status = 0;
    fr_valid = 0; fr_data = 0; fr_sof = 0;
    for (int i = 0; i < 8; i++) hk_data[i] = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    // events with gaps
    for (int i = 0; i < 5; i++) begin
      event_t e;
      e = rand_event();
      ev_valid <= 1; ev <= e;
      expect_event(e);
      @(posedge clk);
      ev_valid <= 0;
      repeat ($urandom_range(0, 300)) @(posedge clk);
    end
    compare("events");
    check(ev_sent == 5 && ev_dropped == 0, "event counters");
    // word timing: 16 sclk periods of 2*SCLK_HALF clocks per word
    check(cs_low == 5 * 6 * 16 * 2 * SCLK_HALF, $sformatf("chip select low %0d clocks", cs_low));
    // burst larger than the queue
    for (int i = 0; i < EV_DEPTH + 12; i++) begin
      event_t e;
      e = rand_event();
      ev_valid <= 1; ev <= e;
      if (i < EV_DEPTH) expect_event(e);
      @(posedge clk);
    end
    ev_valid <= 0;
    compare("event burst");
    check(ev_dropped == 12, $sformatf("dropped %0d", ev_dropped));
    check(ev_sent == 5 + EV_DEPTH, "sent after burst");
    // housekeeping
    mode = MODE_HK;
    for (int i = 0; i < 8; i++) hk_data[i] = 12'($urandom);
    hk_status = 16'($urandom);
    expw.push_back({PKT_SYNC, PKT_HK});
    for (int i = 0; i < 8; i++) expw.push_back({1'b0, 3'(i), hk_data[i]});
    expw.push_back(hk_status);
    hk_trigger <= 1;
    @(posedge clk);
    hk_trigger <= 0;
    @(negedge clk);
    for (int i = 0; i < 8; i++) hk_data[i] = 12'($urandom);   // snapshot must hold
    compare("housekeeping");
    check(hk_sent == 1, "housekeeping counter");
    // frame mode: two frames of three rows
    mode = MODE_FRAME;
    fork
      begin
        for (int f = 0; f < 2; f++)
          for (int r = 0; r < 3; r++) begin
            expw.push_back({PKT_SYNC, PKT_FRAME});
            expw.push_back(16'(r));
            for (int c = 0; c < COLS; c++) begin
              pixel_t p;
              p = PIX_W'($urandom);
              expw.push_back({4'b0, p});
              while ($urandom_range(0, 3) == 0) begin fr_valid <= 0; @(posedge clk); end
              fr_valid <= 1; fr_data <= p; fr_sof <= (r == 0 && c == 0);
              @(posedge clk);
              while (!fr_ready) @(posedge clk);
            end
          end
        fr_valid <= 0;
      end
    join
    compare("frame rows");
    check(rows_sent == 6, $sformatf("rows sent %0d", rows_sent));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
