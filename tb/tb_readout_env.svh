// tb_readout_env.svh -- test environment shared by the system testbenches.
//
// Included inside a testbench module after the localparams COLS, ROWS, CPB
// (clocks per RS-422 bit), AW (pixel address width) and NIMG (number of
// frames kept). Declares every port signal of xray_readout_top, the clock and
// reset, behavioural FRAM and ADC chips, a DDR3 frame-store model, an RS-422
// host, an SPI packet receiver, a frame generator with X-ray events, and the
// reference event extraction computed from whole frames.

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic s_fval, s_lval, s_dval;
  pixel_t s_data;
  logic [15:0] sensor_cfg [CFG_WORDS-CFG_SENSOR0];
  logic fram_cs_n, fram_sclk, fram_mosi, fram_miso;
  logic adc_cs_n, adc_sclk, adc_din, adc_dout;
  logic ddr_pwr_en, ddr_wr_valid, ddr_wr_sof, ddr_rd_valid, ddr_rd_ready, ddr_rd_sof;
  logic [AW-1:0] ddr_wr_addr;
  pixel_t ddr_wr_data, ddr_rd_data;
  logic rs422_rx, rs422_tx, spi_cs_n, spi_sclk, spi_mosi;
  mode_e mode;
  logic cfg_loaded, cfg_mismatch;
  logic [FRAME_CNT_W-1:0] frame_cnt;
  logic [15:0] ev_sent, ev_dropped, hk_sent, rows_sent, cmd_count;
  logic upset_en;
  logic [1:0] upset_copy;
  logic [$clog2(CFG_WORDS)-1:0] upset_addr;
  logic [15:0] upset_mask;

  int checks = 0, failures = 0;

  function automatic void check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endfunction

  // ------------------------------------------------------------ chips
  fram_model fram (.cs_n(fram_cs_n), .sclk(fram_sclk), .mosi(fram_mosi), .miso(fram_miso));
  ad7928_model adc (.cs_n(adc_cs_n), .sclk(adc_sclk), .din(adc_din), .dout(adc_dout));

  function automatic logic [15:0] fram_word(input int i);
    return {fram.mem[2 * i], fram.mem[2 * i + 1]};
  endfunction

  // ------------------------------------------------------- DDR3 store
  pixel_t ddr_mem [COLS * ROWS];
  logic   rd_taken;
  always @(posedge clk) begin
    if (ddr_wr_valid) ddr_mem[ddr_wr_addr] <= ddr_wr_data;
    rd_taken <= ddr_rd_valid && ddr_rd_ready;
  end

  task automatic playback();
    @(negedge clk);
    for (int p = 0; p < COLS * ROWS; p++) begin
      ddr_rd_valid = 1'b1;
      ddr_rd_data  = ddr_mem[p];
      ddr_rd_sof   = (p == 0);
      do @(negedge clk); while (!rd_taken);
    end
    ddr_rd_valid = 1'b0;
    ddr_rd_sof   = 1'b0;
  endtask

  // ---------------------------------------------------------- frames
  logic [PIX_W-1:0] img [NIMG][COLS * ROWS];
  logic [PIX_W-1:0] base_img [COLS * ROWS];

  task automatic make_frame(input int k, input int nev);
    for (int p = 0; p < COLS * ROWS; p++) img[k][p] = base_img[p] + PIX_W'($urandom_range(0, 4));
    for (int j = 0; j < nev; j++) begin
      int r, c;
      r = int'($urandom_range(1, ROWS - 2));
      c = int'($urandom_range(1, COLS - 2));
      img[k][r * COLS + c] += PIX_W'(300 + $urandom_range(0, 200));
      if (j % 2 == 1) begin
        img[k][r * COLS + c + 1]   += PIX_W'(40 + $urandom_range(0, 50));
        img[k][(r + 1) * COLS + c] += PIX_W'(30 + $urandom_range(0, 50));
      end
    end
  endtask

  task automatic send_frame(input int k);
    @(negedge clk);
    s_fval = 1'b1;
    repeat (2) @(negedge clk);
    for (int r = 0; r < ROWS; r++) begin
      s_lval = 1'b1;
      for (int c = 0; c < COLS; c++) begin
        s_dval = 1'b1;
        s_data = img[k][r * COLS + c];
        @(negedge clk);
      end
      s_lval = 1'b0;
      s_dval = 1'b0;
      repeat (4) @(negedge clk);
    end
    s_fval = 1'b0;
    repeat (12) @(negedge clk);
  endtask

  function automatic bit ddr_frame_ok(input int k);
    for (int p = 0; p < COLS * ROWS; p++) if (ddr_mem[p] != img[k][p]) return 1'b0;
    return 1'b1;
  endfunction

  // ----------------------------------------------------- reference
  event_t exp_q [$];

  task automatic reference(input int k, input int ev_th, input int sp_th);
    for (int r = 1; r < ROWS - 1; r++)
      for (int c = 1; c < COLS - 1; c++) begin
        int d0, n, e;
        bit is_ev;
        event_t x;
        d0 = int'(img[k][r * COLS + c]) - int'(img[k-1][r * COLS + c]);
        is_ev = d0 > ev_th;
        if (!is_ev) continue;
        n = 0; e = d0; x = '0;
        for (int dr = -1; dr <= 1; dr++)
          for (int dc = -1; dc <= 1; dc++) begin
            int v, p;
            if (dr == 0 && dc == 0) continue;
            p = (r + dr) * COLS + c + dc;
            v = int'(img[k][p]) - int'(img[k-1][p]);
            if ((dr < 0 || (dr == 0 && dc < 0)) ? v >= d0 : v > d0) is_ev = 0;
            if (v > sp_th) begin x.pattern[n] = 1'b1; e += v; end
            n++;
          end
        if (is_ev) begin
          x.frame = FRAME_CNT_W'(k);
          x.x = COORD_W'(c);
          x.y = COORD_W'(r);
          x.energy = ENERGY_W'(e);
          x.multi = |x.pattern;
          exp_q.push_back(x);
        end
      end
  endtask

  // ------------------------------------------------- SPI data line
  logic [15:0] words [$];
  int          pkt_start [$];
  logic [7:0]  pkt_type [$];
  int          cur_len = 0, cur_need = 0;
  logic [15:0] spi_sr;

  always @(posedge spi_sclk) if (!spi_cs_n) spi_sr = {spi_sr[14:0], spi_mosi};
  always @(posedge spi_cs_n) if (rst_n) begin
    if (cur_len == 0) begin
      check(spi_sr[15:8] == PKT_SYNC, $sformatf("packet header %h", spi_sr));
      cur_need = (spi_sr[7:0] == PKT_EVENT) ? 6 : (spi_sr[7:0] == PKT_HK) ? 10 : COLS + 2;
      pkt_start.push_back(words.size());
      pkt_type.push_back(spi_sr[7:0]);
    end
    words.push_back(spi_sr);
    cur_len++;
    if (cur_len == cur_need) cur_len = 0;
  end

  function automatic int count_type(input logic [7:0] t);
    int n = 0;
    foreach (pkt_type[i]) if (pkt_type[i] == t && (i < pkt_type.size() - 1 || cur_len == 0)) n++;
    return n;
  endfunction

  task automatic wait_packets(input logic [7:0] t, input int n);
    int timeout = 0;
    while (count_type(t) < n && timeout < 50_000_000) begin @(posedge clk); timeout++; end
    check(count_type(t) >= n, $sformatf("%0d packets of type %0d", count_type(t), t));
  endtask

  function automatic void clear_packets();
    words.delete();
    pkt_start.delete();
    pkt_type.delete();
  endfunction

  task automatic wait_idle();
    int quiet = 0, timeout = 0;
    while (quiet < 200 && timeout < 50_000_000) begin
      @(posedge clk);
      timeout++;
      if (spi_cs_n && dut.u_link.evq_empty && int'(dut.u_link.state) == 0) quiet++;
      else quiet = 0;
    end
  endtask

  function automatic event_t packet_event(input int i);
    int s;
    event_t x;
    s = pkt_start[i];
    x.frame   = FRAME_CNT_W'(words[s + 1]);
    x.x       = COORD_W'(words[s + 2]);
    x.multi   = words[s + 3][15];
    x.y       = COORD_W'(words[s + 3]);
    x.energy  = words[s + 4];
    x.pattern = words[s + 5][7:0];
    return x;
  endfunction

  // compares the event packets received with exp_q; returns matches
  function automatic int compare_events(input string what);
    int n = 0, j = 0;
    foreach (pkt_type[i]) if (pkt_type[i] == PKT_EVENT) begin
      event_t x;
      x = packet_event(i);
      if (j < exp_q.size()) begin
        check(x == exp_q[j], $sformatf("%s: event %0d got f%0d (%0d,%0d) E=%0d, expected f%0d (%0d,%0d) E=%0d",
              what, j, x.frame, x.x, x.y, x.energy, exp_q[j].frame, exp_q[j].x, exp_q[j].y, exp_q[j].energy));
        if (x == exp_q[j]) n++;
      end
      j++;
    end
    check(j == exp_q.size(), $sformatf("%s: %0d event packets, expected %0d", what, j, exp_q.size()));
    return n;
  endfunction

  task automatic check_events(input string what, output int n);
    wait_idle();
    n = compare_events(what);
    exp_q.delete();
    clear_packets();
  endtask

  function automatic bit events_subsequence();
    int j = 0;
    bit ok = 1;
    foreach (pkt_type[i]) if (pkt_type[i] == PKT_EVENT) begin
      event_t x;
      x = packet_event(i);
      while (j < exp_q.size() && exp_q[j] != x) j++;
      if (j == exp_q.size()) ok = 0;
      else j++;
    end
    exp_q.delete();
    clear_packets();
    return ok;
  endfunction

  task automatic check_hk_packets();
    int s;
    while (cur_len != 0) @(posedge clk);     // let a packet in flight finish
    s = pkt_start[pkt_start.size() - 1];
    for (int i = 0; i < 8; i++)
      check(words[s + 1 + i] == {1'b0, 3'(i), adc.value[i]},
            $sformatf("housekeeping channel %0d word %h", i, words[s + 1 + i]));
    check(words[s + 9][7:0] == 8'hFF && words[s + 9][14] == 1'b1, "housekeeping status word");
  endtask

  function automatic int check_frame_packets(input int k);
    int n = 0;
    foreach (pkt_type[i]) if (pkt_type[i] == PKT_FRAME) begin
      int s, r;
      bit ok;
      s = pkt_start[i];
      r = int'(words[s + 1]);
      ok = (r == n);
      for (int c = 0; c < COLS; c++) if (words[s + 2 + c] != {4'b0, img[k][r * COLS + c]}) ok = 0;
      check(ok, $sformatf("frame row packet %0d (row %0d)", n, r));
      n++;
    end
    check(n == ROWS, $sformatf("%0d row packets", n));
    clear_packets();
    return n;
  endfunction

  // ------------------------------------------------------ RS-422 host
  logic [7:0] host_rx [$];

  task automatic send_byte(input logic [7:0] b);
    logic [9:0] f;
    f = {1'b1, b, 1'b0};
    for (int i = 0; i < 10; i++) begin
      rs422_rx = f[i];
      repeat (CPB) @(posedge clk);
    end
  endtask

  initial forever begin
    logic [7:0] b;
    @(negedge rs422_tx);
    if (!rst_n) continue;
    repeat (CPB / 2) @(posedge clk);
    for (int i = 0; i < 8; i++) begin
      repeat (CPB) @(posedge clk);
      b[i] = rs422_tx;
    end
    repeat (CPB) @(posedge clk);
    host_rx.push_back(b);
  end

  task automatic command(input logic [7:0] op, input logic [7:0] a, input logic [15:0] d,
                         input logic [7:0] exp_ack, input logic [15:0] exp_d);
    int t;
    host_rx.delete();
    send_byte(8'hC5); send_byte(op); send_byte(a); send_byte(d[15:8]); send_byte(d[7:0]);
    t = 0;
    while (host_rx.size() < 4 && t < 100 * CPB) begin @(posedge clk); t++; end
    check(host_rx.size() == 4 && host_rx[0] == exp_ack && host_rx[1] == op
          && {host_rx[2], host_rx[3]} == exp_d,
          $sformatf("reply to command %h", op));
    host_rx.delete();
  endtask

  task automatic upset(input int copy, input int a, input logic [15:0] m);
    @(negedge clk);
    upset_en = 1'b1; upset_copy = 2'(copy); upset_addr = $bits(upset_addr)'(a); upset_mask = m;
    @(negedge clk);
    upset_en = 1'b0;
  endtask

  // ------------------------------------------------------------- init
  task automatic env_init();
    s_fval = 0; s_lval = 0; s_dval = 0; s_data = 0;
    rs422_rx = 1; ddr_rd_valid = 0; ddr_rd_data = 0; ddr_rd_sof = 0;
    upset_en = 0; upset_copy = 0; upset_addr = 0; upset_mask = 0;
    for (int i = 0; i < 262144; i++) fram.mem[i] = 8'($urandom);
    fram.mem[2 * CFG_EVENT_TH] = 8'(EV_TH >> 8);
    fram.mem[2 * CFG_EVENT_TH + 1] = 8'(EV_TH);
    fram.mem[2 * CFG_SPLIT_TH] = 8'(SP_TH >> 8);
    fram.mem[2 * CFG_SPLIT_TH + 1] = 8'(SP_TH);
    for (int i = 0; i < 8; i++) adc.value[i] = 12'($urandom);
    for (int p = 0; p < COLS * ROWS; p++) base_img[p] = PIX_W'(200 + $urandom_range(0, 399));
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
  endtask
