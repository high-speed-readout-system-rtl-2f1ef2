// tb_fram_interface -- checks the configuration load from the SPI FRAM.
//
// Fills a behavioural FRAM with random bytes, issues a load, and checks that
// the block writes each configuration word (big-endian from BASE_ADDR) to the
// right address exactly once, reads exactly 2*WORDS bytes in one transaction,
// ends with done and chip select high, and takes the expected number of
// clocks ((32 + 16*WORDS) SPI bits of 2*SCLK_HALF clocks each, plus a few).
// Then stores random words: checks that a WREN precedes the WRITE, that every
// byte lands big-endian at BASE_ADDR, that no configuration write happens
// during a store, and the store's clock count; a final load reads them back.
module tb_fram_interface;
  localparam int WORDS = 16, SCLK_HALF = 2, AW = 4;
  localparam logic [23:0] BASE = 24'h00_1230;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic load, store, busy, done, cfg_wr_en, fram_cs_n, fram_sclk, fram_mosi, fram_miso;
  logic [AW-1:0] cfg_wr_addr;
  logic [15:0] cfg_wr_data;
  logic [15:0] cfg_in [WORDS];
  bit          storing = 0;
  fram_interface #(.WORDS(WORDS), .SCLK_HALF(SCLK_HALF), .BASE_ADDR(BASE)) dut (.*);
  fram_model fram (.cs_n(fram_cs_n), .sclk(fram_sclk), .mosi(fram_mosi), .miso(fram_miso));

  int checks = 0, failures = 0, n_wr = 0, cycles = 0;
  logic [WORDS-1:0] seen;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) if (rst_n && cfg_wr_en) begin
    int a;
    a = int'(BASE) + 2 * int'(cfg_wr_addr);
    n_wr++;
    check(!storing, "no configuration write during a store");
    check(cfg_wr_data == {fram.mem[a], fram.mem[a + 1]},
          $sformatf("word %0d = %h expected %h", cfg_wr_addr, cfg_wr_data, {fram.mem[a], fram.mem[a + 1]}));
    check(!seen[cfg_wr_addr], "each word written once");
    seen[cfg_wr_addr] = 1'b1;
  end

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    load = 0; store = 0; seen = '0;
    foreach (cfg_in[i]) cfg_in[i] = '0;
    for (int i = 0; i < 262144; i++) fram.mem[i] = 8'($urandom);
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int pass = 0; pass < 2; pass++) begin
      seen = '0; n_wr = 0;
      @(posedge clk);
      load <= 1;
      @(posedge clk);
      load <= 0;
      cycles = 1;
      while (!done) begin
        @(posedge clk);
        cycles++;
      end
      @(posedge clk);
      check(n_wr == WORDS && &seen, $sformatf("words written %0d", n_wr));
      check(fram.nbytes == 2 * WORDS, $sformatf("bytes read %0d", fram.nbytes));
      check(fram_cs_n && !busy, "chip select released, not busy");
      check(cycles >= (32 + 16 * WORDS) * 2 * SCLK_HALF && cycles <= (32 + 16 * WORDS) * 2 * SCLK_HALF + 6,
            $sformatf("load took %0d clocks", cycles));
      // new contents for the second pass
      for (int i = 0; i < 2 * WORDS; i++) fram.mem[int'(BASE) + i] = 8'($urandom);
    end
    // store new words, then read them back
    for (int pass = 0; pass < 2; pass++) begin
      int w0;
      foreach (cfg_in[i]) cfg_in[i] = 16'($urandom);
      w0 = fram.wren_seen;
      storing = 1;
      @(posedge clk);
      store <= 1;
      @(posedge clk);
      store <= 0;
      cycles = 1;
      while (!done) begin
        @(posedge clk);
        cycles++;
      end
      @(posedge clk);
      storing = 0;
      check(fram.wren_seen == w0 + 1, "one WREN per store");
      check(fram.nwritten == 2 * WORDS, $sformatf("bytes written %0d", fram.nwritten));
      check(fram_cs_n && !busy && !fram.wel, "store ends with cs high, latch clear");
      for (int i = 0; i < WORDS; i++)
        check({fram.mem[int'(BASE) + 2 * i], fram.mem[int'(BASE) + 2 * i + 1]} == cfg_in[i],
              $sformatf("stored word %0d", i));
      check(cycles >= (40 + 16 * WORDS) * 2 * SCLK_HALF && cycles <= (40 + 16 * WORDS) * 2 * SCLK_HALF + 12,
            $sformatf("store took %0d clocks", cycles));
      seen = '0; n_wr = 0;
      @(posedge clk);
      load <= 1;
      @(posedge clk);
      load <= 0;
      while (!done) @(posedge clk);
      @(posedge clk);
      check(n_wr == WORDS && &seen, $sformatf("words read back %0d", n_wr));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
