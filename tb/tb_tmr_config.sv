// tb_tmr_config -- checks the triplicated configuration store.
//
// Writes random words, reads them back through the read port and the parallel
// outputs, then injects bit flips: one upset copy must not change any voted
// value but must raise mismatch; a rewrite repairs the word; the same bits
// flipped in two copies do change the vote (which shows the voter is real).
module tb_tmr_config;
  localparam int WORDS = 16, WIDTH = 16, AW = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic wr_en, upset_en, mismatch;
  logic [AW-1:0] wr_addr, rd_addr, upset_addr;
  logic [WIDTH-1:0] wr_data, rd_data, upset_mask;
  logic [1:0] upset_copy;
  logic [WIDTH-1:0] cfg [WORDS];
  tmr_config #(.WORDS(WORDS), .WIDTH(WIDTH)) dut (.*);

  int checks = 0, failures = 0;
  logic [WIDTH-1:0] model [WORDS];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic upset(input int copy, input int a, input logic [WIDTH-1:0] m);
    @(negedge clk);
    upset_en = 1; upset_copy = 2'(copy); upset_addr = AW'(a); upset_mask = m;
    @(negedge clk);
    upset_en = 0;
  endtask

  task automatic check_all(input string when);
    for (int i = 0; i < WORDS; i++) begin
      rd_addr = AW'(i);
      #1;
      check(rd_data == model[i] && cfg[i] == model[i], $sformatf("%s: word %0d = %h expected %h", when, i, rd_data, model[i]));
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 0; upset_en = 0; wr_addr = 0; rd_addr = 0; upset_addr = 0; wr_data = 0;
    upset_mask = 0; upset_copy = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < WORDS; i++) model[i] = 0;
    check_all("after reset");
    for (int i = 0; i < WORDS; i++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = AW'(i); wr_data = WIDTH'($urandom); model[i] = wr_data;
    end
    @(negedge clk); wr_en = 0;
    check_all("after write");
    check(!mismatch, "no mismatch after write");
    for (int n = 0; n < 20; n++) begin
      int a, c;
      logic [WIDTH-1:0] m;
      a = int'($urandom_range(0, WORDS - 1));
      c = n % 3;
      m = WIDTH'($urandom) | 1;
      upset(c, a, m);
      check_all("single upset");
      check(mismatch, "mismatch flags single upset");
      @(negedge clk);
      wr_en = 1; wr_addr = AW'(a); wr_data = model[a];
      @(negedge clk); wr_en = 0;
      check(!mismatch, "rewrite repairs the word");
    end
    // double upset of the same bits outvotes the good copy
    upset(0, 5, 16'h00FF);
    upset(2, 5, 16'h00FF);
    rd_addr = 5; #1;
    check(rd_data == (model[5] ^ 16'h00FF), "two upset copies win the vote");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
