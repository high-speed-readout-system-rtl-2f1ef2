// tb_frame_ram -- checks the read-first single-port frame memory.
//
// Random reads and writes on a small memory against a model array. Every
// access checks that rdata, one clock later, is the word held before the
// access (read-first), including the access that overwrites it, and that
// rdata holds its value while en is low.
module tb_frame_ram;
  localparam int DEPTH = 64, WIDTH = 12, AW = 6;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic en, we;
  logic [AW-1:0] addr;
  logic [WIDTH-1:0] wdata, rdata;
  frame_ram #(.DEPTH(DEPTH), .WIDTH(WIDTH)) dut (.*);

  int checks = 0, failures = 0;
  logic [WIDTH-1:0] model [DEPTH];
  logic [WIDTH-1:0] expect_q;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    en = 0; we = 0; addr = 0; wdata = 0;
    // fill
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      en = 1; we = 1; addr = AW'(i); wdata = WIDTH'($urandom);
      model[i] = wdata;
    end
    @(negedge clk); en = 0; we = 0;
    for (int n = 0; n < 500; n++) begin
      @(negedge clk);
      en = (n == 0) || ($urandom_range(0, 3) != 0);
      we = $urandom_range(0, 1);
      addr = AW'($urandom);
      wdata = WIDTH'($urandom);
      if (en) begin
        expect_q = model[addr];
        if (we) model[addr] = wdata;
      end
      @(negedge clk);
      checks++;
      if (rdata !== expect_q) begin
        failures++;
        $display("FAIL: addr %0d rdata %h expected %h", addr, rdata, expect_q);
      end
      en = 0; we = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
