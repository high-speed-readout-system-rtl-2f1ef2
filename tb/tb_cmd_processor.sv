// tb_cmd_processor -- checks the RS-422 command protocol.
//
// A host model sends serial commands (8N1, CLKS_PER_BIT clocks per bit) and
// decodes the replies from the transmit line. Configuration storage is
// modelled here as a plain array behind the block's write and read ports.
// Checks: mode changes, configuration writes (address, data, one pulse),
// read-back, FRAM reload and store pulses, NAK for an unknown opcode and for an address
// out of range, bytes before the sync byte ignored, four-byte replies with
// ACK/NAK, opcode and data, and the command counter.
module tb_cmd_processor;
  import readout_pkg::*;
  localparam int CPB = 16, WORDS = 16, AW = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic rs422_rx, rs422_tx, cfg_wr_en, fram_reload, fram_store;
  mode_e mode;
  logic [AW-1:0] cfg_wr_addr, cfg_rd_addr;
  logic [15:0] cfg_wr_data, cfg_rd_data, cmd_count;
  cmd_processor #(.CLKS_PER_BIT(CPB), .WORDS(WORDS)) dut (.*);

  int checks = 0, failures = 0, n_wr = 0, n_reload = 0, n_store = 0;
  logic [15:0] regs [WORDS];
  logic [7:0] rx_q [$];

  assign cfg_rd_data = regs[cfg_rd_addr];
  always @(posedge clk) begin
    if (rst_n && cfg_wr_en) begin regs[cfg_wr_addr] <= cfg_wr_data; n_wr++; end
    if (rst_n && fram_reload) n_reload++;
    if (rst_n && fram_store) n_store++;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic send_byte(input logic [7:0] b);
    logic [9:0] f;
    f = {1'b1, b, 1'b0};
    for (int i = 0; i < 10; i++) begin
      rs422_rx = f[i];
      repeat (CPB) @(posedge clk);
    end
  endtask

  // host receiver
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
    rx_q.push_back(b);
  end

  task automatic command(input logic [7:0] op, input logic [7:0] a, input logic [15:0] d,
                         input logic [7:0] exp_ack, input logic [15:0] exp_d);
    int t;
    send_byte(8'hC5); send_byte(op); send_byte(a); send_byte(d[15:8]); send_byte(d[7:0]);
    t = 0;
    while (rx_q.size() < 4 && t < 100 * CPB) begin @(posedge clk); t++; end
    check(rx_q.size() == 4, $sformatf("reply length %0d", rx_q.size()));
    if (rx_q.size() == 4) begin
      check(rx_q[0] == exp_ack && rx_q[1] == op && {rx_q[2], rx_q[3]} == exp_d,
            $sformatf("reply %h %h %h%h expected %h %h %h", rx_q[0], rx_q[1], rx_q[2], rx_q[3], exp_ack, op, exp_d));
    end
    rx_q.delete();
  endtask

  initial begin
    #3000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rs422_rx = 1;
    for (int i = 0; i < WORDS; i++) regs[i] = 16'(i * 3);
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (CPB * 4) @(posedge clk);
    check(mode == MODE_IDLE, "idle after reset");
    send_byte(8'h00); send_byte(8'h13);          // noise before sync
    command(8'h01, 8'h00, 16'h0002, 8'h06, 16'h0002);
    check(mode == MODE_EVENT, "event mode");
    command(8'h01, 8'h00, 16'h0001, 8'h06, 16'h0001);
    check(mode == MODE_FRAME, "frame mode");
    command(8'h01, 8'h00, 16'h0003, 8'h06, 16'h0003);
    check(mode == MODE_HK, "housekeeping mode");
    for (int i = 0; i < 4; i++) begin
      logic [15:0] v;
      logic [7:0] a;
      v = 16'($urandom);
      a = 8'($urandom_range(0, WORDS - 1));
      command(8'h02, a, v, 8'h06, v);
      check(regs[a] == v, "configuration written");
      command(8'h03, a, 16'h0000, 8'h06, v);
    end
    check(n_wr == 4, $sformatf("write pulses %0d", n_wr));
    command(8'h02, 8'd40, 16'h1234, 8'h15, 16'h1234);  // address out of range
    check(n_wr == 4, "no write for bad address");
    command(8'h04, 8'h00, 16'h0000, 8'h06, 16'h0000);
    check(n_reload == 1 && n_store == 0, "FRAM reload pulse");
    command(8'h05, 8'h00, 16'h0000, 8'h06, 16'h0000);
    check(n_store == 1 && n_reload == 1, "FRAM store pulse");
    command(8'h7E, 8'h00, 16'hBEEF, 8'h15, 16'hBEEF);  // unknown opcode
    check(mode == MODE_HK, "mode unchanged by bad commands");
    check(cmd_count == 16'd15, $sformatf("command count %0d", cmd_count));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
