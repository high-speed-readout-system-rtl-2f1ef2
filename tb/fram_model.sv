// fram_model -- behavioural model of a serial (SPI) FRAM, for simulation only.
//
// Implements, in SPI mode 0 (input sampled on rising sclk edges, output
// changed on falling edges):
//   READ  0x03 + 24-bit address, sequential read
//   WREN  0x06, sets the write-enable latch
//   WRITE 0x02 + 24-bit address, sequential write; accepted only when the
//         latch is set, which every WRITE transaction then clears
// Only the low address bits that fit BYTES are used. mem[] is filled by the
// testbench. nbytes counts data bytes read in the last READ, nwritten data
// bytes written in the last WRITE, wren_seen counts WREN commands.
module fram_model #(
  parameter int BYTES = 262144           // 256 KB
) (
  input  logic cs_n,
  input  logic sclk,
  input  logic mosi,
  output logic miso
);
  logic [7:0]  mem [BYTES];
  logic [31:0] cmd;
  logic [7:0]  wbyte;
  logic        wel;
  int          cnt;
  int          nbytes;
  int          nwritten;
  int          wren_seen;

  initial begin
    miso = 1'b0;
    cnt = 0;
    nbytes = 0;
    nwritten = 0;
    wren_seen = 0;
    cmd = '0;
    wbyte = '0;
    wel = 1'b0;
  end

  always @(negedge cs_n) begin
    cnt = 0;
    cmd = '0;
  end

  always @(posedge cs_n) begin
    if (cnt == 8 && cmd[7:0] == 8'h06) begin
      wel = 1'b1;
      wren_seen++;
    end
    if (cnt >= 32 && cmd[31:24] == 8'h02) wel = 1'b0;
  end

  always @(posedge sclk) if (!cs_n) begin
    if (cnt < 32) cmd = {cmd[30:0], mosi};
    else wbyte = {wbyte[6:0], mosi};
    cnt++;
    if (cnt == 33 && cmd[31:24] == 8'h02) nwritten = 0;
    if (cnt > 32 && (cnt - 32) % 8 == 0) begin
      if (cmd[31:24] == 8'h03) nbytes = (cnt - 32) / 8;
      if (cmd[31:24] == 8'h02 && wel) begin
        mem[(int'(cmd[23:0]) + (cnt - 33) / 8) % BYTES] = wbyte;
        nwritten = (cnt - 32) / 8;
      end
    end
  end

  always @(negedge sclk) if (!cs_n && cnt >= 32 && cmd[31:24] == 8'h03) begin
    int k, a;
    k = cnt - 32;
    a = (int'(cmd[23:0]) + k / 8) % BYTES;
    miso = mem[a][7 - k % 8];
  end
endmodule
