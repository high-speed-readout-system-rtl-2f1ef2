// spi_word_tx -- SPI master that sends 16-bit words on the data line.
//
// Mode 0: spi_sclk idles low, spi_mosi is set up before each rising edge and
// changes after the falling edge, most significant bit first. spi_cs_n is low
// for exactly one word (16 clocks of spi_sclk) and high for at least one clock
// between words. spi_sclk = clk/(2*SCLK_HALF); with a 100 MHz clock and
// SCLK_HALF = 2 the line runs at 25 Mbit/s, about 3 MB/s.
// Handshake: a word is taken when in_valid and in_ready are both high.
module spi_word_tx #(
  parameter int unsigned SCLK_HALF = 2
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  output logic        in_ready,
  input  logic [15:0] in_data,
  output logic        spi_cs_n,
  output logic        spi_sclk,
  output logic        spi_mosi
);

  localparam int unsigned HW = $clog2(SCLK_HALF + 1);

  logic [HW-1:0] half_cnt;
  logic [4:0]    bit_cnt;
  logic [15:0]   sr;

  assign in_ready = spi_cs_n;
  assign spi_mosi = sr[15];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      spi_cs_n <= 1'b1;
      spi_sclk <= 1'b0;
      half_cnt <= '0;
      bit_cnt  <= '0;
      sr       <= '0;
    end else if (spi_cs_n) begin
      if (in_valid) begin
        spi_cs_n <= 1'b0;
        sr       <= in_data;
        half_cnt <= '0;
        bit_cnt  <= '0;
      end
    end else if (half_cnt == HW'(SCLK_HALF - 1)) begin
      half_cnt <= '0;
      spi_sclk <= !spi_sclk;
      if (spi_sclk) begin
        sr      <= {sr[14:0], 1'b0};
        bit_cnt <= bit_cnt + 1'b1;
        if (bit_cnt == 5'd15) spi_cs_n <= 1'b1;
      end
    end else begin
      half_cnt <= half_cnt + 1'b1;
    end
  end

endmodule
