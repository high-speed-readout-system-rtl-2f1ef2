// adc_interface -- housekeeping ADC scanner for an AD7928-type 8-channel ADC.
//
// The board's temperature sensors and voltage/current monitors are digitised
// by an 8-channel, 12-bit serial ADC. This block converts the channels in
// turn, forever, and keeps the latest result of each channel in ch_data
// (ch_valid marks channels converted at least once). scan_done pulses each
// time channel NCH-1 has been stored, i.e. once per full scan.
//
// Each conversion is one 16-clock serial frame. The control word written on
// adc_din selects the channel of the NEXT conversion: WRITE=1, SEQ=0,
// ADD[2:0] at bits 12..10, PM=11 (normal), SHADOW=0, RANGE=1, CODING=1
// (straight binary). The word read on adc_dout is a leading zero, the 3-bit
// address of the converted channel and 12 data bits, MSB first; the result is
// filed under the address it carries. adc_sclk idles high; adc_din changes
// at chip-select fall and after rising edges. The ADC puts the leading zero
// out at chip-select fall and each further bit after a falling edge, so the
// 16 samples taken on rising edges are the address, the data and one idle
// bit. adc_sclk = clk/(2*SCLK_HALF); CONV_GAP clocks separate frames.
//
// The paper names the ADC (AD7928) and what it monitors; the frame format is
// taken from that part's data sheet, the scan order and timing are this
// design's choices.
module adc_interface #(
  parameter int unsigned SCLK_HALF = 3,
  parameter int unsigned CONV_GAP  = 100,
  parameter int unsigned NCH       = 8
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        en,
  output logic        adc_cs_n,
  output logic        adc_sclk,
  output logic        adc_din,
  input  logic        adc_dout,
  output logic [11:0] ch_data [NCH],
  output logic [NCH-1:0] ch_valid,
  output logic        scan_done
);

  localparam int unsigned GW = $clog2(CONV_GAP + 2);
  localparam int unsigned HW = $clog2(SCLK_HALF + 1);

  typedef enum logic [1:0] {S_GAP, S_XFER, S_STORE} state_e;

  state_e        state;
  logic [GW-1:0] gap_cnt;
  logic [HW-1:0] half_cnt;
  logic [4:0]    bit_cnt;
  logic [15:0]   tx_sr, rx_sr;
  logic [2:0]    next_ch;

  function automatic logic [15:0] ctrl_word(input logic [2:0] ch);
    return {1'b1, 1'b0, 1'b0, ch, 2'b11, 1'b0, 1'b0, 1'b1, 1'b1, 4'b0000};
  endfunction

  assign adc_din = tx_sr[15];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_GAP;
      gap_cnt   <= '0;
      half_cnt  <= '0;
      bit_cnt   <= '0;
      tx_sr     <= '1;
      rx_sr     <= '0;
      next_ch   <= '0;
      adc_cs_n  <= 1'b1;
      adc_sclk  <= 1'b1;
      ch_valid  <= '0;
      scan_done <= 1'b0;
      for (int i = 0; i < NCH; i++) ch_data[i] <= '0;
    end else begin
      scan_done <= 1'b0;
      unique case (state)
        S_GAP: begin
          if (gap_cnt >= GW'(CONV_GAP)) begin
            if (en) begin
              gap_cnt  <= '0;
              adc_cs_n <= 1'b0;
              tx_sr    <= ctrl_word(next_ch);
              next_ch  <= (next_ch == 3'(NCH - 1)) ? 3'd0 : next_ch + 1'b1;
              bit_cnt  <= '0;
              half_cnt <= '0;
              state    <= S_XFER;
            end
          end else begin
            gap_cnt <= gap_cnt + 1'b1;
          end
        end
        S_XFER: begin
          if (half_cnt == HW'(SCLK_HALF - 1)) begin
            half_cnt <= '0;
            if (adc_sclk) begin
              adc_sclk <= 1'b0;             // falling edge: ADC latches din
            end else begin
              adc_sclk <= 1'b1;             // rising edge: sample dout
              rx_sr    <= {rx_sr[14:0], adc_dout};
              tx_sr    <= {tx_sr[14:0], 1'b1};
              bit_cnt  <= bit_cnt + 1'b1;
              if (bit_cnt == 5'd15) state <= S_STORE;
            end
          end else begin
            half_cnt <= half_cnt + 1'b1;
          end
        end
        default: begin
          adc_cs_n <= 1'b1;
          // rx_sr[15:1] = address and data bits, rx_sr[0] = idle line
          if (int'(rx_sr[15:13]) < NCH) begin
            ch_data[rx_sr[15:13]]  <= rx_sr[12:1];
            ch_valid[rx_sr[15:13]] <= 1'b1;
            if (rx_sr[15:13] == 3'(NCH - 1)) scan_done <= 1'b1;
          end
          state <= S_GAP;
        end
      endcase
    end
  end

endmodule
