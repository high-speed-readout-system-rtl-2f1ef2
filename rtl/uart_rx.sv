// uart_rx -- asynchronous serial receiver (8 data bits, no parity, 1 stop bit).
//
// Used on the RS-422 control line (the differential line driver/receiver is
// outside the FPGA). The input is synchronised with two flip-flops; a start bit
// is recognised on a falling edge and confirmed at its middle, then each data
// bit (LSB first) is sampled at the middle of its bit period of CLKS_PER_BIT
// clocks. rx_valid pulses for one clock with rx_data when the stop bit is high;
// a byte whose stop bit is low is dropped and rx_err pulses.
module uart_rx #(
  parameter int unsigned CLKS_PER_BIT = 868   // 100 MHz / 115200 baud
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       rx,
  output logic       rx_valid,
  output logic [7:0] rx_data,
  output logic       rx_err
);

  localparam int unsigned CW = $clog2(CLKS_PER_BIT + 1);

  typedef enum logic [1:0] {S_IDLE, S_START, S_DATA, S_STOP} state_e;

  state_e        state;
  logic [CW-1:0] cnt;
  logic [2:0]    bit_idx;
  logic [7:0]    sr;
  logic          rx_m, rx_s;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rx_m     <= 1'b1;
      rx_s     <= 1'b1;
      state    <= S_IDLE;
      cnt      <= '0;
      bit_idx  <= '0;
      sr       <= '0;
      rx_valid <= 1'b0;
      rx_data  <= '0;
      rx_err   <= 1'b0;
    end else begin
      rx_m     <= rx;
      rx_s     <= rx_m;
      rx_valid <= 1'b0;
      rx_err   <= 1'b0;
      unique case (state)
        S_IDLE: if (!rx_s) begin
          state <= S_START;
          cnt   <= '0;
        end
        S_START: begin
          if (cnt == CW'(CLKS_PER_BIT / 2 - 1)) begin
            cnt     <= '0;
            bit_idx <= '0;
            state   <= rx_s ? S_IDLE : S_DATA;
          end else cnt <= cnt + 1'b1;
        end
        S_DATA: begin
          if (cnt == CW'(CLKS_PER_BIT - 1)) begin
            cnt     <= '0;
            sr      <= {rx_s, sr[7:1]};
            bit_idx <= bit_idx + 1'b1;
            if (bit_idx == 3'd7) state <= S_STOP;
          end else cnt <= cnt + 1'b1;
        end
        default: begin
          if (cnt == CW'(CLKS_PER_BIT - 1)) begin
            cnt   <= '0;
            state <= S_IDLE;
            if (rx_s) begin
              rx_valid <= 1'b1;
              rx_data  <= sr;
            end else begin
              rx_err <= 1'b1;
            end
          end else cnt <= cnt + 1'b1;
        end
      endcase
    end
  end

endmodule
