// uart_tx -- asynchronous serial transmitter (8 data bits, no parity, 1 stop bit).
//
// Sends tx_data when tx_start is high and busy is low: a low start bit, the
// eight data bits LSB first and a high stop bit, each CLKS_PER_BIT clocks
// long. busy stays high for the whole character. The line idles high.
module uart_tx #(
  parameter int unsigned CLKS_PER_BIT = 868
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       tx_start,
  input  logic [7:0] tx_data,
  output logic       busy,
  output logic       tx
);

  localparam int unsigned CW = $clog2(CLKS_PER_BIT + 1);

  logic [CW-1:0] cnt;
  logic [3:0]    bit_idx;    // 0 start, 1..8 data, 9 stop
  logic [9:0]    frame_q;

  assign tx = busy ? frame_q[0] : 1'b1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy    <= 1'b0;
      cnt     <= '0;
      bit_idx <= '0;
      frame_q <= '1;
    end else if (!busy) begin
      if (tx_start) begin
        busy    <= 1'b1;
        frame_q <= {1'b1, tx_data, 1'b0};
        cnt     <= '0;
        bit_idx <= '0;
      end
    end else if (cnt == CW'(CLKS_PER_BIT - 1)) begin
      cnt     <= '0;
      frame_q <= {1'b1, frame_q[9:1]};
      if (bit_idx == 4'd9) busy <= 1'b0;
      else bit_idx <= bit_idx + 1'b1;
    end else begin
      cnt <= cnt + 1'b1;
    end
  end

endmodule
