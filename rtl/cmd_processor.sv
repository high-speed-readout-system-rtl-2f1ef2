// cmd_processor -- command processing on the RS-422 control line.
//
// The control line carries low-rate commands from the host or satellite bus:
// operating-mode changes, configuration updates and read-backs, each answered
// with an acknowledgement. A command is five bytes,
//     0xC5, opcode, address, data[15:8], data[7:0]
// and bytes are ignored until a 0xC5 sync byte starts a command. Opcodes:
//     0x01 SET_MODE     mode <= data[1:0] (0 idle, 1 frame, 2 event, 3 HK)
//     0x02 WRITE_CFG    configuration word <address> <= data (all 3 copies)
//     0x03 READ_CFG     answer carries the voted word <address>
//     0x04 RELOAD_FRAM  reload all configuration words from the FRAM
//     0x05 STORE_FRAM   write the current configuration words to the FRAM
// Every command is answered with four bytes: 0x06 (ACK) or 0x15 (NAK, unknown
// opcode or address out of range), the opcode, and two data bytes (the word
// read for READ_CFG, otherwise the data received). A byte with a framing
// error aborts the command. The mode is held here and is IDLE after reset.
//
// The paper states only what the control line is for (mode changes,
// configuration updates, acknowledgements) and that it is RS-422; the UART
// format, the command layout and the opcodes are this design's choices.
module cmd_processor
  import readout_pkg::*;
#(
  parameter int unsigned CLKS_PER_BIT = 868,
  parameter int unsigned WORDS        = CFG_WORDS,
  localparam int unsigned AW = $clog2(WORDS)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          rs422_rx,
  output logic          rs422_tx,
  output mode_e         mode,
  output logic          cfg_wr_en,
  output logic [AW-1:0] cfg_wr_addr,
  output logic [15:0]   cfg_wr_data,
  output logic [AW-1:0] cfg_rd_addr,
  input  logic [15:0]   cfg_rd_data,
  output logic          fram_reload,
  output logic          fram_store,
  output logic [15:0]   cmd_count
);

  localparam logic [7:0] SYNC = 8'hC5;
  localparam logic [7:0] ACK  = 8'h06;
  localparam logic [7:0] NAK  = 8'h15;
  localparam logic [7:0] OP_SET_MODE = 8'h01;
  localparam logic [7:0] OP_WRITE    = 8'h02;
  localparam logic [7:0] OP_READ     = 8'h03;
  localparam logic [7:0] OP_RELOAD   = 8'h04;
  localparam logic [7:0] OP_STORE    = 8'h05;

  typedef enum logic [2:0] {S_SYNC, S_OP, S_ADDR, S_DHI, S_DLO, S_EXEC, S_REPLY} state_e;

  state_e     state;
  logic       rx_valid, rx_err;
  logic [7:0] rx_data;
  logic       tx_start, tx_busy;
  logic [7:0] tx_data;
  logic [7:0] op_q, addr_q, dhi_q;
  logic [7:0] reply_q [4];
  logic [2:0] reply_idx;
  logic       addr_ok;

  uart_rx #(.CLKS_PER_BIT(CLKS_PER_BIT)) u_rx (
    .clk, .rst_n, .rx(rs422_rx), .rx_valid, .rx_data, .rx_err
  );

  uart_tx #(.CLKS_PER_BIT(CLKS_PER_BIT)) u_tx (
    .clk, .rst_n, .tx_start, .tx_data, .busy(tx_busy), .tx(rs422_tx)
  );

  assign addr_ok     = int'(addr_q) < WORDS;
  assign cfg_rd_addr = AW'(addr_q);
  assign tx_data     = reply_q[reply_idx[1:0]];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_SYNC;
      mode        <= MODE_IDLE;
      op_q        <= '0;
      addr_q      <= '0;
      dhi_q       <= '0;
      reply_idx   <= '0;
      tx_start    <= 1'b0;
      cfg_wr_en   <= 1'b0;
      cfg_wr_addr <= '0;
      cfg_wr_data <= '0;
      fram_reload <= 1'b0;
      fram_store  <= 1'b0;
      cmd_count   <= '0;
      for (int i = 0; i < 4; i++) reply_q[i] <= '0;
    end else begin
      tx_start    <= 1'b0;
      cfg_wr_en   <= 1'b0;
      fram_reload <= 1'b0;
      fram_store  <= 1'b0;
      unique case (state)
        S_SYNC: if (rx_valid && rx_data == SYNC) state <= S_OP;
        S_OP:   if (rx_valid) begin op_q   <= rx_data; state <= S_ADDR; end
        S_ADDR: if (rx_valid) begin addr_q <= rx_data; state <= S_DHI;  end
        S_DHI:  if (rx_valid) begin dhi_q  <= rx_data; state <= S_DLO;  end
        S_DLO:  if (rx_valid) begin
          reply_q[1] <= op_q;
          reply_q[2] <= dhi_q;
          reply_q[3] <= rx_data;
          reply_q[0] <= ACK;
          state      <= S_EXEC;
          unique case (op_q)
            OP_SET_MODE: mode <= mode_e'(rx_data[1:0]);
            OP_WRITE: begin
              if (addr_ok) begin
                cfg_wr_en   <= 1'b1;
                cfg_wr_addr <= AW'(addr_q);
                cfg_wr_data <= {dhi_q, rx_data};
              end else reply_q[0] <= NAK;
            end
            OP_READ:   if (!addr_ok) reply_q[0] <= NAK;
            OP_RELOAD: fram_reload <= 1'b1;
            OP_STORE:  fram_store  <= 1'b1;
            default:   reply_q[0] <= NAK;
          endcase
        end
        S_EXEC: begin
          // the read port is combinational: capture the word one clock after
          // any write of the previous state has landed
          if (op_q == OP_READ && addr_ok) begin
            reply_q[2] <= cfg_rd_data[15:8];
            reply_q[3] <= cfg_rd_data[7:0];
          end
          cmd_count <= cmd_count + 1'b1;
          reply_idx <= '0;
          state     <= S_REPLY;
        end
        default: begin
          if (!tx_busy && !tx_start) begin
            if (reply_idx == 3'd4) state <= S_SYNC;
            else tx_start <= 1'b1;
          end
          if (tx_start) reply_idx <= reply_idx + 1'b1;
        end
      endcase
      // a framing error aborts a command being received
      if (rx_err && state inside {S_OP, S_ADDR, S_DHI, S_DLO}) state <= S_SYNC;
    end
  end

endmodule
