// fram_interface -- loads the configuration words from the SPI FRAM and
// stores them back.
//
// On a load pulse (issued after reset and on a reload command) it reads WORDS
// 16-bit words, most significant byte first, starting at byte address
// BASE_ADDR of the FRAM, and writes them one by one into the triplicated
// configuration store (cfg_wr_*). The access is one SPI READ transaction:
// chip select low, opcode 0x03, a 24-bit address, then 16*WORDS data bits.
//
// On a store pulse it writes the current (voted) words cfg_in back to the
// same place, so that updated settings survive a power cycle: a WREN
// transaction (opcode 0x06, 8 bits), chip select high for 2*SCLK_HALF clocks,
// then one WRITE transaction (opcode 0x02, 24-bit address, 16*WORDS bits).
// cfg_in is sampled bit by bit as it is shifted out; it must not change
// while busy is high. A load or store pulse while busy is ignored.
//
// SPI mode 0: fram_sclk idles low, fram_mosi changes after falling edges,
// fram_miso is sampled on rising edges. fram_sclk runs at clk/(2*SCLK_HALF).
// busy is high from load/store until the transfer is over; done pulses then.
// A load takes about (32 + 16*WORDS) * 2*SCLK_HALF + 4 clocks, a store about
// (40 + 16*WORDS) * 2*SCLK_HALF + 8.
//
// The paper says the FRAM (256 KB) holds the sensor settings and thresholds,
// that they are read into the FPGA and that they are rarely rewritten; the
// SPI protocol, opcodes and word layout are this design's choices (the usual
// serial-FRAM READ, WREN and WRITE commands).
module fram_interface
  import readout_pkg::*;
#(
  parameter int unsigned WORDS     = CFG_WORDS,
  parameter int unsigned SCLK_HALF = 2,
  parameter logic [23:0] BASE_ADDR = 24'h000000,
  localparam int unsigned AW = $clog2(WORDS)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          load,
  input  logic          store,
  input  logic [15:0]   cfg_in [WORDS],
  output logic          busy,
  output logic          done,
  output logic          cfg_wr_en,
  output logic [AW-1:0] cfg_wr_addr,
  output logic [15:0]   cfg_wr_data,
  output logic          fram_cs_n,
  output logic          fram_sclk,
  output logic          fram_mosi,
  input  logic          fram_miso
);

  localparam int unsigned TOTAL = 32 + 16 * WORDS;
  localparam int unsigned BW    = $clog2(TOTAL + 1);
  localparam int unsigned HW    = $clog2(SCLK_HALF + 1);

  typedef enum logic [2:0] {S_IDLE, S_XFER, S_END, S_GAP} state_e;
  typedef enum logic [1:0] {OP_READ, OP_WREN, OP_WRITE} op_e;

  state_e        state;
  op_e           op;
  logic [HW-1:0] half_cnt;
  logic [BW-1:0] bit_cnt;     // rising edges done
  logic [BW-1:0] xfer_len;    // bits in the current transaction
  logic [31:0]   cmd;         // opcode and address of the current transaction
  logic [14:0]   rx_sr;

  assign busy = (state != S_IDLE);

  // bit number i of the current transaction, as driven on fram_mosi
  function automatic logic out_bit(input logic [BW-1:0] i, input op_e o,
                                   input logic [31:0] c, input logic [15:0] w [WORDS]);
    logic [BW-1:0] d;
    if (i < BW'(32)) return c[31 - 5'(i)];
    d = i - BW'(32);
    if (o == OP_WRITE) return w[AW'(d >> 4)][4'd15 - 4'(d)];
    return 1'b0;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      op          <= OP_READ;
      half_cnt    <= '0;
      bit_cnt     <= '0;
      xfer_len    <= '0;
      cmd         <= '0;
      rx_sr       <= '0;
      fram_cs_n   <= 1'b1;
      fram_sclk   <= 1'b0;
      fram_mosi   <= 1'b0;
      done        <= 1'b0;
      cfg_wr_en   <= 1'b0;
      cfg_wr_addr <= '0;
      cfg_wr_data <= '0;
    end else begin
      done      <= 1'b0;
      cfg_wr_en <= 1'b0;
      unique case (state)
        S_IDLE: begin
          bit_cnt  <= '0;
          half_cnt <= '0;
          if (load) begin
            state     <= S_XFER;
            op        <= OP_READ;
            fram_cs_n <= 1'b0;
            cmd       <= {8'h03, BASE_ADDR};
            fram_mosi <= 1'b0;             // first bit of 0x03
            xfer_len  <= BW'(TOTAL);
          end else if (store) begin
            state     <= S_XFER;
            op        <= OP_WREN;
            fram_cs_n <= 1'b0;
            cmd       <= {8'h06, 24'h000000};
            fram_mosi <= 1'b0;             // first bit of 0x06
            xfer_len  <= BW'(8);
          end
        end
        S_XFER: begin
          if (half_cnt == HW'(SCLK_HALF - 1)) begin
            half_cnt <= '0;
            if (!fram_sclk) begin
              // rising edge: sample
              fram_sclk <= 1'b1;
              bit_cnt   <= bit_cnt + 1'b1;
              if (op == OP_READ && bit_cnt >= BW'(32)) begin
                rx_sr <= {rx_sr[13:0], fram_miso};
                if (bit_cnt[3:0] == 4'hF) begin
                  cfg_wr_en   <= 1'b1;
                  cfg_wr_addr <= AW'((bit_cnt - BW'(32)) >> 4);
                  cfg_wr_data <= {rx_sr[14:0], fram_miso};
                end
              end
            end else begin
              // falling edge: next output bit, or finish
              fram_sclk <= 1'b0;
              if (bit_cnt == xfer_len) state <= S_END;
              else fram_mosi <= out_bit(bit_cnt, op, cmd, cfg_in);
            end
          end else begin
            half_cnt <= half_cnt + 1'b1;
          end
        end
        S_END: begin
          fram_cs_n <= 1'b1;
          fram_mosi <= 1'b0;
          half_cnt  <= '0;
          bit_cnt   <= '0;
          if (op == OP_WREN) state <= S_GAP;
          else begin
            done  <= 1'b1;
            state <= S_IDLE;
          end
        end
        default: begin
          // chip select high for 2*SCLK_HALF clocks between WREN and WRITE;
          // bit_cnt counts the gap
          if (bit_cnt == BW'(2 * SCLK_HALF - 1)) begin
            state     <= S_XFER;
            op        <= OP_WRITE;
            fram_cs_n <= 1'b0;
            cmd       <= {8'h02, BASE_ADDR};
            fram_mosi <= 1'b0;             // first bit of 0x02
            xfer_len  <= BW'(TOTAL);
            bit_cnt   <= '0;
          end else begin
            bit_cnt <= bit_cnt + 1'b1;
          end
        end
      endcase
    end
  end

endmodule
