// data_link -- packet formation and SPI transmission on the data line.
//
// Everything the readout sends to the bus leaves through one SPI data line as
// 16-bit words grouped in packets. Each packet starts with {0xA5, type}:
//   event (type 0x01, 6 words): header, frame number, {5'b0, x},
//          {multi, 4'b0, y}, energy, {8'b0, split pattern}
//   housekeeping (0x03, 10 words): header, 8 ADC words
//          {1'b0, channel[2:0], value[11:0]}, status word
//   frame (0x02, COLS+2 words): header, row number, then the COLS raw pixels
//          of one row as {4'b0, pixel}
// Events are queued in a FIFO of EV_DEPTH records as they come out of the
// extraction pipeline, which cannot be stalled; an event that finds the FIFO
// full is dropped and counted in ev_dropped. A housekeeping trigger (used in
// housekeeping mode) snapshots the ADC values and status and queues one packet.
// Frame-mode pixels come from the frame store (the DDR3 buffer) through a
// valid/ready stream, fr_sof marking the first pixel of a frame; they are
// pulled only as fast as the line sends them. Queued events go first, then a
// pending housekeeping packet, then, in frame mode, the next image row.
//
// The three kinds of data and the SPI data line follow the paper (Sec. 2);
// packet layouts, priorities and queue size are this design's choices.
module data_link
  import readout_pkg::*;
#(
  parameter int unsigned COLS      = SENSOR_COLS,
  parameter int unsigned EV_DEPTH  = 64,
  parameter int unsigned SCLK_HALF = 2
) (
  input  logic         clk,
  input  logic         rst_n,
  input  mode_e        mode,
  // events
  input  logic         ev_valid,
  input  event_t       ev,
  // housekeeping
  input  logic         hk_trigger,
  input  logic [11:0]  hk_data [8],
  input  logic [15:0]  hk_status,
  // frame-mode pixels read back from the frame store
  input  logic         fr_valid,
  output logic         fr_ready,
  input  pixel_t       fr_data,
  input  logic         fr_sof,
  // SPI data line
  output logic         spi_cs_n,
  output logic         spi_sclk,
  output logic         spi_mosi,
  // statistics
  output logic [15:0]  ev_sent,
  output logic [15:0]  ev_dropped,
  output logic [15:0]  hk_sent,
  output logic [15:0]  rows_sent
);

  localparam int unsigned EVW = $bits(event_t);
  localparam int unsigned IW  = $clog2(COLS + 3);

  typedef enum logic [1:0] {P_IDLE, P_EVENT, P_HK, P_FRAME} pkt_e;

  pkt_e          state;
  logic [IW-1:0] idx;
  logic          w_valid, w_ready, w_take;
  logic [15:0]   w_data;
  logic          evq_empty, evq_full, evq_pop;
  logic [EVW-1:0] evq_raw;
  event_t        evh;
  logic          hk_pending;
  logic [11:0]   hk_q [8];
  logic [15:0]   hk_status_q;
  logic [15:0]   row_q;

  sync_fifo #(.WIDTH(EVW), .DEPTH(EV_DEPTH)) u_evq (
    .clk, .rst_n,
    .wr_en(ev_valid), .wr_data(ev),
    .rd_en(evq_pop), .rd_data(evq_raw),
    .full(evq_full), .empty(evq_empty), .count()
  );
  assign evh = event_t'(evq_raw);

  spi_word_tx #(.SCLK_HALF(SCLK_HALF)) u_spi (
    .clk, .rst_n,
    .in_valid(w_valid), .in_ready(w_ready), .in_data(w_data),
    .spi_cs_n, .spi_sclk, .spi_mosi
  );

  assign w_take = w_valid && w_ready;

  // word on offer in the current packet
  always_comb begin
    w_valid  = 1'b0;
    w_data   = '0;
    fr_ready = 1'b0;
    unique case (state)
      P_EVENT: begin
        w_valid = 1'b1;
        unique case (idx)
          IW'(0):  w_data = {PKT_SYNC, PKT_EVENT};
          IW'(1):  w_data = 16'(evh.frame);
          IW'(2):  w_data = 16'(evh.x);
          IW'(3):  w_data = {evh.multi, 4'b0, evh.y};
          IW'(4):  w_data = evh.energy;
          default: w_data = {8'h00, evh.pattern};
        endcase
      end
      P_HK: begin
        w_valid = 1'b1;
        if (idx == IW'(0))      w_data = {PKT_SYNC, PKT_HK};
        else if (idx == IW'(9)) w_data = hk_status_q;
        else                    w_data = {1'b0, 3'(idx - 1'b1), hk_q[3'(idx - 1'b1)]};
      end
      P_FRAME: begin
        if (idx == IW'(0)) begin
          w_valid = 1'b1;
          w_data  = {PKT_SYNC, PKT_FRAME};
        end else if (idx == IW'(1)) begin
          w_valid = 1'b1;
          w_data  = row_q;
        end else begin
          w_valid  = fr_valid;
          w_data   = {4'b0, fr_data};
          fr_ready = w_ready;
        end
      end
      default: ;
    endcase
  end

  assign evq_pop = (state == P_EVENT) && w_take && (idx == IW'(5));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= P_IDLE;
      idx         <= '0;
      hk_pending  <= 1'b0;
      hk_status_q <= '0;
      row_q       <= '1;
      ev_sent     <= '0;
      ev_dropped  <= '0;
      hk_sent     <= '0;
      rows_sent   <= '0;
      for (int i = 0; i < 8; i++) hk_q[i] <= '0;
    end else begin
      if (ev_valid && evq_full) ev_dropped <= ev_dropped + 1'b1;
      if (hk_trigger && !(state == P_HK)) begin
        hk_pending  <= 1'b1;
        hk_status_q <= hk_status;
        for (int i = 0; i < 8; i++) hk_q[i] <= hk_data[i];
      end
      unique case (state)
        P_IDLE: begin
          idx <= '0;
          if (!evq_empty) state <= P_EVENT;
          else if (hk_pending) begin
            state      <= P_HK;
            hk_pending <= 1'b0;
          end else if (mode == MODE_FRAME && fr_valid) begin
            state <= P_FRAME;
            row_q <= fr_sof ? 16'd0 : row_q + 1'b1;
          end
        end
        P_EVENT: if (w_take) begin
          idx <= idx + 1'b1;
          if (idx == IW'(5)) begin
            state   <= P_IDLE;
            ev_sent <= ev_sent + 1'b1;
          end
        end
        P_HK: if (w_take) begin
          idx <= idx + 1'b1;
          if (idx == IW'(9)) begin
            state   <= P_IDLE;
            hk_sent <= hk_sent + 1'b1;
          end
        end
        default: if (w_take) begin
          idx <= idx + 1'b1;
          if (idx == IW'(COLS + 1)) begin
            state     <= P_IDLE;
            rows_sent <= rows_sent + 1'b1;
          end
        end
      endcase
    end
  end

endmodule
