// xray_readout_top -- FPGA readout system for an X-ray CMOS image sensor.
//
// Connects the sensor's pixel stream, the onboard X-ray event extraction, the
// triplicated configuration loaded from FRAM, the housekeeping ADC and the two
// host lines (RS-422 commands, SPI data) into one readout system with three
// operating modes, selected by command:
//   frame mode   every raw pixel goes out to the DDR3 frame store (ddr_wr_*);
//                rows read back from it (ddr_rd_*) are sent on the data line.
//   event mode   the extraction chain subtracts the previous frame, finds
//                X-ray events in 3x3 windows and sends one packet per event;
//                the DDR3 supply enable (ddr_pwr_en) is low in this mode.
//   housekeeping each completed ADC scan (temperatures, voltages, currents)
//                is sent as a housekeeping packet.
// After reset the configuration words are read from the FRAM into three
// copies with majority voting; word 0 is the event threshold, word 1 the split
// threshold (both in ADU, low 12 bits used), words 2..15 are sensor settings
// presented on sensor_cfg for the sensor board. A command writes the current
// voted words back to the FRAM; the store (about 1200 clocks) is over long
// before the next command can have arrived, so no write overlaps it.
//
// The DDR3 controller, the FRAM and ADC chips and the sensor itself are
// outside this module; their signals are ports. upset_* injects a bit flip into
// one configuration copy (test only; tie upset_en low). The block partition
// follows the paper's system diagram; one clock domain (clk, 100 MHz assumed)
// with the sensor pixels qualified by s_dval is this design's choice.
module xray_readout_top
  import readout_pkg::*;
#(
  parameter int unsigned COLS           = SENSOR_COLS,
  parameter int unsigned ROWS           = SENSOR_ROWS,
  parameter int unsigned CLKS_PER_BIT   = 868,
  parameter int unsigned FRAM_SCLK_HALF = 2,
  parameter int unsigned ADC_SCLK_HALF  = 3,
  parameter int unsigned ADC_CONV_GAP   = 100,
  parameter int unsigned SPI_SCLK_HALF  = 2,
  parameter int unsigned EV_DEPTH       = 64,
  localparam int unsigned AW  = $clog2(COLS*ROWS),
  localparam int unsigned CAW = $clog2(CFG_WORDS)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // image sensor
  input  logic                   s_fval,
  input  logic                   s_lval,
  input  logic                   s_dval,
  input  pixel_t                 s_data,
  output logic [15:0]            sensor_cfg [CFG_WORDS-CFG_SENSOR0],
  // FRAM (SPI)
  output logic                   fram_cs_n,
  output logic                   fram_sclk,
  output logic                   fram_mosi,
  input  logic                   fram_miso,
  // housekeeping ADC (SPI)
  output logic                   adc_cs_n,
  output logic                   adc_sclk,
  output logic                   adc_din,
  input  logic                   adc_dout,
  // DDR3 frame store (controller outside)
  output logic                   ddr_pwr_en,
  output logic                   ddr_wr_valid,
  output logic [AW-1:0]          ddr_wr_addr,
  output pixel_t                 ddr_wr_data,
  output logic                   ddr_wr_sof,
  input  logic                   ddr_rd_valid,
  output logic                   ddr_rd_ready,
  input  pixel_t                 ddr_rd_data,
  input  logic                   ddr_rd_sof,
  // host: RS-422 control line and SPI data line
  input  logic                   rs422_rx,
  output logic                   rs422_tx,
  output logic                   spi_cs_n,
  output logic                   spi_sclk,
  output logic                   spi_mosi,
  // status
  output mode_e                  mode,
  output logic                   cfg_loaded,
  output logic                   cfg_mismatch,
  output logic [FRAME_CNT_W-1:0] frame_cnt,
  output logic [15:0]            ev_sent,
  output logic [15:0]            ev_dropped,
  output logic [15:0]            hk_sent,
  output logic [15:0]            rows_sent,
  output logic [15:0]            cmd_count,
  // single-event-upset injection (test)
  input  logic                   upset_en,
  input  logic [1:0]             upset_copy,
  input  logic [CAW-1:0]         upset_addr,
  input  logic [15:0]            upset_mask
);

  localparam int unsigned XW = $clog2(COLS);
  localparam int unsigned YW = $clog2(ROWS);

  // ---------------------------------------------------------------- receiver
  logic          px_valid, px_sof, px_eof, frame_done;
  pixel_t        px_data;
  logic [XW-1:0] px_x;
  logic [YW-1:0] px_y;
  logic [AW-1:0] px_addr;

  pixel_receiver #(.COLS(COLS), .ROWS(ROWS)) u_rx (
    .clk, .rst_n, .s_fval, .s_lval, .s_dval, .s_data,
    .px_valid, .px_data, .px_x, .px_y, .px_addr, .px_sof, .px_eof,
    .frame_cnt, .frame_done
  );

  // ------------------------------------------------------- configuration
  logic           boot_q, fram_load, fram_busy, fram_done, fram_reload, fram_store;
  logic           fram_wr_en, cmd_wr_en, cfg_wr_en;
  logic [CAW-1:0] fram_wr_addr, cmd_wr_addr, cmd_rd_addr, cfg_wr_addr;
  logic [15:0]    fram_wr_data, cmd_wr_data, cfg_wr_data, cfg_rd_data;
  logic [15:0]    cfg [CFG_WORDS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      boot_q     <= 1'b1;
      cfg_loaded <= 1'b0;
    end else begin
      boot_q <= 1'b0;
      if (fram_done) cfg_loaded <= 1'b1;
    end
  end
  assign fram_load = boot_q || fram_reload;

  fram_interface #(.WORDS(CFG_WORDS), .SCLK_HALF(FRAM_SCLK_HALF)) u_fram (
    .clk, .rst_n, .load(fram_load), .store(fram_store), .cfg_in(cfg),
    .busy(fram_busy), .done(fram_done),
    .cfg_wr_en(fram_wr_en), .cfg_wr_addr(fram_wr_addr), .cfg_wr_data(fram_wr_data),
    .fram_cs_n, .fram_sclk, .fram_mosi, .fram_miso
  );

  // FRAM loading takes precedence over a command write in the same clock
  assign cfg_wr_en   = fram_wr_en || cmd_wr_en;
  assign cfg_wr_addr = fram_wr_en ? fram_wr_addr : cmd_wr_addr;
  assign cfg_wr_data = fram_wr_en ? fram_wr_data : cmd_wr_data;

  tmr_config #(.WORDS(CFG_WORDS), .WIDTH(16)) u_cfg (
    .clk, .rst_n,
    .wr_en(cfg_wr_en), .wr_addr(cfg_wr_addr), .wr_data(cfg_wr_data),
    .rd_addr(cmd_rd_addr), .rd_data(cfg_rd_data),
    .cfg, .mismatch(cfg_mismatch),
    .upset_en, .upset_copy, .upset_addr, .upset_mask
  );

  for (genvar i = 0; i < CFG_WORDS - CFG_SENSOR0; i++) begin : g_sensor_cfg
    assign sensor_cfg[i] = cfg[CFG_SENSOR0 + i];
  end

  // ------------------------------------------------------ control line
  cmd_processor #(.CLKS_PER_BIT(CLKS_PER_BIT), .WORDS(CFG_WORDS)) u_cmd (
    .clk, .rst_n, .rs422_rx, .rs422_tx, .mode,
    .cfg_wr_en(cmd_wr_en), .cfg_wr_addr(cmd_wr_addr), .cfg_wr_data(cmd_wr_data),
    .cfg_rd_addr(cmd_rd_addr), .cfg_rd_data,
    .fram_reload, .fram_store, .cmd_count
  );

  // ---------------------------------------------------- event extraction
  logic   ev_valid, primed;
  event_t ev;

  event_extraction #(.COLS(COLS), .ROWS(ROWS)) u_evx (
    .clk, .rst_n,
    .en(mode == MODE_EVENT),
    .event_th(cfg[CFG_EVENT_TH][PIX_W-1:0]),
    .split_th(cfg[CFG_SPLIT_TH][PIX_W-1:0]),
    .frame(frame_cnt),
    .px_valid, .px_data, .px_x, .px_y, .px_addr, .px_sof, .px_eof,
    .primed, .ev_valid, .ev
  );

  // ------------------------------------------------ frame mode: DDR3 store
  assign ddr_pwr_en   = (mode == MODE_FRAME);
  assign ddr_wr_valid = px_valid && (mode == MODE_FRAME);
  assign ddr_wr_addr  = px_addr;
  assign ddr_wr_data  = px_data;
  assign ddr_wr_sof   = px_sof;

  // ------------------------------------------------------- housekeeping
  logic [11:0] hk_data [8];
  logic [7:0]  hk_valid;
  logic        scan_done;
  logic [15:0] hk_status;

  adc_interface #(.SCLK_HALF(ADC_SCLK_HALF), .CONV_GAP(ADC_CONV_GAP), .NCH(8)) u_adc (
    .clk, .rst_n, .en(1'b1),
    .adc_cs_n, .adc_sclk, .adc_din, .adc_dout,
    .ch_data(hk_data), .ch_valid(hk_valid), .scan_done
  );

  assign hk_status = {cfg_mismatch, cfg_loaded, fram_busy, primed, 2'(mode),
                      2'b00, hk_valid};

  // ---------------------------------------------------------- data line
  data_link #(.COLS(COLS), .EV_DEPTH(EV_DEPTH), .SCLK_HALF(SPI_SCLK_HALF)) u_link (
    .clk, .rst_n, .mode,
    .ev_valid, .ev,
    .hk_trigger(scan_done && mode == MODE_HK), .hk_data, .hk_status,
    .fr_valid(ddr_rd_valid), .fr_ready(ddr_rd_ready), .fr_data(ddr_rd_data),
    .fr_sof(ddr_rd_sof),
    .spi_cs_n, .spi_sclk, .spi_mosi,
    .ev_sent, .ev_dropped, .hk_sent, .rows_sent
  );

endmodule
