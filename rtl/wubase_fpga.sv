// wubase_fpga -- the readout FPGA of one wuBase (one per PMT).
//
// Chains the three parts of the wuBase FPGA: wubase_hit_capture turns the
// dual-gain ADC stream into timestamped hit records and the trigger-alert
// pulse; wubase_page_buffer holds the records in two pages; and
// wubase_spi_readout lets the wuBase MCU read and release the pages, flush
// the filling page and set the discriminator threshold.
//
// clk is the 60 MHz sample clock of the ADC (on the board it is derived from
// the 20 MHz clock the fanout board distributes; that clock multiplier is not
// part of this RTL). One sample pair is taken on every clock. trigger_alert
// and sync_pulse are the wuBase ribbon-cable lines to and from the fanout.
// From the paper: ADC readout by the FPGA, two pages, SPI to the MCU, the
// per-hit signal to the fanout FPGA. The sizes and protocols are this
// design's own (see the three sub-blocks).
module wubase_fpga
  import gen2_pkg::*;
#(
  parameter int   REC_SAMPLES  = 32,
  parameter int   PRE_SAMPLES  = 4,
  parameter int   ALERT_CYCLES = 4,
  parameter int   PAGE_WORDS   = 1024,
  parameter adc_t THR_RESET    = 12'd400
) (
  input  logic      clk,
  input  logic      rst_n,
  input  adc_pair_t adc,
  input  logic      sync_pulse,
  output logic      trigger_alert,
  input  logic      spi_sclk,
  input  logic      spi_cs_n,
  input  logic      spi_mosi,
  output logic      spi_miso
);

  localparam int AW = $clog2(PAGE_WORDS);

  logic          rec_valid, rec_first, rec_last;
  word_t         rec_data;
  adc_t          threshold;
  logic          flush, release_page, page_ready, ready_page;
  logic [AW-1:0] rd_addr;
  logic [AW:0]   ready_count;
  logic [15:0]   drop_count;
  word_t         rd_data;

  wubase_hit_capture #(
    .REC_SAMPLES (REC_SAMPLES),
    .PRE_SAMPLES (PRE_SAMPLES),
    .ALERT_CYCLES(ALERT_CYCLES)
  ) u_capture (
    .clk, .rst_n, .adc, .threshold, .sync_pulse,
    .rec_valid, .rec_first, .rec_last, .rec_data, .trigger_alert
  );

  wubase_page_buffer #(
    .PAGE_WORDS(PAGE_WORDS),
    .REC_WORDS (REC_SAMPLES + 1)
  ) u_pages (
    .clk, .rst_n,
    .wr_valid(rec_valid), .wr_first(rec_first), .wr_last(rec_last), .wr_data(rec_data),
    .flush, .release_page, .rd_addr, .rd_data,
    .page_ready, .ready_page, .ready_count, .drop_count
  );

  wubase_spi_readout #(
    .PAGE_WORDS(PAGE_WORDS),
    .THR_RESET (THR_RESET)
  ) u_spi (
    .clk, .rst_n, .spi_sclk, .spi_cs_n, .spi_mosi, .spi_miso,
    .page_ready, .ready_page, .ready_count, .drop_count, .rd_data,
    .rd_addr, .release_page, .flush, .threshold
  );

endmodule
