// gen2_dom -- digital logic of the IceCube-Gen2 optical module prototype.
//
// The module holds N_PMT photomultipliers, each on its own wuBase board.
// Every wuBase FPGA (wubase_fpga) digitises its PMT at 60 MSps in two gain
// channels, cuts timestamped hit records, buffers them in two pages for the
// wuBase MCU and raises a trigger-alert line per hit. The PMTs are split
// over two hemispheres, each served by a fanout board: fanout A carries the
// first N_A wuBases, fanout B the rest. Each fanout board multiplexes the
// UART link of the mini-mainboard (MMB) onto one of its wuBases (uart_mux).
// All trigger-alert lines, of both hemispheres, go to the coincidence FPGA on
// fanout A (multi_pmt_coinc), whose flag goes to the MMB.
//
// Not part of this RTL and therefore brought out as ports: the PMTs and
// their ADCs (adc), the wuBase MCUs (their SPI and UART pins), the MMB (host
// UART lines, UART selects, coincidence outputs), the 20 MHz clock and sync
// distribution (clk here is the 60 MHz sample clock shared by all FPGAs,
// sync_pulse the common timestamp sync), the hitspool cards and the LED
// flashers.
// From the paper: this partition and the connections of its dataflow
// diagram. This design's choices: one common clock for all FPGAs, a
// default split of 9 + 9 wuBases per hemisphere.
module gen2_dom
  import gen2_pkg::*;
#(
  parameter int   N_PMT        = N_PMT_18,
  parameter int   N_A          = 9,          // wuBases on fanout A
  parameter int   REC_SAMPLES  = 32,
  parameter int   PRE_SAMPLES  = 4,
  parameter int   ALERT_CYCLES = 4,
  parameter int   PAGE_WORDS   = 1024,
  parameter adc_t THR_RESET    = 12'd400,
  parameter int   WINDOW       = 6,
  parameter int   MULT         = 2,
  localparam int  N_B          = N_PMT - N_A,
  localparam int  SWA          = $clog2(N_A + 1),
  localparam int  SWB          = $clog2(N_B + 1)
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        sync_pulse,
  // PMT digitiser samples, one pair per wuBase
  input  adc_pair_t [N_PMT-1:0]       adc,
  // wuBase MCU pins: SPI to its FPGA, UART to its fanout
  input  logic      [N_PMT-1:0]       spi_sclk,
  input  logic      [N_PMT-1:0]       spi_cs_n,
  input  logic      [N_PMT-1:0]       spi_mosi,
  output logic      [N_PMT-1:0]       spi_miso,
  input  logic      [N_PMT-1:0]       mcu_uart_tx,
  output logic      [N_PMT-1:0]       mcu_uart_rx,
  // mini-mainboard side of fanout A and fanout B
  input  logic      [SWA-1:0]         uart_sel_a,
  input  logic      [SWB-1:0]         uart_sel_b,
  output logic      [SWA-1:0]         uart_sel_active_a,
  output logic      [SWB-1:0]         uart_sel_active_b,
  input  logic                        mmb_tx_a,
  output logic                        mmb_rx_a,
  input  logic                        mmb_tx_b,
  output logic                        mmb_rx_b,
  output logic                        coinc,
  output logic      [N_PMT-1:0]       coinc_mask,
  output logic      [31:0]            coinc_count,
  output logic      [N_PMT-1:0]       trigger_alert   // per-PMT alert lines
);

  for (genvar i = 0; i < N_PMT; i++) begin : g_base
    wubase_fpga #(
      .REC_SAMPLES (REC_SAMPLES),
      .PRE_SAMPLES (PRE_SAMPLES),
      .ALERT_CYCLES(ALERT_CYCLES),
      .PAGE_WORDS  (PAGE_WORDS),
      .THR_RESET   (THR_RESET)
    ) u_base (
      .clk, .rst_n,
      .adc          (adc[i]),
      .sync_pulse,
      .trigger_alert(trigger_alert[i]),
      .spi_sclk     (spi_sclk[i]),
      .spi_cs_n     (spi_cs_n[i]),
      .spi_mosi     (spi_mosi[i]),
      .spi_miso     (spi_miso[i])
    );
  end

  uart_mux #(.N_PORTS(N_A)) u_fanout_a_uart (
    .clk, .rst_n,
    .sel       (uart_sel_a),
    .sel_active(uart_sel_active_a),
    .host_tx   (mmb_tx_a),
    .host_rx   (mmb_rx_a),
    .base_rx   (mcu_uart_rx[N_A-1:0]),
    .base_tx   (mcu_uart_tx[N_A-1:0])
  );

  uart_mux #(.N_PORTS(N_B)) u_fanout_b_uart (
    .clk, .rst_n,
    .sel       (uart_sel_b),
    .sel_active(uart_sel_active_b),
    .host_tx   (mmb_tx_b),
    .host_rx   (mmb_rx_b),
    .base_rx   (mcu_uart_rx[N_PMT-1:N_A]),
    .base_tx   (mcu_uart_tx[N_PMT-1:N_A])
  );

  multi_pmt_coinc #(
    .N_PMT (N_PMT),
    .WINDOW(WINDOW),
    .MULT  (MULT)
  ) u_coinc (
    .clk, .rst_n,
    .alert      (trigger_alert),
    .coinc,
    .coinc_mask,
    .coinc_count
  );

endmodule
