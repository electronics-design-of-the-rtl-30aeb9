// gen2_pkg -- types and constants shared by the Gen2 DOM prototype logic.
//
// Each PMT base (wuBase) digitises its PMT with a dual 12-bit ADC, one
// high-gain and one low-gain channel, at 60 MSps. The wuBase FPGA packs hits
// into 32-bit words that the base's microcontroller reads over SPI:
//   header word : {1'b1, timestamp[30:0]}     timestamp in 60 MHz sample ticks
//   sample word : {8'h00, hg[11:0], lg[11:0]}
// A record is one header followed by a fixed number of sample words.
// The 12-bit width and the two gain channels follow the paper; the word
// layout and the SPI command codes are this design's own choices.
package gen2_pkg;

  localparam int ADC_BITS = 12;       // ADC resolution
  localparam int N_PMT_18 = 18;       // PMTs in the 18-PMT variant (a 16-PMT variant also exists)
  localparam int WORD_W   = 32;       // hit-record word width
  localparam int TS_W     = 31;       // timestamp bits in a header word

  typedef logic [ADC_BITS-1:0] adc_t;
  typedef logic [WORD_W-1:0]   word_t;

  // One sample instant of both gain channels.
  typedef struct packed {
    adc_t hg;   // high-gain channel
    adc_t lg;   // low-gain channel
  } adc_pair_t;

  // Commands the wuBase MCU sends as the first SPI byte of a transfer.
  typedef enum logic [7:0] {
    CMD_NOP     = 8'h00,
    CMD_STATUS  = 8'h01,  // returns one 32-bit status word
    CMD_READ    = 8'h02,  // streams the ready page, word 0 first
    CMD_RELEASE = 8'h03,  // frees the ready page
    CMD_FLUSH   = 8'h04,  // closes the filling page if it holds data
    CMD_SET_THR = 8'h05   // two following bytes: threshold, big endian
  } spi_cmd_e;

  function automatic word_t hdr_word(logic [TS_W-1:0] ts);
    return {1'b1, ts};
  endfunction

  function automatic word_t smp_word(adc_pair_t s);
    return {8'h00, s};
  endfunction

endpackage
