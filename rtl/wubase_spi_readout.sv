// wubase_spi_readout -- SPI slave through which the wuBase MCU talks to the FPGA.
//
// SPI mode 0 (clock idle low, data sampled on the rising SCLK edge, changed
// on the falling edge), MSB first, 8-bit bytes. SCLK, CS_N and MOSI are
// brought into the FPGA clock domain with two-flop synchronisers and their
// edges are detected there, so SCLK must be at most clk/8 (7.5 MHz at a
// 60 MHz FPGA clock). The first byte of each CS_N-low transfer is a command
// (gen2_pkg::spi_cmd_e); MISO is 0 while it is shifted in.
//   CMD_STATUS  : the next 4 bytes return the status word
//                 {page_ready, ready_page, ready_count[13:0], drop_count[15:0]}
//   CMD_READ    : from the next byte on, the ready page is returned word by
//                 word, 4 bytes per word, most significant byte first, for as
//                 long as CS_N stays low (the MCU reads ready_count words)
//   CMD_RELEASE : frees the ready page (one-clock pulse on release_page)
//   CMD_FLUSH   : closes the filling page (one-clock pulse on flush)
//   CMD_SET_THR : the next 2 bytes, big endian, set the 12-bit threshold
// The threshold register resets to THR_RESET.
//
// From the paper: the MCU (STM32L5) retrieves the buffered pages over SPI.
// This design's choices: the SPI mode, the command set and the byte layout.
module wubase_spi_readout
  import gen2_pkg::*;
#(
  parameter int   PAGE_WORDS = 1024,
  parameter adc_t THR_RESET  = 12'd400
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // SPI pins
  input  logic                          spi_sclk,
  input  logic                          spi_cs_n,
  input  logic                          spi_mosi,
  output logic                          spi_miso,
  // page buffer
  input  logic                          page_ready,
  input  logic                          ready_page,
  input  logic [$clog2(PAGE_WORDS):0]   ready_count,
  input  logic [15:0]                   drop_count,
  input  word_t                         rd_data,
  output logic [$clog2(PAGE_WORDS)-1:0] rd_addr,
  output logic                          release_page,
  output logic                          flush,
  // configuration
  output adc_t                          threshold
);

  logic [2:0] sclk_s, cs_s;           // [0],[1] synchroniser, [2] previous
  logic [1:0] mosi_s;                 // synchroniser
  logic       sclk_rise, sclk_fall, cs_act, cs_start;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sclk_s <= '0;
      cs_s   <= '1;
      mosi_s <= '0;
    end else begin
      sclk_s <= {sclk_s[1:0], spi_sclk};
      cs_s   <= {cs_s[1:0], spi_cs_n};
      mosi_s <= {mosi_s[0], spi_mosi};
    end
  end
  assign cs_act    = !cs_s[1];
  assign cs_start  = !cs_s[1] && cs_s[2];
  assign sclk_rise = cs_act &&  sclk_s[1] && !sclk_s[2];
  assign sclk_fall = cs_act && !sclk_s[1] &&  sclk_s[2];

  typedef enum logic [2:0] {S_CMD, S_STATUS, S_READ, S_THR_HI, S_THR_LO, S_IDLE} state_e;

  state_e     state;
  logic [2:0] bit_cnt;
  logic [6:0] rx_sh;                 // bits of the byte received so far
  logic [7:0] tx_sh;
  logic [1:0] byte_idx;              // byte within the 32-bit word sent
  logic       byte_done;             // a whole byte has been shifted in
  word_t      status_w;
  logic [3:0] thr_hi;

  assign status_w = {page_ready, ready_page, 14'(ready_count), drop_count};

  logic [7:0] rx;                    // byte completed by this rising edge
  logic [7:0] nb;                    // next byte to send
  assign rx = {rx_sh, mosi_s[1]};
  always_comb begin
    case (state)
      S_STATUS: nb = status_w[8*(3-int'(byte_idx)) +: 8];
      S_READ:   nb = rd_data[8*(3-int'(byte_idx)) +: 8];
      default:  nb = '0;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= S_CMD;
      bit_cnt      <= '0;
      rx_sh        <= '0;
      tx_sh        <= '0;
      byte_idx     <= '0;
      byte_done    <= 1'b0;
      rd_addr      <= '0;
      release_page <= 1'b0;
      flush        <= 1'b0;
      threshold    <= THR_RESET;
      thr_hi       <= '0;
      spi_miso     <= 1'b0;
    end else begin
      release_page <= 1'b0;
      flush        <= 1'b0;
      if (!cs_act) begin
        state     <= S_CMD;
        bit_cnt   <= '0;
        byte_done <= 1'b0;
        spi_miso  <= 1'b0;
      end else begin
        if (cs_start) begin
          state     <= S_CMD;
          bit_cnt   <= '0;
          byte_done <= 1'b0;
          spi_miso  <= 1'b0;
          tx_sh     <= '0;
        end else if (sclk_rise) begin
          rx_sh    <= rx[6:0];
          bit_cnt  <= bit_cnt + 1'b1;
          byte_done <= (bit_cnt == 3'd7);
          if (bit_cnt == 3'd7) begin
            unique case (state)
              S_CMD: begin
                byte_idx <= '0;
                rd_addr  <= '0;
                case (rx)
                  CMD_STATUS:  state <= S_STATUS;
                  CMD_READ:    state <= S_READ;
                  CMD_SET_THR: state <= S_THR_HI;
                  CMD_RELEASE: begin release_page <= 1'b1; state <= S_IDLE; end
                  CMD_FLUSH:   begin flush        <= 1'b1; state <= S_IDLE; end
                  default:     state <= S_IDLE;
                endcase
              end
              S_THR_HI: begin thr_hi <= rx[3:0]; state <= S_THR_LO; end
              S_THR_LO: begin threshold <= {thr_hi, rx}; state <= S_IDLE; end
              default: ;
            endcase
          end
        end else if (sclk_fall) begin
          if (byte_done) begin
            // first bit of the next byte
            byte_done <= 1'b0;
            byte_idx <= byte_idx + 1'b1;
            if (state == S_READ && byte_idx == 2'd3) rd_addr <= rd_addr + 1'b1;
            tx_sh    <= {nb[6:0], 1'b0};
            spi_miso <= nb[7];
          end else begin
            spi_miso <= tx_sh[7];
            tx_sh    <= {tx_sh[6:0], 1'b0};
          end
        end
      end
    end
  end

endmodule
