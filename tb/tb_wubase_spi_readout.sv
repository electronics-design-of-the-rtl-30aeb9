// tb_wubase_spi_readout -- self-checking test of the wuBase SPI slave.
//
// A mode-0 SPI master running at the fastest allowed rate (SCLK = clk/8)
// sends every command. A small memory here stands in for the page buffer
// (one-clock read latency, like the real one). Checked: the status word
// bytes, the page words streamed in order, one release and one flush pulse
// per command and none otherwise, the threshold write, the reset threshold,
// and that an unknown command does nothing.
module tb_wubase_spi_readout;
  import gen2_pkg::*;

  localparam int PW = 64, AW = 6;
  localparam adc_t THR0 = 12'd400;

  logic clk = 0, rst_n = 0;
  logic spi_sclk = 0, spi_cs_n = 1, spi_mosi = 0, spi_miso;
  logic page_ready = 1, ready_page = 1;
  logic [AW:0] ready_count = 7'd45;
  logic [15:0] drop_count = 16'h1234;
  word_t rd_data;
  logic [AW-1:0] rd_addr;
  logic release_page, flush;
  adc_t threshold;

  wubase_spi_readout #(.PAGE_WORDS(PW), .THR_RESET(THR0)) dut (.*);

  always #5 clk = ~clk;

  word_t mem [PW];
  always @(posedge clk) rd_data <= mem[rd_addr];

  int checks = 0, failures = 0, n_release = 0, n_flush = 0;
  always @(posedge clk) begin
    if (rst_n && release_page) n_release++;
    if (rst_n && flush) n_flush++;
  end

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  localparam time HALF = 40ns;   // SCLK = clk / 8

  task automatic xfer_byte(input logic [7:0] tx, output logic [7:0] rx);
    for (int b = 7; b >= 0; b--) begin
      spi_mosi = tx[b];
      #HALF spi_sclk = 1; rx[b] = spi_miso;
      #HALF spi_sclk = 0;
    end
  endtask

  task automatic cs_low();  spi_cs_n = 0; #HALF; endtask
  task automatic cs_high(); #HALF spi_cs_n = 1; #(4*HALF); endtask

  task automatic command(logic [7:0] cmd);
    logic [7:0] r;
    cs_low(); xfer_byte(cmd, r); cs_high();
  endtask

  initial begin
    logic [7:0] r;
    word_t w;
    for (int i = 0; i < PW; i++) mem[i] = $urandom;
    #25 rst_n = 1;
    #100;
    check("threshold reset value", threshold === THR0);

    // status
    cs_low(); xfer_byte(CMD_STATUS, r);
    check("MISO low during command byte", r === 8'h00);
    for (int i = 0; i < 4; i++) begin xfer_byte(8'h00, r); w = {w[23:0], r}; end
    cs_high();
    check($sformatf("status word %h", w), w === {1'b1, 1'b1, 14'd45, 16'h1234});

    // page read, 20 words
    cs_low(); xfer_byte(CMD_READ, r);
    for (int a = 0; a < 20; a++) begin
      for (int i = 0; i < 4; i++) begin xfer_byte(8'h00, r); w = {w[23:0], r}; end
      check($sformatf("page word %0d: %h, expected %h", a, w, mem[a]), w === mem[a]);
    end
    cs_high();
    check("no pulses yet", n_release == 0 && n_flush == 0);

    command(CMD_RELEASE);
    check("one release pulse", n_release == 1 && n_flush == 0);
    command(CMD_FLUSH);
    check("one flush pulse", n_release == 1 && n_flush == 1);
    command(8'h7E);
    check("unknown command ignored", n_release == 1 && n_flush == 1);

    // threshold write
    cs_low(); xfer_byte(CMD_SET_THR, r); xfer_byte(8'h0A, r); xfer_byte(8'hBC, r); cs_high();
    check($sformatf("threshold %h", threshold), threshold === 12'hABC);

    // a read restarts at word 0
    cs_low(); xfer_byte(CMD_READ, r);
    for (int i = 0; i < 4; i++) begin xfer_byte(8'h00, r); w = {w[23:0], r}; end
    cs_high();
    check("second read starts at word 0", w === mem[0]);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
