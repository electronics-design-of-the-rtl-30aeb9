// tb_wubase_sustained_readout -- a wuBase under continuous hit load, read out
// by its MCU as it would be in operation.
//
// Full-size wuBase FPGA (1024-word pages, 33-word records). A hit arrives
// every HIT_GAP clocks (12,000 clocks = 200 us at the 60 MHz sample clock, a
// 5 kHz hit rate, five times a typical PMT dark rate). The MCU model polls
// the status word, reads each page as soon as it is ready and releases it,
// with SCLK at clk/8. After three full pages (93 records) the test checks
// that nothing was dropped and that every record came back intact and in
// order. The readout capacity is one record per 33 * 32 * 8 = 8,448 clocks,
// so this load uses about 70 % of it.
module tb_wubase_sustained_readout;
  import gen2_pkg::*;

  localparam int REC = 32, PRE = 4, RW = REC + 1, PW = 1024, PER_PAGE = PW / RW;
  localparam int HIT_GAP = 12000, PAGES = 3, SYNC_CYC = 10;

  logic clk = 0, rst_n = 0;
  adc_pair_t adc;
  logic sync_pulse, trigger_alert;
  logic sclk, cs_n, mosi, miso;

  wubase_fpga dut (
    .clk, .rst_n, .adc, .sync_pulse, .trigger_alert,
    .spi_sclk(sclk), .spi_cs_n(cs_n), .spi_mosi(mosi), .spi_miso(miso));

  spi_master_bfm mcu (.sclk, .cs_n, .mosi, .miso);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, cyc = 0, n_hits = 0, pulse_left = 0, t0 = 0;
  adc_pair_t ring [64];
  word_t exp_q [$];
  assign sync_pulse = (cyc == SYNC_CYC);

  always @(posedge clk) begin
    adc_pair_t s;
    s.hg = 12'(90 + ($urandom % 20));
    s.lg = 12'($urandom % 4096);
    if (rst_n && cyc > 100 && (cyc + 1) % HIT_GAP == 0) begin
      pulse_left = 4; t0 = cyc + 1; n_hits++;
    end
    if (pulse_left > 0) begin s.hg = 12'(600 + ($urandom % 3000)); pulse_left--; end
    ring[(cyc + 1) % 64] = s;
    if (n_hits > 0 && cyc + 1 == t0 - PRE + REC) begin
      exp_q.push_back({1'b1, 31'(t0 - SYNC_CYC - 1)});
      for (int j = 0; j < REC; j++) exp_q.push_back({8'h00, ring[(t0 - PRE + j) % 64]});
    end
    adc <= s;
    cyc <= cyc + 1;
  end

  initial begin
    word_t st, q[$];
    automatic int pages = 0, words = 0, bad = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    while (pages < PAGES) begin
      mcu.status(st);
      if (st[31]) begin
        int n;
        n = int'(st[29:16]);
        checks++;
        if (n != PER_PAGE * RW) begin failures++; $display("page of %0d words, expected %0d", n, PER_PAGE * RW); end
        mcu.read_page(n, q);
        mcu.simple(CMD_RELEASE);
        foreach (q[i]) begin
          word_t e;
          e = exp_q.pop_front();
          words++;
          if (q[i] !== e) begin bad++; if (bad < 10) $display("word %0d: %h, expected %h", words, q[i], e); end
        end
        pages++;
      end else begin
        repeat (2000) @(posedge clk);
      end
    end
    checks++;
    if (bad != 0) begin failures++; $display("%0d of %0d words wrong", bad, words); end
    mcu.status(st);
    checks++;
    if (st[15:0] != 0) begin failures++; $display("%0d records dropped", st[15:0]); end
    $display("%0d hits, %0d pages, %0d words read back in %0d clocks", n_hits, pages, words, cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (PAGES * (PER_PAGE + 10) * HIT_GAP) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
