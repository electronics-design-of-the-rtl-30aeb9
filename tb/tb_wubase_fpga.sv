// tb_wubase_fpga -- end-to-end test of one wuBase FPGA, as its MCU sees it.
//
// PMT-like pulses are injected into the ADC stream; an SPI master model plays
// the MCU. Checked through SPI only: the reset threshold triggers a
// 450-count pulse; after the threshold is raised to 500 it no longer does;
// flush makes a part-filled page readable; records read back carry the
// timestamp of the triggering sample and the exact ADC samples around it; a
// burst of 16 hits fills both pages (7 records each with these sizes) and the
// 2 extra records are reported as dropped; pages come back in the order they
// were filled. Trigger-alert pulses are counted against the injected hits.
module tb_wubase_fpga;
  import gen2_pkg::*;

  localparam int REC = 8, PRE = 2, PW = 64, RW = REC + 1, PER_PAGE = PW / RW;

  logic clk = 0, rst_n = 0;
  adc_pair_t adc;
  logic sync_pulse;
  logic trigger_alert;
  logic sclk, cs_n, mosi, miso;

  wubase_fpga #(.REC_SAMPLES(REC), .PRE_SAMPLES(PRE), .ALERT_CYCLES(4),
                .PAGE_WORDS(PW), .THR_RESET(12'd400)) dut (
    .clk, .rst_n, .adc, .sync_pulse, .trigger_alert,
    .spi_sclk(sclk), .spi_cs_n(cs_n), .spi_mosi(mosi), .spi_miso(miso));

  spi_master_bfm mcu (.sclk, .cs_n, .mosi, .miso);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, cyc = 0;
  localparam int SYNC_CYC = 10;
  adc_pair_t hist [int];
  int req_amp = 0, amp = 0, pulse_left = 0;
  int expect_t0 [$];     // trigger clocks of hits that must be stored, in order
  int last_t0;
  int n_alerts = 0;
  logic alert_q = 0;

  assign sync_pulse = (cyc == SYNC_CYC);

  always @(posedge clk) begin
    adc_pair_t s;
    s.hg = 12'(90 + ($urandom % 20));
    s.lg = 12'($urandom % 4096);
    if (req_amp != 0) begin
      amp = req_amp; req_amp = 0; pulse_left = 4; last_t0 = cyc + 1;
    end
    if (pulse_left > 0) begin s.hg = 12'(amp); pulse_left--; end
    hist[cyc + 1] = s;
    adc <= s;
    cyc <= cyc + 1;
    alert_q <= trigger_alert;
    if (rst_n && trigger_alert && !alert_q) n_alerts++;
  end

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // one pulse, then enough quiet clocks for its record to finish
  task automatic hit(int a, bit stored);
    req_amp = a;
    @(posedge clk); @(posedge clk);
    if (stored) expect_t0.push_back(last_t0);
    repeat (RW + 6) @(posedge clk);
  endtask

  task automatic read_and_check(int n_rec, string tag);
    word_t st, q[$];
    mcu.status(st);
    check($sformatf("%s: page ready, %0d words (status %h)", tag, n_rec * RW, st),
          st[31] == 1'b1 && st[29:16] == 14'(n_rec * RW));
    mcu.read_page(n_rec * RW, q);
    for (int r = 0; r < n_rec; r++) begin
      int t0;
      t0 = expect_t0.pop_front();
      check($sformatf("%s: record %0d header %h, timestamp %0d", tag, r, q[r*RW], t0 - SYNC_CYC - 1),
            q[r*RW] === {1'b1, 31'(t0 - SYNC_CYC - 1)});
      for (int k = 0; k < REC; k++)
        check($sformatf("%s: record %0d sample %0d", tag, r, k),
              q[r*RW + 1 + k] === {8'h00, hist[t0 - PRE + k]});
    end
    mcu.simple(CMD_RELEASE);
  endtask

  initial begin
    word_t st;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    repeat (20) @(posedge clk);
    mcu.status(st);
    check("nothing ready after reset", st === 32'h0);

    hit(450, 1);                       // above the reset threshold of 400
    mcu.set_threshold(12'd500);
    hit(450, 0);                       // now below threshold
    hit(1500, 1);
    mcu.simple(CMD_FLUSH);
    read_and_check(2, "flushed page");

    // burst: 16 hits, both pages fill, 2 dropped
    for (int i = 0; i < 16; i++) hit(800 + 10 * i, i < 2 * PER_PAGE);
    mcu.status(st);
    check($sformatf("2 records dropped (status %h)", st), st[15:0] == 16'd2);
    read_and_check(PER_PAGE, "first full page");
    read_and_check(PER_PAGE, "second full page");
    mcu.status(st);
    check("both pages free again", st[31] == 1'b0);
    check($sformatf("alert pulses %0d, expected 18", n_alerts), n_alerts == 18);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #5ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
