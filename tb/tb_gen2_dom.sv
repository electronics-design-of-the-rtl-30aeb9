// tb_gen2_dom -- end-to-end test of the module's digital logic at full size.
//
// All parameters of gen2_dom keep their defaults: 18 wuBases with 1024-word
// pages and 33-word records (31 records per page), 9 + 9 wuBases on the two
// fanout boards. Pulses are injected into the ADC streams; MCU models read
// wuBase 0 (fanout A) and wuBase 17 (fanout B) over SPI; the mini-mainboard
// side drives the two UART multiplexers. The test makes every mechanism
// happen and counts it:
//   - hits and trigger alerts, including one hit below a raised threshold
//   - a page closing because it is full, and a flush of a part-filled page
//   - overflow: 64 hits into wuBase 0 fill both pages, 2 are dropped
//   - page release, and pages read back in order, every word compared
//     with a model of the record format (timestamp relative to the sync
//     pulse, samples around the trigger)
//   - coincidences between PMTs on different fanouts, and single hits
//     that must not make one
//   - UART characters routed both ways through each fanout, and a select
//     change held back until the line is idle
module tb_gen2_dom;
  import gen2_pkg::*;

  localparam int N = 18, REC = 32, PRE = 4, RW = REC + 1, PER_PAGE = 1024 / RW;
  localparam int SYNC_CYC = 10;
  localparam int BIT = 16;            // UART bit time in clocks

  logic clk = 0, rst_n = 0;
  logic sync_pulse;
  adc_pair_t [N-1:0] adc;
  logic [N-1:0] spi_sclk, spi_cs_n, spi_mosi, spi_miso;
  logic [N-1:0] mcu_uart_tx = '1, mcu_uart_rx;
  logic [3:0] uart_sel_a = 4'd15, uart_sel_b = 4'd15, uart_sel_active_a, uart_sel_active_b;
  logic mmb_tx_a = 1, mmb_rx_a, mmb_tx_b = 1, mmb_rx_b;
  logic coinc;
  logic [N-1:0] coinc_mask, trigger_alert;
  logic [31:0] coinc_count;

  gen2_dom dut (.*);

  spi_master_bfm mcu0  (.sclk(spi_sclk[0]),  .cs_n(spi_cs_n[0]),  .mosi(spi_mosi[0]),  .miso(spi_miso[0]));
  spi_master_bfm mcu17 (.sclk(spi_sclk[17]), .cs_n(spi_cs_n[17]), .mosi(spi_mosi[17]), .miso(spi_miso[17]));
  assign spi_sclk[16:1] = '0;
  assign spi_cs_n[16:1] = '1;
  assign spi_mosi[16:1] = '0;

  always #5 clk = ~clk;

  int checks = 0, failures = 0, cyc = 0;
  assign sync_pulse = (cyc == SYNC_CYC);

  // mechanism counters
  int n_alert = 0, n_coinc = 0, n_below_thr = 0, n_page_full = 0, n_flush = 0,
      n_drop = 0, n_release = 0, n_uart_a = 0, n_uart_b = 0, n_deferred = 0;

  // ---------------------------------------------------------------- ADC model
  int req_amp [N];
  bit req_store [N];
  int pulse_left [N];
  int amp [N];
  adc_pair_t ring [N][64];
  int pend_t0 [$];                    // {pmt, t0} pairs of hits to be stored
  int pend_p  [$];
  word_t exp_rec [2][$];              // expected words, index 0: wuBase 0, 1: wuBase 17
  logic [N-1:0] alert_q = '0;

  always @(posedge clk) begin
    for (int p = 0; p < N; p++) begin
      adc_pair_t s;
      s.hg = 12'(90 + ($urandom % 20));
      s.lg = 12'($urandom % 4096);
      if (req_amp[p] != 0) begin
        amp[p] = req_amp[p]; req_amp[p] = 0; pulse_left[p] = 4;
        if (req_store[p] && (p == 0 || p == 17)) begin pend_t0.push_back(cyc + 1); pend_p.push_back(p); end
      end
      if (pulse_left[p] > 0) begin s.hg = 12'(amp[p]); pulse_left[p]--; end
      ring[p][(cyc + 1) % 64] = s;
      adc[p] <= s;
    end
    // complete expected records once all their samples exist
    for (int i = pend_t0.size() - 1; i >= 0; i--) begin
      if (cyc + 1 >= pend_t0[i] - PRE + REC) begin
        int t0, k;
        t0 = pend_t0[i];
        k  = (pend_p[i] == 0) ? 0 : 1;
        exp_rec[k].push_back({1'b1, 31'(t0 - SYNC_CYC - 1)});
        for (int j = 0; j < REC; j++) exp_rec[k].push_back({8'h00, ring[pend_p[i]][(t0 - PRE + j) % 64]});
        pend_t0.delete(i);
        pend_p.delete(i);
      end
    end
    alert_q <= trigger_alert;
    if (rst_n) begin
      n_alert += $countones(trigger_alert & ~alert_q);
      if (coinc) n_coinc++;
    end
    cyc <= cyc + 1;
  end

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  // pulse into the PMTs of `mask`; stored hits of wuBase 0/17 are modelled
  task automatic hit(logic [N-1:0] mask, int a, bit stored);
    @(negedge clk);
    for (int p = 0; p < N; p++) if (mask[p]) begin req_amp[p] = a; req_store[p] = stored; end
    @(posedge clk);
    repeat (RW + 8) @(posedge clk);
  endtask

  task automatic read_page(int which, int n_rec, string tag);
    word_t st, q[$];
    if (which == 0) mcu0.status(st); else mcu17.status(st);
    check($sformatf("%s: ready with %0d words (status %h)", tag, n_rec * RW, st),
          st[31] && st[29:16] == 14'(n_rec * RW));
    if (which == 0) mcu0.read_page(n_rec * RW, q); else mcu17.read_page(n_rec * RW, q);
    for (int i = 0; i < n_rec * RW; i++) begin
      word_t e;
      e = exp_rec[which].pop_front();
      check($sformatf("%s: word %0d %h, expected %h", tag, i, q[i], e), q[i] === e);
    end
    if (which == 0) mcu0.simple(CMD_RELEASE); else mcu17.simple(CMD_RELEASE);
    n_release++;
  endtask

  // ---------------------------------------------------------------- UART
  // UART lines by number: p >= 0 is wuBase p, -1 fanout A MMB side, -2 fanout B
  task automatic set_tx(int id, logic v);
    if (id == -1)      mmb_tx_a = v;
    else if (id == -2) mmb_tx_b = v;
    else               mcu_uart_tx[id] = v;
  endtask

  function automatic logic get_rx(int id);
    if (id == -1) return mmb_rx_a;
    if (id == -2) return mmb_rx_b;
    return mcu_uart_rx[id];
  endfunction

  task automatic uart_send(int id, logic [7:0] c);
    logic [9:0] f;
    f = {1'b1, c, 1'b0};
    for (int b = 0; b < 10; b++) begin set_tx(id, f[b]); repeat (BIT) @(posedge clk); end
  endtask

  task automatic uart_recv(int id, output logic [7:0] c);
    int guard;
    guard = 0;
    @(posedge clk);
    while (get_rx(id) !== 1'b0 && guard < 100 * BIT) begin @(posedge clk); guard++; end
    repeat (BIT / 2) @(posedge clk);
    for (int b = 0; b < 8; b++) begin repeat (BIT) @(posedge clk); c[b] = get_rx(id); end
    repeat (BIT) @(posedge clk);
  endtask

  task automatic uart_round_trip_a(int port, logic [7:0] down, logic [7:0] up);
    logic [7:0] got;
    uart_sel_a = 4'(port);
    repeat (4) @(posedge clk);
    check("fanout A select", uart_sel_active_a == 4'(port));
    fork
      uart_send(-1, down);
      uart_recv(port, got);
    join
    check($sformatf("A down %h got %h", down, got), got === down);
    fork
      uart_send(port, up);
      uart_recv(-1, got);
    join
    check($sformatf("A up %h got %h", up, got), got === up);
    n_uart_a++;
  endtask

  task automatic uart_round_trip_b(int port, logic [7:0] down, logic [7:0] up);
    logic [7:0] got;
    uart_sel_b = 4'(port - 9);
    repeat (4) @(posedge clk);
    check("fanout B select", uart_sel_active_b == 4'(port - 9));
    fork
      uart_send(-2, down);
      uart_recv(port, got);
    join
    check($sformatf("B down %h got %h", down, got), got === down);
    fork
      uart_send(port, up);
      uart_recv(-2, got);
    join
    check($sformatf("B up %h got %h", up, got), got === up);
    n_uart_b++;
  endtask

  initial begin
    word_t st;
    for (int p = 0; p < N; p++) begin req_amp[p] = 0; req_store[p] = 0; pulse_left[p] = 0; amp[p] = 0; end
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    repeat (20) @(posedge clk);

    // threshold: raise wuBase 17 to 600, a 500 pulse is then ignored there
    mcu17.set_threshold(12'd600);
    hit(18'h20000, 500, 0);
    check("pulse below raised threshold gives no alert", n_alert == 0);
    n_below_thr++;

    // flush of a part-filled page on wuBase 17
    for (int i = 0; i < 3; i++) hit(18'h20000, 900 + i, 1);
    mcu17.status(st);
    check("no page ready before flush", st[31] == 1'b0);
    mcu17.simple(CMD_FLUSH);
    n_flush++;
    read_page(1, 3, "wuBase 17 flushed page");

    // overflow on wuBase 0: 64 hits, pages close when full, 2 dropped
    for (int i = 0; i < 64; i++) hit(18'h00001, 700 + i, i < 2 * PER_PAGE);
    mcu0.status(st);
    check($sformatf("wuBase 0 dropped 2 (status %h)", st), st[15:0] == 16'd2);
    n_drop = int'(st[15:0]);
    read_page(0, PER_PAGE, "wuBase 0 page A");
    n_page_full++;
    mcu0.status(st);
    check("second full page waiting", st[31] == 1'b1);
    read_page(0, PER_PAGE, "wuBase 0 page B");
    n_page_full++;
    check("single-PMT hits make no coincidence", coinc_count == 0);

    // coincidences across both hemispheres, and a single hit
    hit(18'h20001, 1200, 1);
    hit(18'h00060, 1200, 0);
    hit(18'h00020, 1200, 0);
    check($sformatf("2 coincidences (count %0d)", coinc_count), coinc_count == 2);
    check($sformatf("last coincidence mask %h", coinc_mask), coinc_mask == 18'h00060);
    mcu0.simple(CMD_FLUSH);
    read_page(0, 1, "wuBase 0 coincident hit");
    mcu17.simple(CMD_FLUSH);
    read_page(1, 1, "wuBase 17 coincident hit");

    // UART through both fanouts
    uart_round_trip_a(3, 8'h5A, 8'hC3);
    uart_round_trip_b(12, 8'h81, 8'h3E);
    // select change requested while a character is in flight on fanout A
    fork
      uart_send(-1, 8'h00);
      begin
        repeat (3 * BIT) @(posedge clk);
        uart_sel_a = 4'd7;
        repeat (4) @(posedge clk);
        check("select held while the line is busy", uart_sel_active_a == 4'd3);
        n_deferred++;
      end
    join
    repeat (4) @(posedge clk);
    check("select taken once idle", uart_sel_active_a == 4'd7);
    uart_round_trip_a(7, 8'hE1, 8'h1E);

    check($sformatf("alerts %0d, expected 3+64+2+2+1", n_alert), n_alert == 3 + 64 + 2 + 2 + 1);
    $display("%0d clocks simulated", cyc);
    $display("mechanisms: alerts %0d below-threshold %0d page-full %0d flush %0d drop %0d release %0d coinc %0d uartA %0d uartB %0d deferred-switch %0d",
             n_alert, n_below_thr, n_page_full, n_flush, n_drop, n_release, n_coinc, n_uart_a, n_uart_b, n_deferred);
    check("every mechanism happened",
          n_alert > 0 && n_below_thr > 0 && n_page_full > 0 && n_flush > 0 && n_drop > 0 &&
          n_release > 0 && n_coinc > 0 && n_uart_a > 0 && n_uart_b > 0 && n_deferred > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
