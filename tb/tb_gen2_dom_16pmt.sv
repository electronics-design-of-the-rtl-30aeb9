// tb_gen2_dom_16pmt -- the 16-PMT module variant of gen2_dom.
//
// Same logic as the 18-PMT top with N_PMT = 16 and 8 wuBases per fanout.
// Checks that the last wuBase of each fanout is wired: an alert from PMT 7
// and PMT 15 together makes a coincidence with exactly those two mask bits,
// PMT 15 alone makes none, and a UART character passes both ways between
// fanout B's MMB link and wuBase 15 (port 7 of fanout B).
module tb_gen2_dom_16pmt;
  import gen2_pkg::*;

  localparam int N = 16, BIT = 16;

  logic clk = 0, rst_n = 0;
  adc_pair_t [N-1:0] adc;
  logic [N-1:0] spi_miso, mcu_uart_rx, coinc_mask, trigger_alert;
  logic [N-1:0] mcu_uart_tx = '1;
  logic [3:0] uart_sel_b = 4'd15, sel_act_a, sel_act_b;
  logic mmb_tx_b = 1, mmb_rx_a, mmb_rx_b, coinc;
  logic [31:0] coinc_count;

  gen2_dom #(.N_PMT(N), .N_A(8)) dut (
    .clk, .rst_n, .sync_pulse(1'b0), .adc,
    .spi_sclk('0), .spi_cs_n('1), .spi_mosi('0), .spi_miso,
    .mcu_uart_tx, .mcu_uart_rx,
    .uart_sel_a(4'd15), .uart_sel_b, .uart_sel_active_a(sel_act_a), .uart_sel_active_b(sel_act_b),
    .mmb_tx_a(1'b1), .mmb_rx_a, .mmb_tx_b, .mmb_rx_b,
    .coinc, .coinc_mask, .coinc_count, .trigger_alert);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  logic [N-1:0] pulse = '0;

  always @(posedge clk)
    for (int p = 0; p < N; p++) begin
      adc[p].hg <= pulse[p] ? 12'd1500 : 12'(90 + ($urandom % 20));
      adc[p].lg <= 12'($urandom % 4096);
    end

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic fire(logic [N-1:0] m);
    @(negedge clk) pulse = m;
    repeat (4) @(negedge clk);
    pulse = '0;
    repeat (60) @(posedge clk);
  endtask

  initial begin
    logic [7:0] got;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    repeat (10) @(posedge clk);
    fire(16'h8080);
    check($sformatf("coincidence of PMTs 7 and 15 (count %0d mask %h)", coinc_count, coinc_mask),
          coinc_count == 1 && coinc_mask == 16'h8080);
    fire(16'h8000);
    check("single PMT 15 makes no coincidence", coinc_count == 1);

    uart_sel_b = 4'd7;
    repeat (4) @(posedge clk);
    check("fanout B port 7 selected", sel_act_b == 4'd7);
    fork
      begin : down
        logic [9:0] f;
        f = {1'b1, 8'h96, 1'b0};
        for (int b = 0; b < 10; b++) begin mmb_tx_b = f[b]; repeat (BIT) @(posedge clk); end
      end
      begin : down_rx
        wait (mcu_uart_rx[15] == 1'b0);
        repeat (BIT / 2) @(posedge clk);
        for (int b = 0; b < 8; b++) begin repeat (BIT) @(posedge clk); got[b] = mcu_uart_rx[15]; end
      end
    join
    check($sformatf("MMB to wuBase 15: %h", got), got === 8'h96);
    repeat (2 * BIT) @(posedge clk);
    fork
      begin : up
        logic [9:0] f;
        f = {1'b1, 8'h4D, 1'b0};
        for (int b = 0; b < 10; b++) begin mcu_uart_tx[15] = f[b]; repeat (BIT) @(posedge clk); end
      end
      begin : up_rx
        wait (mmb_rx_b == 1'b0);
        repeat (BIT / 2) @(posedge clk);
        for (int b = 0; b < 8; b++) begin repeat (BIT) @(posedge clk); got[b] = mmb_rx_b; end
      end
    join
    check($sformatf("wuBase 15 to MMB: %h", got), got === 8'h4D);
    check("fanout A idle", mmb_rx_a === 1'b1 && mcu_uart_rx[7:0] === 8'hFF);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
