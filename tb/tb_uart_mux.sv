// tb_uart_mux -- self-checking test of the fanout UART multiplexer.
//
// Nine wuBase ports. The host and the wuBases send UART-like traffic (idle
// high, random low bits in bursts); the selected port changes at random times,
// also in the middle of a burst, and sometimes to "no port". A model here
// tracks which port must be connected (a change is taken over only on a
// clock where both lines of the current link are high) and checks every
// clock that each wuBase receive line and the host receive line carry the
// right value. A character sent byte-wise from the host is also decoded at
// the selected wuBase.
module tb_uart_mux;

  localparam int N = 9, SW = 4, NCYC = 6000;

  logic clk = 0, rst_n = 0;
  logic [SW-1:0] sel = '0, sel_active;
  logic host_tx = 1, host_rx;
  logic [N-1:0] base_rx, base_tx = '1;

  uart_mux #(.N_PORTS(N)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, cyc = 0, switches = 0, deferred = 0;
  logic [SW-1:0] m_sel = '1;

  always @(posedge clk) begin
    if (rst_n) begin
      logic exp_hrx;
      logic [N-1:0] exp_brx;
      exp_hrx = (int'(m_sel) < N) ? base_tx[m_sel] : 1'b1;
      for (int i = 0; i < N; i++) exp_brx[i] = (m_sel == SW'(i)) ? host_tx : 1'b1;
      checks++;
      if (sel_active !== m_sel || host_rx !== exp_hrx || base_rx !== exp_brx) begin
        failures++;
        if (failures < 10) $display("clock %0d: sel_active %0d host_rx %b base_rx %b, expected %0d %b %b",
                                    cyc, sel_active, host_rx, base_rx, m_sel, exp_hrx, exp_brx);
      end
      // model update
      if (sel != m_sel) begin
        if (host_tx && exp_hrx) begin m_sel = sel; switches++; end
        else deferred++;
      end
    end
    cyc <= cyc + 1;
  end

  // random traffic
  initial begin
    @(posedge clk); #1 rst_n = 1;
    while (cyc < NCYC) begin
      @(posedge clk);
      if (($urandom % 200) == 0) sel <= SW'($urandom % (N + 2));
      host_tx <= (($urandom % 4) != 0) || ((cyc / 50) % 2 == 0);
      for (int i = 0; i < N; i++) base_tx[i] <= (($urandom % 4) != 0) || ((cyc / 70) % 2 == 0);
    end
    // a character from the host to port 5, 8 clocks per bit
    host_tx <= 1; base_tx <= '1; sel <= 4'd5;
    repeat (4) @(posedge clk);
    checks++;
    if (sel_active !== 4'd5) begin failures++; $display("port 5 not selected"); end
    fork
      begin : send
        logic [9:0] frame;
        frame = {1'b1, 8'hA7, 1'b0};
        for (int b = 0; b < 10; b++) begin host_tx <= frame[b]; repeat (8) @(posedge clk); end
      end
      begin : receive
        logic [7:0] got;
        @(negedge base_rx[5]);
        repeat (4) @(posedge clk);             // middle of the start bit
        for (int b = 0; b < 8; b++) begin repeat (8) @(posedge clk); got[b] = base_rx[5]; end
        checks++;
        if (got !== 8'hA7) begin failures++; $display("character %h, expected a7", got); end
      end
    join
    checks++;
    if (switches < 10 || deferred < 1) begin
      failures++; $display("switches %0d deferred %0d: too few", switches, deferred);
    end
    $display("switches %0d, deferred switch clocks %0d", switches, deferred);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NCYC + 1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
