// tb_wubase_hit_capture -- self-checking test of the wuBase hit discriminator.
//
// Drives a noisy high-gain baseline with PMT-like pulses, some closer together
// than one record (must not retrigger) and one that re-crosses the threshold
// inside a record. A reference model written here from the stated timing
// (header one clock after the triggering sample, sample k two clocks plus k
// after it, PRE_SAMPLES of pre-trigger, timestamp zero on the clock after the
// sync pulse) predicts every output word and the alert line cycle by cycle.
module tb_wubase_hit_capture;
  import gen2_pkg::*;

  localparam int REC = 32, PRE = 4, ALERT = 4, NCYC = 3000;
  localparam adc_t THR = 12'd400;

  logic clk = 0, rst_n = 0;
  adc_pair_t adc;
  logic sync_pulse;
  logic rec_valid, rec_first, rec_last, trigger_alert;
  word_t rec_data;

  wubase_hit_capture #(.REC_SAMPLES(REC), .PRE_SAMPLES(PRE), .ALERT_CYCLES(ALERT)) dut (
    .clk, .rst_n, .adc, .threshold(THR), .sync_pulse,
    .rec_valid, .rec_first, .rec_last, .rec_data, .trigger_alert);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, cyc = 0, n_hits = 0;
  adc_pair_t hist [NCYC+8];
  logic      e_valid [NCYC+80];
  logic      e_first [NCYC+80];
  logic      e_last  [NCYC+80];
  word_t     e_data  [NCYC+80];
  logic      e_alert [NCYC+80];
  int        free_at = 0, sync_cyc = 5;

  // pulse starts (cycle numbers)
  int pulses [10] = '{100, 120, 200, 234, 300, 500, 520, 700, 800, 833};

  function automatic adc_pair_t gen(int n);
    adc_pair_t s;
    s.hg = 12'(90 + ($urandom % 20));
    s.lg = 12'($urandom % 4096);
    foreach (pulses[i]) begin
      if (n >= pulses[i] && n < pulses[i] + 8) s.hg = 12'(1500 - 150 * (n - pulses[i]));
      if (pulses[i] == 300 && n == 300 + 10) s.hg = 12'd900;   // second crossing in one record
    end
    return s;
  endfunction

  initial begin
    for (int i = 0; i < NCYC + 80; i++) begin
      e_valid[i] = 0; e_first[i] = 0; e_last[i] = 0; e_data[i] = '0; e_alert[i] = 0;
    end
    for (int i = 0; i < NCYC + 8; i++) hist[i] = gen(i);
  end

  assign adc        = hist[cyc];
  assign sync_pulse = (cyc == sync_cyc);

  always @(posedge clk) begin
    if (rst_n) begin
      // reference: does sample cyc trigger?
      if (cyc >= 1 && hist[cyc].hg > THR && !(hist[cyc-1].hg > THR) && cyc >= free_at && cyc > 1) begin
        n_hits  = n_hits + 1;
        free_at = cyc + REC + 1;
        e_valid[cyc+1] = 1; e_first[cyc+1] = 1;
        e_data[cyc+1]  = {1'b1, 31'(cyc - sync_cyc - 1)};
        for (int k = 0; k < REC; k++) begin
          e_valid[cyc+2+k] = 1;
          e_data[cyc+2+k]  = {8'h00, hist[cyc-PRE+k]};
        end
        e_last[cyc+1+REC] = 1;
        for (int k = 1; k <= ALERT; k++) e_alert[cyc+k] = 1;
      end
      // compare this cycle's outputs
      checks++;
      if (rec_valid !== e_valid[cyc] || rec_first !== e_first[cyc] || rec_last !== e_last[cyc] ||
          (e_valid[cyc] && rec_data !== e_data[cyc]) || trigger_alert !== e_alert[cyc]) begin
        failures++;
        if (failures < 10)
          $display("cycle %0d: got v%b f%b l%b a%b %h, expected v%b f%b l%b a%b %h", cyc,
                   rec_valid, rec_first, rec_last, trigger_alert, rec_data,
                   e_valid[cyc], e_first[cyc], e_last[cyc], e_alert[cyc], e_data[cyc]);
      end
    end
    cyc <= cyc + 1;
  end

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    wait (cyc == NCYC);
    checks++;
    if (n_hits != 8) begin failures++; $display("expected 8 triggers, model saw %0d", n_hits); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NCYC + 500) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
