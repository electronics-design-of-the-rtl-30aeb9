// wubase_hit_capture -- hit discriminator and record builder of the wuBase FPGA.
//
// The ADC delivers one high-gain/low-gain sample pair per clock (60 MSps,
// clk = sample clock). A hit starts when the high-gain sample rises above
// `threshold` (previous sample at or below it) while no record is being
// built. On that clock the block emits a header word carrying the local
// timestamp of the triggering sample, then REC_SAMPLES sample words, one per
// clock, starting PRE_SAMPLES samples before the triggering one (a short delay
// line provides the pre-trigger samples). The stream has no back-pressure:
// the page buffer downstream must accept or drop each word.
// The timestamp counter counts sample clocks and is cleared by `sync_pulse`
// (the sync line that the fanout board distributes with the 20 MHz clock).
// Every hit also raises `trigger_alert` for ALERT_CYCLES clocks; that line
// goes to the coincidence FPGA on the fanout board.
//
// Timing: if the triggering sample is on `adc` in clock t0, the header leaves
// on clock t0+1 and sample word k (k = 0..REC_SAMPLES-1) on clock t0+2+k,
// holding the sample of clock t0-PRE_SAMPLES+k. The header timestamp is the
// counter value of clock t0; after a sync pulse in clock s, clock s+1 has
// timestamp 0. trigger_alert is high on clocks t0+1..t0+ALERT_CYCLES. A new
// hit can trigger from clock t0+REC_SAMPLES+1 on.
//
// From the paper: 2 gain channels of 12 bits at 60 MSps, hits described by
// charge and timestamp, a per-hit signal to the fanout FPGA, the sync pulse.
// This design's choices: a leading-edge threshold on the high-gain channel,
// fixed-length records, pre-trigger depth, alert length, the meaning of the
// sync pulse (timestamp clear).
module wubase_hit_capture
  import gen2_pkg::*;
#(
  parameter int REC_SAMPLES  = 32,
  parameter int PRE_SAMPLES  = 4,
  parameter int ALERT_CYCLES = 4
) (
  input  logic      clk,
  input  logic      rst_n,
  input  adc_pair_t adc,            // sample pair for this clock
  input  adc_t      threshold,      // high-gain discriminator level
  input  logic      sync_pulse,     // clears the timestamp counter
  output logic      rec_valid,      // a record word is on rec_data
  output logic      rec_first,      // it is the header word
  output logic      rec_last,       // it is the last sample word
  output word_t     rec_data,
  output logic      trigger_alert
);

  localparam int CNT_W = $clog2(REC_SAMPLES + 1);
  localparam int AL_W  = $clog2(ALERT_CYCLES + 1);

  logic [TS_W-1:0]  ts;
  adc_pair_t        dly [PRE_SAMPLES+1];
  logic             above_q;
  logic             busy;
  logic [CNT_W-1:0] left;           // sample words still to send
  logic [AL_W-1:0]  alert_cnt;
  logic             above, trig;

  assign above = adc.hg > threshold;
  assign trig  = above && !above_q && !busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ts        <= '0;
      above_q   <= 1'b1;            // no trigger on the first sample
      busy      <= 1'b0;
      left      <= '0;
      alert_cnt <= '0;
      rec_valid <= 1'b0;
      rec_first <= 1'b0;
      rec_last  <= 1'b0;
      rec_data  <= '0;
      for (int i = 0; i <= PRE_SAMPLES; i++) dly[i] <= '0;
    end else begin
      ts      <= sync_pulse ? '0 : ts + 1'b1;
      above_q <= above;
      dly[0]  <= adc;
      for (int i = 1; i <= PRE_SAMPLES; i++) dly[i] <= dly[i-1];

      rec_valid <= 1'b0;
      rec_first <= 1'b0;
      rec_last  <= 1'b0;
      if (trig) begin
        busy      <= 1'b1;
        left      <= CNT_W'(REC_SAMPLES);
        rec_valid <= 1'b1;
        rec_first <= 1'b1;
        rec_data  <= hdr_word(ts);
        alert_cnt <= AL_W'(ALERT_CYCLES);
      end else begin
        if (busy) begin
          rec_valid <= 1'b1;
          rec_data  <= smp_word(dly[PRE_SAMPLES]);
          left      <= left - 1'b1;
          if (left == CNT_W'(1)) begin
            rec_last <= 1'b1;
            busy     <= 1'b0;
          end
        end
        if (alert_cnt != '0) alert_cnt <= alert_cnt - 1'b1;
      end
    end
  end

  // dly[i] holds the sample of i+1 clocks ago, so at decision clock t0+1+k
  // dly[PRE_SAMPLES] is the sample of clock t0-PRE_SAMPLES+k.
  assign trigger_alert = alert_cnt != '0;

  initial begin
    assert (REC_SAMPLES > PRE_SAMPLES) else $error("REC_SAMPLES must exceed PRE_SAMPLES");
  end

endmodule
