// multi_pmt_coinc -- multi-PMT coincidence logic of the fanout-A FPGA.
//
// Every wuBase raises its trigger-alert line for each hit. Hits seen at the
// same time in several PMTs are more likely to come from a particle than
// from PMT dark noise, so this block flags them. Each alert line passes a
// two-flop synchroniser; its rising edge opens a window of WINDOW clocks for
// that PMT. While at least MULT windows are open at once, the module is in
// coincidence: `coinc` pulses for one clock when that condition begins,
// `coinc_mask` then shows which PMTs took part, and `coinc_count` counts the
// coincidences. Alerts arriving while the condition already holds extend it
// without starting a new coincidence.
//
// Timing: an alert that rises in clock e opens its window for clocks
// e+3 .. e+2+WINDOW (two synchroniser stages, then the window counter);
// `coinc` is registered, so it is high in clock e+4 when the edge of clock e
// completes a coincidence.
// From the paper: a coincidence signal formed from the per-hit signals of
// all wuBases, sent towards the surface. This design's choices: the window,
// the multiplicity, edge detection and the count/mask outputs.
module multi_pmt_coinc
  import gen2_pkg::*;
#(
  parameter int N_PMT  = N_PMT_18,
  parameter int WINDOW = 6,     // clocks a hit stays open
  parameter int MULT   = 2      // PMTs needed for a coincidence
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [N_PMT-1:0] alert,       // trigger-alert lines from the wuBases
  output logic             coinc,       // one-clock pulse per coincidence
  output logic [N_PMT-1:0] coinc_mask,  // PMTs with an open window at that time
  output logic [31:0]      coinc_count
);

  localparam int WW = $clog2(WINDOW + 1);
  localparam int NW = $clog2(N_PMT + 1);

  logic [N_PMT-1:0] s0, s1, s2;
  logic [WW-1:0]    win [N_PMT];
  logic [N_PMT-1:0] open_now;
  logic [NW-1:0]    n_open;
  logic             in_coinc, in_coinc_q;

  always_comb begin
    n_open = '0;
    for (int i = 0; i < N_PMT; i++) begin
      open_now[i] = win[i] != '0;
      n_open      = n_open + NW'(open_now[i]);
    end
  end
  assign in_coinc = n_open >= NW'(MULT);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s0          <= '0;
      s1          <= '0;
      s2          <= '0;
      win         <= '{default: '0};
      in_coinc_q  <= 1'b0;
      coinc       <= 1'b0;
      coinc_mask  <= '0;
      coinc_count <= '0;
    end else begin
      s0 <= alert;
      s1 <= s0;
      s2 <= s1;
      for (int i = 0; i < N_PMT; i++) begin
        if (s1[i] && !s2[i])    win[i] <= WW'(WINDOW);
        else if (win[i] != '0)  win[i] <= win[i] - 1'b1;
      end
      in_coinc_q <= in_coinc;
      coinc      <= in_coinc && !in_coinc_q;
      if (in_coinc && !in_coinc_q) begin
        coinc_mask  <= open_now;
        coinc_count <= coinc_count + 1'b1;
      end
    end
  end

  initial assert (MULT >= 1 && MULT <= N_PMT) else $error("MULT out of range");

endmodule
