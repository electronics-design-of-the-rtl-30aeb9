// tb_multi_pmt_coinc -- self-checking test of the multi-PMT coincidence logic.
//
// Directed cases first (one PMT alone, two PMTs inside the window, two PMTs
// further apart than the window, three at once), then random alert traffic
// on all 18 lines. A model here recomputes, from the alert edges alone, which
// windows are open on each clock (edge at clock e opens clocks e+3 ..
// e+2+WINDOW, re-armed by a new edge) and from that the expected coincidence
// pulse, mask and count, compared on every clock.
module tb_multi_pmt_coinc;

  localparam int N = 18, W = 6, M = 2, NCYC = 4000, ALEN = 4;

  logic clk = 0, rst_n = 0;
  logic [N-1:0] alert = '0;
  logic coinc;
  logic [N-1:0] coinc_mask;
  logic [31:0] coinc_count;

  multi_pmt_coinc #(.N_PMT(N), .WINDOW(W), .MULT(M)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, cyc = 0;
  int last_edge [N];
  int prev_edge [N];                // edge before the last: its window may still be open
  int hold [N];
  int exp_count = 0, n_coinc = 0;
  bit prev_in = 0;
  logic [N-1:0] exp_mask = '0;
  bit exp_coinc = 0;

  // directed schedule: clock -> PMTs that start an alert
  function automatic logic [N-1:0] directed(int n);
    case (n)
      20:       return 18'h00001;            // alone
      60:       return 18'h00002;            // pair, 3 clocks apart
      63:       return 18'h00100;
      100:      return 18'h00004;            // pair, 10 clocks apart
      110:      return 18'h00008;
      150:      return 18'h20011;            // three at once
      default:  return '0;
    endcase
  endfunction

  always @(posedge clk) begin
    logic [N-1:0] open_v;
    int cnt;
    bit in_c;
    if (rst_n) begin
      // compare outputs of this clock with the model's prediction
      checks++;
      if (coinc !== exp_coinc || coinc_count !== 32'(exp_count) || (exp_coinc && coinc_mask !== exp_mask)) begin
        failures++;
        if (failures < 10) $display("clock %0d: coinc %b mask %h count %0d, expected %b %h %0d",
                                    cyc, coinc, coinc_mask, coinc_count, exp_coinc, exp_mask, exp_count);
      end
      // model: windows open during this clock
      cnt = 0;
      for (int i = 0; i < N; i++) begin
        open_v[i] = (cyc >= last_edge[i] + 3 && cyc <= last_edge[i] + 2 + W) ||
                    (cyc >= prev_edge[i] + 3 && cyc <= prev_edge[i] + 2 + W);
        cnt += int'(open_v[i]);
      end
      in_c = cnt >= M;
      exp_coinc = in_c && !prev_in;
      if (exp_coinc) begin exp_mask = open_v; exp_count++; n_coinc++; end
      prev_in = in_c;
    end
    // drive alerts for the next clock
    for (int i = 0; i < N; i++) begin
      bit start;
      start = (cyc < 300) ? directed(cyc + 1)[i] : (($urandom % 90) == 0);
      if (hold[i] > 0) hold[i]--;
      else if (alert[i] == 0 && start && rst_n) begin
        hold[i] = ALEN; prev_edge[i] = last_edge[i]; last_edge[i] = cyc + 1;
      end
      alert[i] <= hold[i] > 0;
    end
    cyc <= cyc + 1;
  end

  initial begin
    for (int i = 0; i < N; i++) begin last_edge[i] = -100; prev_edge[i] = -100; hold[i] = 0; end
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    wait (cyc == 300);
    checks++;
    if (coinc_count != 2) begin failures++; $display("directed part: %0d coincidences, expected 2", coinc_count); end
    wait (cyc == NCYC);
    checks++;
    if (n_coinc < 20) begin failures++; $display("random part produced too few coincidences"); end
    $display("coincidences seen: %0d", n_coinc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NCYC + 100) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
