// tb_wubase_page_buffer -- self-checking test of the two-page hit buffer.
//
// Small pages (64 words) and 9-word records make every mechanism quick to
// reach: a page closing because the next record would not fit (7 records =
// 63 words), a flush of a part-filled page, a flush requested in the middle of
// a record (must wait for its end), both pages full so that records are
// dropped and counted, release of pages in the order they were filled, and
// writing resuming in a freed page. Page contents are read back through the
// read port and compared word by word with the records that were sent.
module tb_wubase_page_buffer;
  import gen2_pkg::*;

  localparam int PW = 64, RW = 9, AW = 6;

  logic clk = 0, rst_n = 0;
  logic wr_valid = 0, wr_first = 0, wr_last = 0;
  word_t wr_data = '0;
  logic flush = 0, release_page = 0;
  logic [AW-1:0] rd_addr = '0;
  word_t rd_data;
  logic page_ready, ready_page;
  logic [AW:0] ready_count;
  logic [15:0] drop_count;

  wubase_page_buffer #(.PAGE_WORDS(PW), .REC_WORDS(RW)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  function automatic word_t rec_word(int id, int k);
    return (k == 0) ? {1'b1, 31'(id)} : {8'h00, 12'(id), 12'(k)};
  endfunction

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // send one record, optional flush pulse on word `flush_at` (-1: none);
  // `more` keeps the bus driven for a record that follows at once
  task automatic send_record(int id, int flush_at = -1, bit more = 0);
    for (int k = 0; k < RW; k++) begin
      wr_valid <= 1; wr_first <= (k == 0); wr_last <= (k == RW - 1);
      wr_data  <= rec_word(id, k);
      flush    <= (k == flush_at);
      @(posedge clk);
    end
    if (!more) begin wr_valid <= 0; wr_first <= 0; wr_last <= 0; end
    flush <= 0;
  endtask

  task automatic idle(int n);
    repeat (n) @(posedge clk);
  endtask

  task automatic pulse_flush();
    flush <= 1; @(posedge clk); flush <= 0; @(posedge clk);
  endtask

  task automatic pulse_release();
    release_page <= 1; @(posedge clk); release_page <= 0; @(posedge clk);
  endtask

  // read the ready page and compare with records first_id .. first_id+n-1
  task automatic check_page(int page, int first_id, int n);
    check($sformatf("page %0d ready", page), page_ready === 1'b1 && ready_page === 1'(page));
    check($sformatf("page %0d count %0d (got %0d)", page, n * RW, ready_count),
          ready_count === (AW+1)'(n * RW));
    for (int a = 0; a < n * RW; a++) begin
      rd_addr <= AW'(a);
      @(posedge clk); @(posedge clk); #1;
      check($sformatf("page %0d word %0d = %h (got %h)", page, a, rec_word(first_id + a / RW, a % RW), rd_data),
            rd_data === rec_word(first_id + a / RW, a % RW));
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    check("nothing ready after reset", page_ready === 1'b0 && drop_count === 16'd0);

    // 3 records, then flush: page 0 ready with 27 words
    for (int r = 0; r < 3; r++) begin send_record(r); idle(2); end
    check("no page ready before flush", page_ready === 1'b0);
    pulse_flush();
    check_page(0, 0, 3);

    // 7 back-to-back records fill page 1: closes itself at 63 words
    for (int r = 10; r < 17; r++) send_record(r, -1, r < 16);
    idle(1);
    check("page 0 still first in line", ready_page === 1'b0);

    // both pages full: the next two records are dropped
    send_record(20, -1, 1); send_record(21); idle(1);
    check($sformatf("two records dropped (got %0d)", drop_count), drop_count === 16'd2);

    // release page 0: page 1 comes next, writing resumes in page 0
    pulse_release();
    check_page(1, 10, 7);
    send_record(30); idle(1);
    check("page 0 refilling, not ready", ready_page === 1'b1 && page_ready === 1'b1);

    // flush in the middle of a record: page 0 closes only after it
    send_record(31, 3); idle(1);
    pulse_release();
    check_page(0, 30, 2);

    // an empty page is not closed by a flush
    pulse_release();
    pulse_flush();
    check("flush of empty page ignored", page_ready === 1'b0);
    send_record(40); pulse_flush();
    check_page(1, 40, 1);
    check("drop count kept", drop_count === 16'd2);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
