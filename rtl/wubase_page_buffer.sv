// wubase_page_buffer -- the two data pages of the wuBase FPGA.
//
// Hit records from wubase_hit_capture are written into one of two pages of
// PAGE_WORDS 32-bit words while the other page waits to be read by the
// wuBase MCU. A page is "closed" (ready for the MCU) when the next record
// might no longer fit in it, or when the MCU asks for a flush and the page
// holds at least one record. On closing, writing moves to the other page if
// that page is free. Pages are closed, read and released in strict
// alternation, so the MCU always gets the older page first. When a record
// header arrives and neither the filling page has room nor the other page is
// free, the whole record is dropped and counted (overflow).
//
// Interface: the write side takes the record stream (valid/first/last/data;
// no back-pressure). The read side offers `page_ready`, the number of words
// in the ready page and a synchronous read port (`rd_data` is the word at
// the `rd_addr` of the previous clock). `release_page` frees the ready page,
// `flush` closes the filling page (deferred to the end of a record in
// progress). Only whole records are ever stored.
//
// From the paper: data wait in "one of two data pages" until the MCU
// retrieves them. This design's choices: page size, closing rule, flush,
// drop-and-count behaviour on overflow, all of the interface.
module wubase_page_buffer
  import gen2_pkg::*;
#(
  parameter int PAGE_WORDS = 1024,   // words per page, power of two
  parameter int REC_WORDS  = 33      // words per record (header + samples)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // record stream
  input  logic                      wr_valid,
  input  logic                      wr_first,
  input  logic                      wr_last,
  input  word_t                     wr_data,
  // MCU side
  input  logic                      flush,
  input  logic                      release_page,
  input  logic [$clog2(PAGE_WORDS)-1:0] rd_addr,
  output word_t                     rd_data,
  output logic                      page_ready,
  output logic                      ready_page,     // which page is ready
  output logic [$clog2(PAGE_WORDS):0] ready_count,  // words in it
  output logic [15:0]               drop_count      // records dropped (saturating)
);

  localparam int AW = $clog2(PAGE_WORDS);
  localparam int CW = AW + 1;

  word_t          mem [2*PAGE_WORDS];
  logic [CW-1:0]  cnt  [2];
  logic [1:0]     full;
  logic           wp, rp;              // page written / page to be read
  logic           in_rec;              // inside an accepted record
  logic           dropping;            // inside a dropped record
  logic           flush_pend;

  // write decision for a header
  logic           fits, other_free, hdr_accept, hdr_swap;
  assign fits       = !full[wp] && (cnt[wp] + CW'(REC_WORDS) <= CW'(PAGE_WORDS));
  assign other_free = !full[~wp];
  assign hdr_swap   = !fits && other_free;
  assign hdr_accept = fits || other_free;

  logic           do_write;
  logic           wsel;
  logic [AW-1:0]  waddr;
  always_comb begin
    do_write = 1'b0;
    wsel     = wp;
    waddr    = cnt[wp][AW-1:0];
    if (wr_valid) begin
      if (wr_first) begin
        do_write = hdr_accept;
        wsel     = hdr_swap ? ~wp : wp;
        waddr    = hdr_swap ? '0 : cnt[wp][AW-1:0];
      end else begin
        do_write = in_rec;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (do_write) mem[{wsel, waddr}] <= wr_data;
    rd_data <= mem[{rp, rd_addr}];
  end

  // next page state
  logic [1:0]    full_n;
  logic [CW-1:0] cnt_n [2];
  logic          wp_n, rp_n;
  logic          in_rec_n, dropping_n, flush_pend_n;
  logic          rec_end, want_flush, count_drop;

  always_comb begin
    full_n     = full;
    cnt_n      = cnt;
    wp_n       = wp;
    rp_n       = rp;
    in_rec_n   = in_rec;
    dropping_n = dropping;
    rec_end    = 1'b0;
    count_drop = 1'b0;

    // MCU frees the ready page
    if (release_page && full[rp]) begin
      full_n[rp] = 1'b0;
      cnt_n[rp]  = '0;
      rp_n       = ~rp;
    end

    if (wr_valid && wr_first) begin
      if (hdr_accept) begin
        if (hdr_swap) begin
          if (!full[wp] && cnt[wp] != '0) full_n[wp] = 1'b1;
          wp_n = ~wp;
        end
        cnt_n[wp_n] = cnt_n[wp_n] + 1'b1;
        in_rec_n    = !wr_last;
        rec_end     = wr_last;
        dropping_n  = 1'b0;
      end else begin
        if (!full[wp] && cnt[wp] != '0) full_n[wp] = 1'b1;
        in_rec_n   = 1'b0;
        dropping_n = !wr_last;
        count_drop = 1'b1;
      end
    end else if (wr_valid && in_rec) begin
      cnt_n[wp] = cnt_n[wp] + 1'b1;
      if (wr_last) begin
        in_rec_n = 1'b0;
        rec_end  = 1'b1;
      end
    end else if (wr_valid && dropping && wr_last) begin
      dropping_n = 1'b0;
    end

    // close the filling page when the next record may not fit, or on a
    // flush once no record is in progress
    want_flush = flush || flush_pend;
    if (!full_n[wp_n] && cnt_n[wp_n] != '0 &&
        ((rec_end && cnt_n[wp_n] + CW'(REC_WORDS) > CW'(PAGE_WORDS)) ||
         (want_flush && !in_rec_n)))
      full_n[wp_n] = 1'b1;
    flush_pend_n = want_flush && in_rec_n;
    // writing moves on to the other page as soon as the filling one closes
    if (full_n[wp_n] && !full_n[~wp_n]) wp_n = ~wp_n;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt        <= '{default: '0};
      full       <= '0;
      wp         <= 1'b0;
      rp         <= 1'b0;
      in_rec     <= 1'b0;
      dropping   <= 1'b0;
      flush_pend <= 1'b0;
      drop_count <= '0;
    end else begin
      cnt        <= cnt_n;
      full       <= full_n;
      wp         <= wp_n;
      rp         <= rp_n;
      in_rec     <= in_rec_n;
      dropping   <= dropping_n;
      flush_pend <= flush_pend_n;
      if (count_drop && drop_count != '1) drop_count <= drop_count + 1'b1;
    end
  end

  assign page_ready  = full[rp];
  assign ready_page  = rp;
  assign ready_count = cnt[rp];

  initial begin
    assert (PAGE_WORDS == 2**AW) else $error("PAGE_WORDS must be a power of two");
    assert (REC_WORDS <= PAGE_WORDS) else $error("a record must fit in a page");
  end

endmodule
