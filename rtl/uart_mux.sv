// uart_mux -- UART multiplexer of a fanout board.
//
// The mini-mainboard (MMB) has one UART towards each fanout board and talks
// to one wuBase at a time. `sel` picks the wuBase: its receive line gets the
// MMB transmit line, and its transmit line drives the MMB receive line. All
// other wuBase receive lines are held at the UART idle level (high), and the
// MMB receive line is idle when `sel` names no port. The select is
// registered and only taken over while both directions of the current link
// are idle (high), so that switching never cuts a character in the middle of
// a bit; the MMB is expected to switch between messages.
//
// Timing: the data path is combinational; a new `sel` takes effect on the
// first clock on which both lines of the old link are high.
// From the paper: each fanout board multiplexes UART traffic between the MMB
// and the wuBases of its hemisphere. This design's choices: the binary
// select, the idle-gated switch-over, idle-high on unused lines.
module uart_mux #(
  parameter int N_PORTS = 9,                    // wuBases on this fanout
  parameter int SW      = $clog2(N_PORTS + 1)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [SW-1:0]      sel,               // requested wuBase, >= N_PORTS: none
  output logic [SW-1:0]      sel_active,        // wuBase now connected
  input  logic               host_tx,           // from the MMB
  output logic               host_rx,           // to the MMB
  output logic [N_PORTS-1:0] base_rx,           // to the wuBases
  input  logic [N_PORTS-1:0] base_tx            // from the wuBases
);

  logic cur_valid, link_idle;

  assign cur_valid = sel_active < SW'(N_PORTS);
  assign link_idle = host_tx && host_rx;

  always_comb begin
    host_rx = 1'b1;
    for (int i = 0; i < N_PORTS; i++) begin
      base_rx[i] = (cur_valid && sel_active == SW'(i)) ? host_tx : 1'b1;
      if (cur_valid && sel_active == SW'(i)) host_rx = base_tx[i];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                              sel_active <= '1;
    else if (sel != sel_active && link_idle) sel_active <= sel;
  end

endmodule
