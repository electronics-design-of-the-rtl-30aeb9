// spi_master_bfm -- SPI master model standing in for a wuBase MCU in testbenches.
//
// Mode 0, MSB first, SCLK half period HALF (default 40 ns: 12.5 MHz, one
// eighth of a 100 MHz simulation clock). Tasks issue the wuBase FPGA
// commands of gen2_pkg and return what the FPGA sends back.
module spi_master_bfm
  import gen2_pkg::*;
#(
  parameter time HALF = 40ns
) (
  output logic sclk,
  output logic cs_n,
  output logic mosi,
  input  logic miso
);

  initial begin
    sclk = 0;
    cs_n = 1;
    mosi = 0;
  end

  task automatic xfer_byte(input logic [7:0] tx, output logic [7:0] rx);
    for (int b = 7; b >= 0; b--) begin
      mosi = tx[b];
      #HALF sclk = 1; rx[b] = miso;
      #HALF sclk = 0;
    end
  endtask

  task automatic xfer_word(output word_t w);
    logic [7:0] r;
    for (int i = 0; i < 4; i++) begin xfer_byte(8'h00, r); w = {w[23:0], r}; end
  endtask

  task automatic begin_cmd(spi_cmd_e cmd);
    logic [7:0] r;
    cs_n = 0;
    #HALF;
    xfer_byte(cmd, r);
  endtask

  task automatic end_cmd();
    #HALF cs_n = 1;
    #(4*HALF);
  endtask

  task automatic simple(spi_cmd_e cmd);
    begin_cmd(cmd);
    end_cmd();
  endtask

  task automatic status(output word_t w);
    begin_cmd(CMD_STATUS);
    xfer_word(w);
    end_cmd();
  endtask

  task automatic set_threshold(adc_t thr);
    logic [7:0] r;
    begin_cmd(CMD_SET_THR);
    xfer_byte({4'h0, thr[11:8]}, r);
    xfer_byte(thr[7:0], r);
    end_cmd();
  endtask

  // read n words of the ready page into q
  task automatic read_page(int n, ref word_t q[$]);
    word_t w;
    q.delete();
    begin_cmd(CMD_READ);
    for (int i = 0; i < n; i++) begin xfer_word(w); q.push_back(w); end
    end_cmd();
  endtask

endmodule
