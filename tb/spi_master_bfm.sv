// spi_master_bfm: SPI mode-0 master used by the testbenches in place of
// the host microcontroller. SCLK half period is HALF time units; MISO is
// sampled on the rising edge, MOSI changes on the falling edge (and before
// the first rising edge after CS_N falls). Tasks: frame_begin, frame_end,
// xfer (one byte out, one byte in).
module spi_master_bfm #(
  parameter int HALF = 40
) (
  output logic sclk,
  output logic cs_n,
  output logic mosi,
  input  logic miso
);
  initial begin
    sclk = 1'b0;
    cs_n = 1'b1;
    mosi = 1'b0;
  end

  task automatic frame_begin();
    cs_n = 1'b0;
    #(HALF);
  endtask

  task automatic frame_end();
    #(HALF);
    cs_n = 1'b1;
    #(2 * HALF);
  endtask

  task automatic xfer(input logic [7:0] tx, output logic [7:0] rx);
    for (int i = 7; i >= 0; i--) begin
      mosi = tx[i];
      #(HALF);
      sclk  = 1'b1;
      rx[i] = miso;
      #(HALF);
      sclk  = 1'b0;
    end
  endtask
endmodule
