// spi_slave: byte-level SPI slave, mode 0 (CPOL = 0, CPHA = 0), MSB first.
//
// The host microcontroller controls the accelerator over SPI. All SPI pins
// are sampled by the system clock through two-flop synchronisers, so the
// design has a single clock domain; SCLK must be at most clk/8.
//
// Receive: MOSI is shifted in on each rising SCLK edge; after eight bits
// rx_valid pulses for one clock with rx_byte. Transmit: tx_byte is loaded
// into the shift register when CS_N falls and on the falling SCLK edge
// that follows each complete byte, otherwise the register shifts on every
// falling edge; MISO is its MSB. The user therefore has to present the
// next byte to send within a few clocks after rx_valid. frame_start /
// frame_end pulse when CS_N falls / rises. MISO is driven all the time
// (no tri-state). The SPI mode, framing and synchronous sampling are this
// design's choices; the paper only states that control is via SPI.
module spi_slave (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       sclk,
  input  logic       cs_n,
  input  logic       mosi,
  output logic       miso,
  output logic       frame_start,
  output logic       frame_end,
  output logic       rx_valid,
  output logic [7:0] rx_byte,
  input  logic [7:0] tx_byte
);

  logic [2:0] sclk_q;
  logic [2:0] cs_q;
  logic [1:0] mosi_q;
  logic       sclk_rise, sclk_fall, active;
  logic [2:0] bitcnt;
  logic [6:0] rxsr;
  logic [7:0] txsr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sclk_q <= '0;
      cs_q   <= '1;
      mosi_q <= '0;
    end else begin
      sclk_q <= {sclk_q[1:0], sclk};
      cs_q   <= {cs_q[1:0], cs_n};
      mosi_q <= {mosi_q[0], mosi};
    end
  end

  assign sclk_rise   =  sclk_q[1] && !sclk_q[2];
  assign sclk_fall   = !sclk_q[1] &&  sclk_q[2];
  assign active      = !cs_q[1];
  assign frame_start = !cs_q[1] &&  cs_q[2];
  assign frame_end   =  cs_q[1] && !cs_q[2];
  assign miso        = txsr[7];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bitcnt   <= '0;
      rxsr     <= '0;
      txsr     <= '0;
      rx_valid <= 1'b0;
      rx_byte  <= '0;
    end else begin
      rx_valid <= 1'b0;
      if (frame_start) begin
        bitcnt <= '0;
        txsr   <= tx_byte;
      end else if (active && sclk_rise) begin
        rxsr   <= {rxsr[5:0], mosi_q[1]};
        bitcnt <= bitcnt + 1'b1;
        if (bitcnt == 3'd7) begin
          rx_valid <= 1'b1;
          rx_byte  <= {rxsr[6:0], mosi_q[1]};
        end
      end else if (active && sclk_fall) begin
        if (bitcnt == 3'd0) txsr <= tx_byte;
        else                txsr <= {txsr[6:0], 1'b0};
      end
    end
  end

endmodule
