// spi_slave_tb: a mode-0 SPI master exchanges random bytes with the slave
// in several frames. Checks that every MOSI byte appears once on rx_valid,
// that MISO returns the byte presented on tx_byte (the first one at CS_N
// fall, later ones after each completed byte), and that frame_start and
// frame_end pulse once per frame.
module spi_slave_tb;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic       sclk, cs_n, mosi, miso;
  logic       frame_start, frame_end, rx_valid;
  logic [7:0] rx_byte, tx_byte;

  spi_master_bfm #(.HALF(40)) bfm (.sclk, .cs_n, .mosi, .miso);
  spi_slave dut (.clk, .rst_n, .sclk, .cs_n, .mosi, .miso, .frame_start, .frame_end,
                 .rx_valid, .rx_byte, .tx_byte);

  logic [7:0] rx_seen[$];
  int n_start = 0, n_end = 0;
  logic [7:0] tx_next;

  // the "user" presents a new transmit byte after each received byte
  always @(posedge clk) begin
    if (rx_valid) begin
      rx_seen.push_back(rx_byte);
      tx_byte <= tx_next;
    end
    if (frame_start && rst_n) n_start++;
    if (frame_end && rst_n) n_end++;
  end

  initial begin
    logic [7:0] sent[$], expect_miso[$], got;
    tx_byte = 8'hA5;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    repeat (3) @(posedge clk);
    for (int f = 0; f < 4; f++) begin
      sent = {}; rx_seen = {};
      tx_byte = 8'($urandom);
      expect_miso = {tx_byte};
      bfm.frame_begin();
      for (int b = 0; b < 6; b++) begin
        logic [7:0] t;
        t = 8'($urandom);
        tx_next = 8'($urandom);
        expect_miso.push_back(tx_next);
        sent.push_back(t);
        bfm.xfer(t, got);
        checks++;
        if (got !== expect_miso[b]) begin
          failures++;
          $display("frame %0d byte %0d: miso %h expected %h", f, b, got, expect_miso[b]);
        end
      end
      bfm.frame_end();
      checks++;
      if (rx_seen.size() != sent.size()) begin
        failures++;
        $display("frame %0d: %0d bytes received, %0d sent", f, rx_seen.size(), sent.size());
      end
      foreach (sent[i]) begin
        checks++;
        if (i < rx_seen.size() && rx_seen[i] !== sent[i]) begin
          failures++;
          $display("frame %0d byte %0d: rx %h sent %h", f, i, rx_seen[i], sent[i]);
        end
      end
    end
    checks++;
    if (n_start != 4 || n_end != 4) begin
      failures++;
      $display("frame pulses start=%0d end=%0d", n_start, n_end);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
