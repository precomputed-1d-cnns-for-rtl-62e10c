// af_accelerator_full_tb: one complete inference of the accelerator at its
// default configuration (5000-sample window, 98 outputs, the paper's BIG
// network) through the SPI pins. The host loads an irregular-rhythm
// ECG-like window, starts, waits for done, reads the 98 results and
// compares them with the reference network. The clock count from start to
// done must be one clock per sample plus a short drain.
module af_accelerator_full_tb;
  import tb_ref_pkg::*;
  import pcnn_pkg::*;
  localparam int unsigned N    = pcnn_pkg::N_SAMPLES;
  localparam int unsigned OUTS = pcnn_pkg::net_out_len(N, 10, 6, 8, 6, 3, 2, 4);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle++;

  logic sclk, cs_n, mosi, miso, done;

  spi_master_bfm #(.HALF(40)) host (.sclk, .cs_n, .mosi, .miso);
  af_accelerator dut (
    .clk, .rst_n, .spi_sclk(sclk), .spi_cs_n(cs_n), .spi_mosi(mosi), .spi_miso(miso), .done);

  longint start_at = 0, done_at = 0;
  logic prev_done = 0;
  always @(posedge clk) begin
    if (rst_n) begin
      if (dut.start && !dut.busy) start_at = cycle;
      if (done && !prev_done) done_at = cycle;
      prev_done = done;
    end
  end

  initial begin
    iseq_t       x, e;
    logic [7:0]  r;
    int unsigned inv_events, n_af;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    repeat (3) @(posedge clk);
    x = ecg_signal(N, 1, 3);
    host.frame_begin();
    host.xfer(CMD_WRITE_INPUT, r);
    host.xfer(8'h00, r);
    host.xfer(8'h00, r);
    foreach (x[i]) begin
      host.xfer(8'(x[i] >> 8), r);
      host.xfer(8'(x[i]), r);
    end
    host.frame_end();
    host.frame_begin();
    host.xfer(CMD_START, r);
    host.frame_end();
    wait (done);
    e = ref_network(pcnn_pkg::DEF_SEED, x, inv_events);
    checks++;
    if (e.size() != OUTS || OUTS != 98) begin
      failures++;
      $display("reference %0d outputs, expected %0d", e.size(), OUTS);
    end
    n_af = 0;
    host.frame_begin();
    host.xfer(CMD_READ_OUTPUT, r);
    host.xfer(8'h00, r);
    host.xfer(8'h00, r);
    for (int i = 0; i < OUTS; i++) begin
      host.xfer(8'h00, r);
      if (r[7]) n_af++;
      checks++;
      if (r !== 8'(e[i])) begin
        failures++;
        $display("output %0d got %0d exp %0d", i, r, e[i]);
      end
    end
    host.frame_end();
    checks++;
    if (done_at - start_at < longint'(N) + 1 || done_at - start_at > longint'(N) + 20) begin
      failures++;
      $display("inference took %0d clocks", done_at - start_at);
    end
    $display("inference: %0d samples, %0d clocks from start to done, %0d of %0d steps >= 0.5",
             N, done_at - start_at, n_af, OUTS);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
