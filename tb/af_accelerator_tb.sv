// af_accelerator_tb: end-to-end test of the accelerator through its SPI
// pins, at a reduced window (N_SAMPLES = 1000) and REPEAT = 2 so that the
// repeated-inference mode is exercised. The testbench acts as the host MCU:
// it loads an irregular-rhythm ECG-like window in two SPI frames, polls the
// status, sends START, sends a second START while busy (must be ignored),
// waits for the done pin, reads all results back and compares them with the
// reference network. A second, regular-rhythm window follows to show that
// the windows are cleared between runs.
// Mechanisms counted (each must occur): windows filled from empty after a
// clear, pooling decimation, sign-inverted pooling changing a result,
// repeated inference, start ignored while busy, busy seen in the status
// byte, done pin. The clock count per inference is checked against one
// clock per sample plus the pipeline drain.
module af_accelerator_tb;
  import tb_ref_pkg::*;
  import pcnn_pkg::*;
  localparam int unsigned N      = 1000;
  localparam int unsigned REPEAT = 2;
  localparam int unsigned OUTS   = pcnn_pkg::net_out_len(N, 10, 6, 8, 6, 3, 2, 4);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle++;

  logic sclk, cs_n, mosi, miso, done;

  spi_master_bfm #(.HALF(40)) host (.sclk, .cs_n, .mosi, .miso);
  af_accelerator #(.N_SAMPLES(N), .REPEAT(REPEAT)) dut (
    .clk, .rst_n, .spi_sclk(sclk), .spi_cs_n(cs_n), .spi_mosi(mosi), .spi_miso(miso), .done);

  // mechanism counters
  int n_clear = 0, n_ignored_start = 0, n_busy_status = 0, n_done = 0, n_inv = 0, n_pool = 0;
  longint start_at = 0, run_cycles = 0;
  logic prev_done = 0;
  always @(posedge clk) begin
    if (rst_n) begin
      if (dut.net_clear) n_clear++;
      if (dut.start && dut.busy) n_ignored_start++;
      if (dut.start && !dut.busy) start_at = cycle;
      if (done && !prev_done) begin n_done++; run_cycles = cycle - start_at; end
      prev_done = done;
    end
  end

  task automatic write_samples(iseq_t x, int from, int to);
    logic [7:0] r;
    host.frame_begin();
    host.xfer(CMD_WRITE_INPUT, r);
    host.xfer(8'(from >> 8), r);
    host.xfer(8'(from), r);
    for (int i = from; i < to; i++) begin
      host.xfer(8'(x[i] >> 8), r);
      host.xfer(8'(x[i]), r);
    end
    host.frame_end();
  endtask

  task automatic status(output logic [7:0] s);
    logic [7:0] r;
    host.frame_begin();
    host.xfer(CMD_STATUS, r);
    host.xfer(8'h00, s);
    host.frame_end();
  endtask

  task automatic start_cmd();
    logic [7:0] r;
    host.frame_begin();
    host.xfer(CMD_START, r);
    host.frame_end();
  endtask

  task automatic run_window(iseq_t x);
    iseq_t       e;
    logic [7:0]  s, r;
    int unsigned inv_events;
    write_samples(x, 0, N / 2);
    write_samples(x, N / 2, N);
    start_cmd();
    status(s);
    if (s[1]) n_busy_status++;
    start_cmd();                       // while busy: ignored
    wait (done);
    status(s);
    checks++;
    if (s !== 8'b01) begin failures++; $display("status after run %h", s); end
    e = ref_network(pcnn_pkg::DEF_SEED, x, inv_events);
    n_inv += inv_events;
    checks++;
    if (e.size() != OUTS) begin failures++; $display("reference gives %0d outputs", e.size()); end
    host.frame_begin();
    host.xfer(CMD_READ_OUTPUT, r);
    host.xfer(8'h00, r);
    host.xfer(8'h00, r);
    for (int i = 0; i < OUTS; i++) begin
      host.xfer(8'h00, r);
      checks++;
      if (r !== 8'(e[i])) begin
        failures++;
        $display("output %0d got %0d exp %0d", i, r, e[i]);
      end
    end
    host.frame_end();
    n_pool += OUTS;
    // REPEAT inferences, each one clock per sample plus a short drain
    checks++;
    if (run_cycles < REPEAT * (N + 1) || run_cycles > REPEAT * (N + 20)) begin
      failures++;
      $display("run took %0d clocks", run_cycles);
    end
    $display("window: %0d outputs, %0d clocks for %0d inferences", OUTS, run_cycles, REPEAT);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    repeat (3) @(posedge clk);
    run_window(ecg_signal(N, 1, 5));
    run_window(ecg_signal(N, 0, 9));
    checks += 6;
    if (n_clear != 2 * REPEAT)  begin failures++; $display("window clears %0d", n_clear); end
    if (n_ignored_start != 2)   begin failures++; $display("ignored starts %0d", n_ignored_start); end
    if (n_busy_status == 0)     begin failures++; $display("busy never seen"); end
    if (n_done != 2)            begin failures++; $display("done pulses %0d", n_done); end
    if (n_inv == 0)             begin failures++; $display("sign inversion never mattered"); end
    if (n_pool == 0)            begin failures++; $display("no pooled output"); end
    $display("mechanisms: clears=%0d (repeat runs=%0d) ignored starts=%0d busy seen=%0d done=%0d inverted-pool effects=%0d outputs=%0d",
             n_clear, n_clear - 2, n_ignored_start, n_busy_status, n_done, n_inv, n_pool);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
