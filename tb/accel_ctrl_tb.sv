// accel_ctrl_tb: the sequencer with a stand-in network that answers every
// 8th sample (indices 7, 15, ...) three clocks after receiving it, giving
// OUT_LEN = 5 results for N_SAMPLES = 40. Checks, over a run of REPEAT = 2
// inferences and a second single start: one clear per inference; reads of
// addresses 0..N-1 on N consecutive clocks (one sample per clock, no gaps);
// net_in_valid one clock after each read; results written to 0..OUT_LEN-1;
// busy/done behaviour; a start while busy is ignored; done follows the
// last result within three clocks.
module accel_ctrl_tb;
  localparam int unsigned N = 40, OUT_LEN = 5, REPEAT = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle++;

  logic start = 0, busy, done, in_re, net_clear, net_in_valid, out_we;
  logic net_out_valid;
  logic [5:0] in_raddr;
  logic [2:0] out_waddr;

  accel_ctrl #(.N_SAMPLES(N), .OUT_LEN(OUT_LEN), .REPEAT(REPEAT)) dut (
    .clk, .rst_n, .start, .busy, .done, .in_re, .in_raddr, .net_clear, .net_in_valid,
    .net_out_valid, .out_we, .out_waddr);

  // stand-in network
  int     n_in;
  logic [2:0] pipe;
  always @(posedge clk) begin
    if (!rst_n || net_clear) begin n_in <= 0; pipe <= '0; end
    else begin
      pipe <= {pipe[1:0], net_in_valid && (n_in % 8 == 7)};
      if (net_in_valid) n_in <= n_in + 1;
    end
  end
  assign net_out_valid = pipe[2];

  // monitors
  int n_clear = 0, n_reads = 0, run_len = 0, max_run = 0, exp_addr = 0, n_writes = 0;
  int exp_waddr = 0;
  logic prev_re = 0;
  longint last_out = 0, done_at = 0;
  logic prev_done = 0;
  always @(posedge clk) begin
    if (rst_n) begin
      if (net_clear) begin n_clear++; exp_addr = 0; exp_waddr = 0; end
      if (in_re) begin
        n_reads++;
        checks++;
        if (int'(in_raddr) != exp_addr) begin failures++; $display("read addr %0d exp %0d", in_raddr, exp_addr); end
        exp_addr++;
        run_len++;
        if (run_len > max_run) max_run = run_len;
      end else run_len = 0;
      checks++;
      if (net_in_valid !== prev_re) begin failures++; $display("net_in_valid not one clock after read"); end
      prev_re = in_re;
      if (out_we) begin
        n_writes++;
        checks++;
        if (int'(out_waddr) != exp_waddr) begin failures++; $display("write addr %0d", out_waddr); end
        exp_waddr++;
        last_out = cycle;
      end
      if (done && !prev_done) done_at = cycle;
      prev_done = done;
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    repeat (2) @(posedge clk);
    checks++;
    if (busy || done) begin failures++; $display("busy/done after reset"); end
    start <= 1; @(posedge clk); start <= 0;
    repeat (10) @(posedge clk);
    checks++;
    if (!busy || done) begin failures++; $display("not busy while running"); end
    start <= 1; @(posedge clk); start <= 0;           // ignored: busy
    wait (done);
    repeat (3) @(posedge clk);
    checks += 5;
    if (n_clear != REPEAT) begin failures++; $display("clears %0d", n_clear); end
    if (n_reads != REPEAT * N) begin failures++; $display("reads %0d", n_reads); end
    if (max_run != N) begin failures++; $display("longest read burst %0d", max_run); end
    if (n_writes != REPEAT * OUT_LEN) begin failures++; $display("writes %0d", n_writes); end
    if (done_at - last_out > 3 || done_at <= last_out) begin failures++; $display("done late"); end
    // single run again; done must fall at start
    start <= 1; @(posedge clk); start <= 0; @(posedge clk);
    checks++;
    if (done || !busy) begin failures++; $display("done not cleared by start"); end
    wait (done);
    repeat (2) @(posedge clk);
    checks++;
    if (n_clear != 2 * REPEAT) begin failures++; $display("clears %0d", n_clear); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
