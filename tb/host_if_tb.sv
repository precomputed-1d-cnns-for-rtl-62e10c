// host_if_tb: drives the command decoder with byte streams as the SPI
// slave would deliver them (frame_start, rx_valid, rx_byte, a few clocks
// apart) and checks: sample writes (address, auto-increment, 12-bit data
// from two bytes), the start pulse, the status byte, output-buffer reads
// (address, auto-increment, data on tx_byte before the next byte), and that
// an unknown command and a new frame abort what was going on.
module host_if_tb;
  import pcnn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic        frame_start = 0, rx_valid = 0;
  logic [7:0]  rx_byte = '0, tx_byte;
  logic        in_we, out_re, start;
  logic [12:0] in_waddr;
  logic [11:0] in_wdata;
  logic [6:0]  out_raddr;
  logic [7:0]  out_rdata;
  logic        busy = 0, done = 0;

  host_if #(.IN_AW(13), .OUT_AW(7)) dut (.clk, .rst_n, .frame_start, .rx_valid, .rx_byte,
    .tx_byte, .in_we, .in_waddr, .in_wdata, .out_re, .out_raddr, .out_rdata, .start, .busy,
    .done);

  // output buffer model: registered read, entry a holds a ^ 8'h5A
  always @(posedge clk) if (out_re) out_rdata <= 8'(out_raddr) ^ 8'h5A;

  logic [11:0] written [int];
  int n_start = 0, n_writes = 0;
  always @(posedge clk) begin
    if (in_we && rst_n) begin written[int'(in_waddr)] = in_wdata; n_writes++; end
    if (start && rst_n) n_start++;
  end

  task automatic new_frame();
    frame_start <= 1; @(posedge clk); frame_start <= 0;
    repeat (3) @(posedge clk);
  endtask

  // send one byte; return what tx_byte holds 4 clocks later (when the
  // SPI slave would load it for the next byte)
  task automatic send(input logic [7:0] b, output logic [7:0] next_tx);
    rx_byte <= b; rx_valid <= 1; @(posedge clk); rx_valid <= 0;
    repeat (4) @(posedge clk);
    next_tx = tx_byte;
  endtask

  initial begin
    logic [7:0] t;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    repeat (2) @(posedge clk);

    // write 5 samples from address 0x0123
    new_frame();
    send(CMD_WRITE_INPUT, t); send(8'h01, t); send(8'h23, t);
    for (int i = 0; i < 5; i++) begin
      send(8'(i + 8'h0A), t);
      send(8'(i * 17), t);
    end
    checks++;
    if (n_writes != 5) begin failures++; $display("writes %0d", n_writes); end
    for (int i = 0; i < 5; i++) begin
      checks++;
      if (!written.exists(16'h0123 + i) || written[16'h0123 + i] !== 12'({4'(i + 10), 8'(i * 17)})) begin
        failures++;
        $display("sample %0d wrong", i);
      end
    end

    // status: first byte of a frame and the byte after CMD_STATUS
    busy = 1; done = 0;
    new_frame();
    checks++;
    if (tx_byte !== 8'b10) begin failures++; $display("frame status %h", tx_byte); end
    send(CMD_STATUS, t);
    checks++;
    if (t !== 8'b10) begin failures++; $display("status %h", t); end
    busy = 0; done = 1;
    new_frame();
    send(CMD_STATUS, t);
    checks++;
    if (t !== 8'b01) begin failures++; $display("status %h", t); end

    // start
    new_frame();
    send(CMD_START, t);
    checks++;
    if (n_start != 1) begin failures++; $display("start pulses %0d", n_start); end

    // read 6 outputs from address 0x0010
    new_frame();
    send(CMD_READ_OUTPUT, t); send(8'h00, t); send(8'h10, t);
    for (int i = 0; i < 6; i++) begin
      checks++;
      if (t !== (8'(16 + i) ^ 8'h5A)) begin
        failures++;
        $display("read %0d got %h", i, t);
      end
      send(8'h00, t);
    end

    // unknown command: nothing happens, even if write-like bytes follow
    new_frame();
    send(8'h7E, t); send(CMD_START, t); send(8'h00, t); send(8'h00, t);
    checks++;
    if (n_start != 1 || n_writes != 5) begin failures++; $display("unknown command acted"); end

    // a new frame aborts a write in progress
    new_frame();
    send(CMD_WRITE_INPUT, t); send(8'h00, t);
    new_frame();
    send(CMD_START, t);
    checks++;
    if (n_start != 2 || n_writes != 5) begin failures++; $display("frame abort failed"); end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
