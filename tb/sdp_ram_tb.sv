// sdp_ram_tb: random writes and reads against an associative-array model,
// including reads in the same clock as a write to the same address (old
// data expected) and the one-clock read latency with data held while re
// is low.
module sdp_ram_tb;
  localparam int unsigned W = 12, DEPTH = 100, AW = 7;
  logic clk = 0;
  logic we = 0, re = 0;
  logic [AW-1:0] waddr = '0, raddr = '0;
  logic [W-1:0] wdata = '0, rdata;
  logic [W-1:0] model [DEPTH];
  logic [W-1:0] expect_q;
  logic         expect_v = 0;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  sdp_ram #(.W(W), .DEPTH(DEPTH), .AW(AW)) dut (.clk, .we, .waddr, .wdata, .re, .raddr, .rdata);

  always @(posedge clk) begin
    if (expect_v) begin
      checks++;
      if (rdata !== expect_q) begin
        failures++;
        $display("read mismatch got=%h exp=%h", rdata, expect_q);
      end
    end
    if (re) begin
      expect_q <= model[raddr];
      expect_v <= 1;
    end
    if (we) model[waddr] <= wdata;
  end

  initial begin
    // fill memory first so every read has a defined model value
    for (int a = 0; a < DEPTH; a++) begin
      we <= 1; waddr <= AW'(a); wdata <= W'($urandom); re <= 0;
      @(posedge clk);
    end
    for (int i = 0; i < 3000; i++) begin
      we    <= ($urandom_range(0, 1) == 1);
      waddr <= AW'($urandom_range(0, DEPTH - 1));
      wdata <= W'($urandom);
      re    <= ($urandom_range(0, 2) != 0);
      raddr <= (i % 5 == 0) ? waddr : AW'($urandom_range(0, DEPTH - 1));
      @(posedge clk);
    end
    we <= 0; re <= 0;
    repeat (2) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
