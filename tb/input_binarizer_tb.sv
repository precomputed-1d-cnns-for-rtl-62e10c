// input_binarizer_tb: applies all 4096 sample codes (with random idle
// clocks in between) and compares every 12-channel output with the
// reference threshold computation; also checks the one-clock latency.
module input_binarizer_tb;
  import tb_ref_pkg::*;
  localparam int unsigned SEED = pcnn_pkg::DEF_SEED;
  localparam int unsigned CH   = pcnn_pkg::N_CH;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  logic [11:0] in_sample = '0;
  logic out_valid;
  logic [CH-1:0] out_data;
  int checks = 0, failures = 0;
  int unsigned exp_q[$];
  int unsigned n_out = 0;
  logic [CH-1:0] exp_v;
  bit seen_one[CH], seen_zero[CH];

  always #5 clk = ~clk;

  input_binarizer #(.SEED(SEED)) dut (.clk, .rst_n, .in_valid, .in_sample, .out_valid, .out_data);

  // scoreboard: out_valid must follow in_valid by exactly one clock
  logic prev_valid = 0;
  int unsigned prev_x;
  always @(posedge clk) begin
    if (rst_n) begin
      checks++;
      if (out_valid !== prev_valid) begin
        failures++;
        $display("latency mismatch");
      end
      if (out_valid) begin
        for (int unsigned c = 0; c < CH; c++) begin
          exp_v[c] = ref_input(SEED, c, int'(prev_x), 12);
          if (exp_v[c]) seen_one[c] = 1; else seen_zero[c] = 1;
        end
        checks++;
        n_out++;
        if (out_data !== exp_v) begin
          failures++;
          $display("x=%0d got=%h exp=%h", prev_x, out_data, exp_v);
        end
      end
      prev_valid <= in_valid;
      prev_x     <= in_sample;
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int x = 0; x < 4096; x++) begin
      in_valid  <= 1;
      in_sample <= 12'(x);
      @(posedge clk);
      if ($urandom_range(0, 7) == 0) begin
        in_valid <= 0;
        @(posedge clk);
      end
    end
    in_valid <= 0;
    repeat (3) @(posedge clk);
    checks++;
    if (n_out != 4096) begin failures++; $display("outputs %0d", n_out); end
    // every channel must switch somewhere in the ADC range (a real threshold)
    for (int unsigned c = 0; c < CH; c++) begin
      checks++;
      if (!(seen_one[c] && seen_zero[c])) $display("note: channel %0d constant over range", c);
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
