// linear_sigmoid_tb: applies all 4096 binary feature vectors and compares
// the quantized probability with the reference linear + hard sigmoid;
// checks the one-clock latency and that both decisions (>= 0.5, < 0.5)
// occur.
module linear_sigmoid_tb;
  import tb_ref_pkg::*;
  localparam int unsigned SEED = pcnn_pkg::DEF_SEED;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  logic [11:0] in_data = '0;
  logic out_valid;
  logic [7:0] out_prob;
  int checks = 0, failures = 0;
  int n_af = 0, n_sr = 0, n_out = 0;
  logic prev_valid = 0;
  logic [11:0] prev_x;
  int unsigned e;

  always #5 clk = ~clk;

  linear_sigmoid #(.SEED(SEED)) dut (.clk, .rst_n, .in_valid, .in_data, .out_valid, .out_prob);

  always @(posedge clk) begin
    if (rst_n) begin
      checks++;
      if (out_valid !== prev_valid) begin failures++; $display("latency mismatch"); end
      if (out_valid) begin
        e = ref_prob(SEED, pcnn_pkg::LAYER_OUT, 64'(prev_x), 12, 8);
        checks++;
        n_out++;
        if (out_prob[7]) n_af++; else n_sr++;
        if (out_prob !== 8'(e)) begin
          failures++;
          $display("x=%h got=%0d exp=%0d", prev_x, out_prob, e);
        end
      end
      prev_valid <= in_valid;
      prev_x     <= in_data;
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int x = 0; x < 4096; x++) begin
      in_valid <= 1;
      in_data  <= 12'(x);
      @(posedge clk);
      if ($urandom_range(0, 5) == 0) begin in_valid <= 0; @(posedge clk); end
    end
    in_valid <= 0;
    repeat (3) @(posedge clk);
    checks++;
    if (n_out != 4096 || n_af == 0 || n_sr == 0) begin
      failures++;
      $display("outputs=%0d af=%0d sr=%0d", n_out, n_af, n_sr);
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
