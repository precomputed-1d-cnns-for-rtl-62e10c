// split_conv_block_tb: random binary streams through two Split
// Convolutional Blocks and comparison with the reference pair of grouped
// convolutions:
//   N  (12, 6, 12, 12, 1, 1, 12)  the network's later blocks
//   X  ( 6, 2,  3,  6, 1, 2,  2)  the split of the paper's connectivity
//                                 example (c_a=6, g_a=3, f_a=6, g_b=2, f_b=2)
// Output count (L-K+1) and the two-clock latency are checked too.
module split_conv_block_tb;
  import tb_ref_pkg::*;
  localparam int unsigned SEED = 5;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle++;

  logic        clear = 0, in_valid = 0;
  logic [11:0] in_data = '0;
  logic        vn, vx;
  logic [11:0] dn;
  logic [1:0]  dx;

  split_conv_block #(.C_IN(12), .K(6), .G_A(12), .F_A(12), .G_B(1), .F_B(12), .SEED(SEED),
                     .LAYER_A(3), .LAYER_B(4)) dut_n (
    .clk, .rst_n, .clear, .in_valid, .in_data, .out_valid(vn), .out_data(dn));
  split_conv_block #(.C_IN(6), .K(2), .G_A(3), .F_A(6), .G_B(2), .F_B(2), .SEED(SEED),
                     .LAYER_A(5), .LAYER_B(6)) dut_x (
    .clk, .rst_n, .clear, .in_valid, .in_data(in_data[5:0]), .out_valid(vx), .out_data(dx));

  seq_t   in_q, out_n, out_x;
  longint in_t[$], t_n[$], t_x[$];

  always @(posedge clk) begin
    if (rst_n) begin
      if (vn) begin out_n.push_back(64'(dn)); t_n.push_back(cycle); end
      if (vx) begin out_x.push_back(64'(dx)); t_x.push_back(cycle); end
      if (in_valid && !clear) begin in_q.push_back(64'(in_data)); in_t.push_back(cycle); end
    end
  end

  task automatic compare(string name, seq_t got, longint got_t[$], int unsigned c_in,
                         int unsigned k, int unsigned ga, int unsigned fa, int unsigned gb,
                         int unsigned fb, int unsigned la, int unsigned lb);
    seq_t e, m;
    foreach (in_q[i]) m.push_back(in_q[i] & ((64'd1 << c_in) - 1));
    e = ref_conv(SEED, la, m, c_in, k, ga, fa);
    e = ref_conv(SEED, lb, e, fa, 1, gb, fb);
    checks++;
    if (got.size() != e.size()) begin
      failures++;
      $display("%s: %0d outputs, expected %0d", name, got.size(), e.size());
    end
    for (int i = 0; i < got.size() && i < e.size(); i++) begin
      checks += 2;
      if (got[i] !== e[i]) begin
        failures++;
        $display("%s: output %0d got %h exp %h", name, i, got[i], e[i]);
      end
      if (got_t[i] != in_t[i + k - 1] + 2) begin
        failures++;
        $display("%s: output %0d wrong latency", name, i);
      end
    end
  endtask

  task automatic run_sequence(int unsigned len);
    in_q = {}; in_t = {}; out_n = {}; out_x = {}; t_n = {}; t_x = {};
    clear <= 1; @(posedge clk); clear <= 0;
    for (int unsigned i = 0; i < len; i++) begin
      in_valid <= 1;
      in_data  <= 12'($urandom);
      @(posedge clk);
      if ($urandom_range(0, 3) == 0) begin in_valid <= 0; @(posedge clk); end
    end
    in_valid <= 0;
    repeat (4) @(posedge clk);
    compare("N", out_n, t_n, 12, 6, 12, 12, 1, 12, 3, 4);
    compare("X", out_x, t_x, 6, 2, 3, 6, 2, 2, 5, 6);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    run_sequence(250);
    run_sequence(40);
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
