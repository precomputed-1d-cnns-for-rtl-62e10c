// precomputed_conv_tb: streams random binary vectors (with random idle
// clocks) through three precomputed_conv configurations and compares every
// output with the reference grouped convolution computed from the weights:
//   A (12, K=6,  G=12, 12)  depthwise alpha of the network's later blocks
//   B (12, K=1,  G=1,  12)  pointwise beta, 12-bit fan-in
//   C ( 4, K=2,  G=2,   2)  grouped example with two channels per group
// Each configuration runs two sequences separated by a clear; the number of
// outputs (L-K+1) and the one-clock latency after the completing input are
// checked as well.
module precomputed_conv_tb;
  import tb_ref_pkg::*;
  localparam int unsigned SEED = 77;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle++;

  // ------------------------------------------------------------------ DUTs
  logic        clear = 0, in_valid = 0;
  logic [11:0] in_data = '0;
  logic        va, vb, vc;
  logic [11:0] da, db;
  logic [1:0]  dc;

  precomputed_conv #(.C_IN(12), .K(6), .G(12), .C_OUT(12), .SEED(SEED), .LAYER(3)) dut_a (
    .clk, .rst_n, .clear, .in_valid, .in_data, .out_valid(va), .out_data(da));
  precomputed_conv #(.C_IN(12), .K(1), .G(1), .C_OUT(12), .SEED(SEED), .LAYER(4)) dut_b (
    .clk, .rst_n, .clear, .in_valid, .in_data, .out_valid(vb), .out_data(db));
  precomputed_conv #(.C_IN(4), .K(2), .G(2), .C_OUT(2), .SEED(SEED), .LAYER(5)) dut_c (
    .clk, .rst_n, .clear, .in_valid, .in_data(in_data[3:0]), .out_valid(vc), .out_data(dc));

  seq_t   in_q, out_a, out_b, out_c;
  longint in_t[$], t_a[$], t_b[$], t_c[$];

  always @(posedge clk) begin
    if (rst_n) begin
      if (va) begin out_a.push_back(64'(da)); t_a.push_back(cycle); end
      if (vb) begin out_b.push_back(64'(db)); t_b.push_back(cycle); end
      if (vc) begin out_c.push_back(64'(dc)); t_c.push_back(cycle); end
      if (in_valid && !clear) begin in_q.push_back(64'(in_data)); in_t.push_back(cycle); end
    end
  end

  task automatic compare(string name, seq_t got, longint got_t[$], seq_t in_s, int unsigned c_in,
                         int unsigned k, int unsigned g, int unsigned c_out, int unsigned layer);
    seq_t e;
    seq_t in_m;
    foreach (in_s[i]) in_m.push_back(in_s[i] & ((64'd1 << c_in) - 1));
    e = ref_conv(SEED, layer, in_m, c_in, k, g, c_out);
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
      if (got_t[i] != in_t[i + k - 1] + 1) begin
        failures++;
        $display("%s: output %0d at cycle %0d, input at %0d", name, i, got_t[i], in_t[i+k-1]);
      end
    end
  endtask

  task automatic run_sequence(int unsigned len);
    in_q = {}; in_t = {}; out_a = {}; out_b = {}; out_c = {};
    t_a = {}; t_b = {}; t_c = {};
    clear <= 1; @(posedge clk); clear <= 0;
    for (int unsigned i = 0; i < len; i++) begin
      in_valid <= 1;
      in_data  <= 12'($urandom);
      @(posedge clk);
      if ($urandom_range(0, 3) == 0) begin
        in_valid <= 0;
        repeat ($urandom_range(1, 3)) @(posedge clk);
      end
    end
    in_valid <= 0;
    repeat (3) @(posedge clk);
    compare("A", out_a, t_a, in_q, 12, 6, 12, 12, 3);
    compare("B", out_b, t_b, in_q, 12, 1, 1, 12, 4);
    compare("C", out_c, t_c, in_q, 4, 2, 2, 2, 5);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    run_sequence(300);
    run_sequence(57);
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
