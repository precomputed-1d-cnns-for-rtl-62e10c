// binary_maxpool_tb: random binary streams (biased so that windows of all
// ones and all zeros occur) through the two pooling shapes of the network,
// (8, 6) and (3, 2), each with a random sign-inversion mask. Outputs are
// compared with the reference pooling (OR per channel, AND for inverted
// channels); output count, one-clock latency after the input that closes a
// window, clearing between sequences, and that inverted channels really
// produced AND results different from OR are checked.
module binary_maxpool_tb;
  import tb_ref_pkg::*;

  localparam logic [11:0] INV_A = 12'b1010_0110_0011;
  localparam logic [11:0] INV_B = 12'b0101_1001_1100;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, inv_effects = 0;
  longint cycle = 0;
  always @(posedge clk) cycle++;

  logic        clear = 0, in_valid = 0;
  logic [11:0] in_data = '0;
  logic        va, vb;
  logic [11:0] da, db;

  binary_maxpool #(.C(12), .P(8), .S(6), .INV(INV_A)) dut_a (
    .clk, .rst_n, .clear, .in_valid, .in_data, .out_valid(va), .out_data(da));
  binary_maxpool #(.C(12), .P(3), .S(2), .INV(INV_B)) dut_b (
    .clk, .rst_n, .clear, .in_valid, .in_data, .out_valid(vb), .out_data(db));

  seq_t   in_q, out_a, out_b;
  longint in_t[$], t_a[$], t_b[$];

  always @(posedge clk) begin
    if (rst_n) begin
      if (va) begin out_a.push_back(64'(da)); t_a.push_back(cycle); end
      if (vb) begin out_b.push_back(64'(db)); t_b.push_back(cycle); end
      if (in_valid && !clear) begin in_q.push_back(64'(in_data)); in_t.push_back(cycle); end
    end
  end

  task automatic compare(string name, seq_t got, longint got_t[$], int unsigned p,
                         int unsigned s, logic [11:0] inv);
    seq_t e, plain;
    e     = ref_pool(in_q, 12, p, s, 64'(inv));
    plain = ref_pool(in_q, 12, p, s, '0);
    checks++;
    if (got.size() != e.size()) begin
      failures++;
      $display("%s: %0d outputs, expected %0d", name, got.size(), e.size());
    end
    for (int i = 0; i < got.size() && i < e.size(); i++) begin
      checks += 2;
      if (e[i] != plain[i]) inv_effects++;
      if (got[i] !== e[i]) begin
        failures++;
        $display("%s: output %0d got %h exp %h", name, i, got[i], e[i]);
      end
      if (got_t[i] != in_t[i*s + p - 1] + 1) begin
        failures++;
        $display("%s: output %0d late/early", name, i);
      end
    end
  endtask

  task automatic run_sequence(int unsigned len, int unsigned density);
    in_q = {}; in_t = {}; out_a = {}; out_b = {}; t_a = {}; t_b = {};
    clear <= 1; @(posedge clk); clear <= 0;
    for (int unsigned i = 0; i < len; i++) begin
      in_valid <= 1;
      for (int c = 0; c < 12; c++) in_data[c] <= ($urandom_range(0, 99) < density);
      @(posedge clk);
      if ($urandom_range(0, 3) == 0) begin in_valid <= 0; @(posedge clk); end
    end
    in_valid <= 0;
    repeat (3) @(posedge clk);
    compare("P8S6", out_a, t_a, 8, 6, INV_A);
    compare("P3S2", out_b, t_b, 3, 2, INV_B);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    run_sequence(200, 85);
    run_sequence(150, 15);
    run_sequence(31, 50);
    checks++;
    if (inv_effects == 0) begin failures++; $display("sign inversion never mattered"); end
    $display("sign inversion changed %0d pooled outputs", inv_effects);
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
