// pcnn_network_tb: the whole precomputed network at its default (paper)
// structure. Two windows of a synthetic ECG-like signal are streamed in
// with a clear in between: a full 5000-sample window with regular beats
// at one sample per clock, and a 700-sample window with irregular beats
// and random idle clocks. Every output probability is compared with the
// layer-by-layer reference computed from the weights; the number of
// outputs (98 for 5000 samples), the 14-clock latency from the sample that
// closes the last window, and that sign-inverted pooling mattered are
// checked as well.
// A second instance has the shape of the paper's smaller network: c0 = 10
// channels after the first block, beta in two groups, first block
// (12,10,12,12,1,2,10) and the others (10,6,10,10,1,2,10). It gets the same
// input and is checked against the reference of that shape.
module pcnn_network_tb;
  import tb_ref_pkg::*;
  localparam int unsigned SEED = pcnn_pkg::DEF_SEED;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle++;

  logic        clear = 0, in_valid = 0;
  logic [11:0] in_sample = '0;
  logic        out_valid;
  logic [7:0]  out_prob;

  pcnn_network #(.SEED(SEED)) dut (.clk, .rst_n, .clear, .in_valid, .in_sample, .out_valid,
                                   .out_prob);

  logic        out_valid_s;
  logic [7:0]  out_prob_s;

  pcnn_network #(.SEED(SEED), .C0(10), .GB_FIRST(2), .GA_OTHER(10), .FA_OTHER(10), .GB_OTHER(2))
    dut_small (.clk, .rst_n, .clear, .in_valid, .in_sample, .out_valid(out_valid_s),
               .out_prob(out_prob_s));

  iseq_t  got, got_s;
  longint out_ts[$];
  longint in_t[$], out_t[$];

  always @(posedge clk) begin
    if (rst_n) begin
      if (out_valid) begin got.push_back(int'(out_prob)); out_t.push_back(cycle); end
      if (out_valid_s) begin got_s.push_back(int'(out_prob_s)); out_ts.push_back(cycle); end
      if (in_valid && !clear) in_t.push_back(cycle);
    end
  end

  // input index that completes the window of final output j
  function automatic int closing_input(int j);
    int idx = j;
    for (int b = pcnn_pkg::N_BLOCKS - 1; b >= 0; b--) begin
      idx = idx * ((b == 0) ? 6 : 2) + ((b == 0) ? 8 : 3) - 1;
      idx = idx + ((b == 0) ? 10 : 6) - 1;
    end
    return idx;
  endfunction

  task automatic run_window(iseq_t x, bit gaps);
    iseq_t       e, es;
    int unsigned inv_events, inv_s;
    got = {}; in_t = {}; out_t = {}; got_s = {}; out_ts = {};
    clear <= 1; @(posedge clk); clear <= 0;
    foreach (x[i]) begin
      in_valid  <= 1;
      in_sample <= 12'(x[i]);
      @(posedge clk);
      if (gaps && $urandom_range(0, 4) == 0) begin in_valid <= 0; @(posedge clk); end
    end
    in_valid <= 0;
    repeat (20) @(posedge clk);
    e = ref_network(SEED, x, inv_events);
    checks++;
    if (got.size() != e.size() ||
        e.size() != pcnn_pkg::net_out_len(x.size(), 10, 6, 8, 6, 3, 2, 4)) begin
      failures++;
      $display("%0d outputs, reference %0d", got.size(), e.size());
    end
    checks++;
    if (inv_events == 0) begin failures++; $display("no sign-inverted pooling effect"); end
    for (int i = 0; i < got.size() && i < e.size(); i++) begin
      checks += 2;
      if (got[i] != e[i]) begin
        failures++;
        $display("output %0d got %0d exp %0d", i, got[i], e[i]);
      end
      if (out_t[i] != in_t[closing_input(i)] + 14) begin
        failures++;
        $display("output %0d at %0d, closing input at %0d", i, out_t[i], in_t[closing_input(i)]);
      end
    end
    $display("window of %0d samples: %0d outputs, %0d inverted-pool effects", x.size(),
             got.size(), inv_events);
    es = ref_network_cfg(SEED, x, 12, 10, 12, 12, 2, 10, 10, 2, inv_s);
    checks++;
    if (got_s.size() != es.size() || es.size() != e.size()) begin
      failures++;
      $display("small network: %0d outputs, reference %0d", got_s.size(), es.size());
    end
    for (int i = 0; i < got_s.size() && i < es.size(); i++) begin
      checks += 2;
      if (got_s[i] != es[i]) begin
        failures++;
        $display("small output %0d got %0d exp %0d", i, got_s[i], es[i]);
      end
      if (out_ts[i] != in_t[closing_input(i)] + 14) begin
        failures++;
        $display("small output %0d at %0d", i, out_ts[i]);
      end
    end
    $display("small network (c0 = 10): %0d outputs, %0d inverted-pool effects", got_s.size(),
             inv_s);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    run_window(ecg_signal(5000, 0, 11), 0);
    run_window(ecg_signal(700, 1, 23), 1);
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
