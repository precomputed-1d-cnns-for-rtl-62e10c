// truth_table_tb: checks the table lookup of truth_table.
// A 5-input, 3-output table is built from a hash f(a, o); every address is
// applied and each output bit is compared with f(a, o) evaluated directly.
module truth_table_tb;
  localparam int unsigned IN_W = 5, OUT_W = 3;

  function automatic logic f(int unsigned a, int unsigned o);
    logic [31:0] h;
    h = (a * 32'h9E37_79B1) ^ (o * 32'h85EB_CA77);
    h = h ^ (h >> 13);
    return h[7];
  endfunction

  function automatic logic [(2**IN_W)*OUT_W-1:0] build();
    logic [(2**IN_W)*OUT_W-1:0] t;
    for (int unsigned a = 0; a < 2**IN_W; a++)
      for (int unsigned o = 0; o < OUT_W; o++)
        t[a*OUT_W + o] = f(a, o);
    return t;
  endfunction

  logic [IN_W-1:0]  addr;
  logic [OUT_W-1:0] data;
  int checks = 0, failures = 0;

  truth_table #(.IN_W(IN_W), .OUT_W(OUT_W), .TABLE(build())) dut (.addr, .data);

  initial begin
    for (int unsigned a = 0; a < 2**IN_W; a++) begin
      addr = IN_W'(a);
      #1;
      for (int unsigned o = 0; o < OUT_W; o++) begin
        checks++;
        if (data[o] !== f(a, o)) begin
          failures++;
          $display("mismatch addr=%0d out=%0d got=%b", a, o, data[o]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
