// binary_maxpool: precomputed max pooling block on binary activations.
//
// In training, max pooling sits between the second convolution and its
// batch norm. After training it is moved behind the binarization, which is
// exact because batch norm and binarization are monotonic: channels whose
// batch-norm gamma is negative are sign-inverted before and after the pool,
// turning max into min for them. On binary data (bit 1 = +1, bit 0 = -1)
// max is the OR of the window and the inverted max is the AND, so each
// output channel is
//   y_c = INV[c] ? AND(window_c) : OR(window_c).
// The paper realises this block as a truth table with P inputs per channel;
// the AND/OR form is the same function written out.
//
// Window P, stride S, no padding: output j covers inputs j*S .. j*S+P-1
// counted from the last `clear`, and is produced (registered, one clock
// later) when input j*S+P-1 arrives. Requires S <= P.
// Interface: in_valid/in_data stream in, out_valid/out_data stream out,
// no back-pressure. The clear/valid handshake is this design's choice.
module binary_maxpool #(
  parameter int unsigned     C   = 12,
  parameter int unsigned     P   = 3,
  parameter int unsigned     S   = 2,
  parameter logic [C-1:0]    INV = '0
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clear,
  input  logic         in_valid,
  input  logic [C-1:0] in_data,
  output logic         out_valid,
  output logic [C-1:0] out_data
);

  localparam int unsigned HP     = (P > 1) ? P - 1 : 1;
  localparam int unsigned FILL_W = $clog2(P + 1);
  localparam int unsigned PH_W   = (S > 1) ? $clog2(S) : 1;

  if (S > P || S == 0) begin : g_check
    $error("binary_maxpool: stride must be between 1 and the window size");
  end

  logic [C-1:0]      hist [HP];     // the P-1 previous inputs
  logic [FILL_W-1:0] fill;          // inputs seen, saturating at P-1
  logic [PH_W-1:0]   phase;         // inputs since the last output, mod S
  logic              full, emit;
  logic              started;       // a window was emitted since clear
  logic [C-1:0]      pooled;

  assign full = (fill == FILL_W'(P - 1));
  // the current input completes a window: first window, then every S inputs
  assign emit = full && (phase == PH_W'(S - 1) || S == 1 || !started);


  always_comb begin
    for (int unsigned c = 0; c < C; c++) begin
      logic any1, all1;
      any1 = in_data[c];
      all1 = in_data[c];
      for (int unsigned t = 0; t + 1 < P; t++) begin
        any1 |= hist[t][c];
        all1 &= hist[t][c];
      end
      pooled[c] = INV[c] ? all1 : any1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fill    <= '0;
      phase   <= '0;
      started <= 1'b0;
      for (int unsigned t = 0; t < HP; t++) hist[t] <= '0;
    end else if (clear) begin
      fill    <= '0;
      phase   <= '0;
      started <= 1'b0;
    end else if (in_valid) begin
      if (!full) fill <= fill + 1'b1;
      for (int unsigned t = 0; t + 2 < P; t++) hist[t] <= hist[t+1];
      if (P > 1) hist[HP-1] <= in_data;
      if (emit) begin
        started <= 1'b1;
        phase   <= '0;
      end else if (full) begin
        phase   <= phase + 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      out_valid <= in_valid && emit && !clear;
      if (in_valid && emit) out_data <= pooled;
    end
  end

endmodule
