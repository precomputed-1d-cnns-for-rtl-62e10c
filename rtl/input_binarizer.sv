// input_binarizer: precomputed first layer of the network.
//
// The first layers of the network, a pointwise convolution from the single
// ECG channel to N_CH channels, a batch norm and the binarization, see one
// SAMPLE_W-bit sample at a time. Together they are one precomputed block:
// a truth table with SAMPLE_W inputs and N_CH outputs (4096 x 12 for the
// 12-bit records and 12 channels of the paper's network).
//
// The table contents stand for a trained layer. Channel c computes
//   y_c = bin( w_c * (x - 2**(SAMPLE_W-1)) + 256 * b_c )
// with x the unsigned ADC code and w_c, b_c integer weights drawn by
// pcnn_pkg::weight(SEED, 0, c, ...) (w_c = 0 is replaced by 1). The
// centring of the ADC code and the scale of b_c are this design's choices.
//
// Timing: one sample per clock when in_valid is high; out_valid/out_data
// follow one clock later (registered). No back-pressure.
module input_binarizer
  import pcnn_pkg::*;
#(
  parameter int unsigned SAMPLE_BITS = pcnn_pkg::SAMPLE_W,
  parameter int unsigned CH          = pcnn_pkg::N_CH,
  parameter int unsigned SEED        = pcnn_pkg::DEF_SEED
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  input  logic [SAMPLE_BITS-1:0] in_sample,
  output logic                   out_valid,
  output logic [CH-1:0]          out_data
);

  localparam int unsigned TBL_BITS = (2**SAMPLE_BITS) * CH;
  // the table is assembled CW bits at a time to keep elaboration fast
  localparam int unsigned CW = (TBL_BITS % 64 == 0) ? 64 : 1;

  function automatic logic [TBL_BITS-1:0] make_table();
    logic [TBL_BITS-1:0] t;
    logic [CW-1:0]       word;
    int signed           w [CH];
    int signed           b [CH];
    int unsigned         idx;
    for (int unsigned c = 0; c < CH; c++) begin
      w[c] = pcnn_pkg::weight(SEED, 0, c, 0);
      if (w[c] == 0) w[c] = 1;
      b[c] = pcnn_pkg::weight(SEED, 0, c, pcnn_pkg::BIAS_IDX);
    end
    for (int unsigned k = 0; k < TBL_BITS / CW; k++) begin
      for (int unsigned j = 0; j < CW; j++) begin
        idx     = k * CW + j;
        word[j] = (w[idx % CH] * (int'(idx / CH) - 2**(SAMPLE_BITS-1)) + 256 * b[idx % CH]) >= 0;
      end
      t[k*CW +: CW] = word;
    end
    return t;
  endfunction

  localparam logic [TBL_BITS-1:0] TABLE = make_table();

  logic [CH-1:0] lut_out;

  truth_table #(.IN_W(SAMPLE_BITS), .OUT_W(CH), .TABLE(TABLE)) u_table (
    .addr (in_sample),
    .data (lut_out)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) out_data <= lut_out;
    end
  end

endmodule
