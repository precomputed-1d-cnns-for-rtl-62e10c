// pcnn_network: the fully pipelined precomputed 1D-CNN for AF detection.
//
// Layer sequence (the paper's network for detecting atrial fibrillation in
// MIT-BIH records, "BIG" configuration with c0 = 12):
//   input_binarizer      conv1d k=1 1->12, bnorm, bin      (one 12->12 table)
//   split_conv_block 0   alpha (12,10,12,12) + beta (12,1,1,12)
//   binary_maxpool 0     window 8, stride 6
//   split_conv_block b   alpha (12,6,12,12)  + beta (12,1,1,12), b = 1..3
//   binary_maxpool b     window 3, stride 2
//   linear_sigmoid       linear 12->1, sigmoid             (one 12->8 table)
// Every layer is a precomputed block; between them only shift registers
// hold the time steps a window needs. The network accepts one ECG sample
// per clock and emits a probability whenever the last pooling layer
// completes a window. For a window of L samples it emits
// pcnn_pkg::net_out_len(L, ...) outputs (98 for L = 5000).
//
// Channel counts: the input layer always has C_IN0 = 12 channels (the
// paper fixes its conv1d at 1->12); every Split Convolutional Block
// outputs C0 channels, the c0 that the paper varies from 6 to 12 (12 in
// its main network). The first block therefore maps C_IN0 -> C0 and the
// others C0 -> C0; alpha's width FA and the group counts are set per
// first/other block.
//
// The negative-gamma channel mask of each pooling block comes from
// pcnn_pkg::gamma_neg for the beta layer in front of it.
//
// Interface: `clear` (one clock, no in_valid in that clock) empties all
// windows before a new sequence; in_valid/in_sample in; out_valid/out_prob
// out. Latency from the sample that completes the last window to out_valid
// is 1 + 3*N_BLK + 1 clocks (14 by default).
module pcnn_network
  import pcnn_pkg::*;
#(
  parameter int unsigned SAMPLE_BITS = pcnn_pkg::SAMPLE_W,
  parameter int unsigned C_IN0       = pcnn_pkg::N_CH,
  parameter int unsigned C0          = pcnn_pkg::N_CH,
  parameter int unsigned N_BLK       = pcnn_pkg::N_BLOCKS,
  parameter int unsigned K_FIRST     = 10,
  parameter int unsigned GA_FIRST    = 12,
  parameter int unsigned FA_FIRST    = 12,
  parameter int unsigned GB_FIRST    = 1,
  parameter int unsigned K_OTHER     = 6,
  parameter int unsigned GA_OTHER    = 12,
  parameter int unsigned FA_OTHER    = 12,
  parameter int unsigned GB_OTHER    = 1,
  parameter int unsigned P_FIRST     = 8,
  parameter int unsigned S_FIRST     = 6,
  parameter int unsigned P_OTHER     = 3,
  parameter int unsigned S_OTHER     = 2,
  parameter int unsigned OUT_W       = pcnn_pkg::PROB_W,
  parameter int unsigned SEED        = pcnn_pkg::DEF_SEED
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   clear,
  input  logic                   in_valid,
  input  logic [SAMPLE_BITS-1:0] in_sample,
  output logic                   out_valid,
  output logic [OUT_W-1:0]       out_prob
);

  function automatic logic [C0-1:0] inv_mask(int unsigned b);
    logic [C0-1:0] m;
    for (int unsigned c = 0; c < C0; c++)
      m[c] = pcnn_pkg::gamma_neg(SEED, pcnn_pkg::layer_beta(b), c);
    return m;
  endfunction

  // stage s: output of pooling block s-1 (stage 0: input layer, C_IN0
  // channels; later stages C0 channels, held in the low bits)
  localparam int unsigned SW = (C_IN0 > C0) ? C_IN0 : C0;
  logic          st_valid [N_BLK+1];
  logic [SW-1:0] st_data  [N_BLK+1];

  if (SW > C_IN0) begin : g_pad
    assign st_data[0][SW-1:C_IN0] = '0;
  end

  input_binarizer #(.SAMPLE_BITS(SAMPLE_BITS), .CH(C_IN0), .SEED(SEED)) u_input (
    .clk, .rst_n,
    .in_valid  (in_valid),
    .in_sample (in_sample),
    .out_valid (st_valid[0]),
    .out_data  (st_data[0][C_IN0-1:0])
  );

  for (genvar b = 0; b < N_BLK; b++) begin : g_block
    localparam int unsigned K  = (b == 0) ? K_FIRST  : K_OTHER;
    localparam int unsigned GA = (b == 0) ? GA_FIRST : GA_OTHER;
    localparam int unsigned FA = (b == 0) ? FA_FIRST : FA_OTHER;
    localparam int unsigned GB = (b == 0) ? GB_FIRST : GB_OTHER;
    localparam int unsigned P  = (b == 0) ? P_FIRST  : P_OTHER;
    localparam int unsigned S  = (b == 0) ? S_FIRST  : S_OTHER;
    localparam int unsigned CI = (b == 0) ? C_IN0    : C0;

    logic          conv_valid;
    logic [C0-1:0] conv_data;

    split_conv_block #(
      .C_IN(CI), .K(K), .G_A(GA), .F_A(FA), .G_B(GB), .F_B(C0), .SEED(SEED),
      .LAYER_A(pcnn_pkg::layer_alpha(b)), .LAYER_B(pcnn_pkg::layer_beta(b))
    ) u_split (
      .clk, .rst_n, .clear,
      .in_valid  (st_valid[b]),
      .in_data   (st_data[b][CI-1:0]),
      .out_valid (conv_valid),
      .out_data  (conv_data)
    );

    binary_maxpool #(.C(C0), .P(P), .S(S), .INV(inv_mask(b))) u_pool (
      .clk, .rst_n, .clear,
      .in_valid  (conv_valid),
      .in_data   (conv_data),
      .out_valid (st_valid[b+1]),
      .out_data  (st_data[b+1][C0-1:0])
    );
    if (SW > C0) begin : g_pad
      assign st_data[b+1][SW-1:C0] = '0;
    end
  end

  linear_sigmoid #(.C_IN(C0), .OUT_W(OUT_W), .SEED(SEED), .LAYER(pcnn_pkg::LAYER_OUT)) u_out (
    .clk, .rst_n,
    .in_valid  (st_valid[N_BLK]),
    .in_data   (st_data[N_BLK][C0-1:0]),
    .out_valid (out_valid),
    .out_prob  (out_prob)
  );

endmodule
