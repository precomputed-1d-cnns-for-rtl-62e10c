// split_conv_block: the Split Convolutional Block in its deployed form.
//
// A dense convolution (c0 inputs, f0 outputs, kernel k0) is replaced by a
// grouped convolution alpha with (C_IN, K, G_A, F_A) and a grouped
// pointwise convolution beta with (F_A, 1, G_B, F_B), each followed by batch
// norm and binarization. Each of the two is one precomputed block, so the
// fan-in of a table is K*C_IN/G_A bits for alpha and F_A/G_B bits for beta
// instead of K*C_IN for the dense convolution. The split conditions are
// checked at elaboration: C_IN and F_A divisible by G_A, F_A and F_B
// divisible by G_B.
//
// Timing: alpha outputs one clock after the input that completes its
// K-step window; beta adds one more clock. A sequence of L inputs after
// `clear` gives L-K+1 outputs. Interface and handshake as precomputed_conv.
module split_conv_block
  import pcnn_pkg::*;
#(
  parameter int unsigned C_IN    = 12,
  parameter int unsigned K       = 6,
  parameter int unsigned G_A     = 12,
  parameter int unsigned F_A     = 12,
  parameter int unsigned G_B     = 1,
  parameter int unsigned F_B     = 12,
  parameter int unsigned SEED    = pcnn_pkg::DEF_SEED,
  parameter int unsigned LAYER_A = 1,
  parameter int unsigned LAYER_B = 2
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           clear,
  input  logic           in_valid,
  input  logic [C_IN-1:0] in_data,
  output logic           out_valid,
  output logic [F_B-1:0] out_data
);

  logic           mid_valid;
  logic [F_A-1:0] mid_data;

  // precomputed block alpha: grouped convolution with kernel K
  precomputed_conv #(
    .C_IN(C_IN), .K(K), .G(G_A), .C_OUT(F_A), .SEED(SEED), .LAYER(LAYER_A)
  ) u_alpha (
    .clk, .rst_n, .clear,
    .in_valid  (in_valid),
    .in_data   (in_data),
    .out_valid (mid_valid),
    .out_data  (mid_data)
  );

  // precomputed block beta: grouped pointwise convolution
  precomputed_conv #(
    .C_IN(F_A), .K(1), .G(G_B), .C_OUT(F_B), .SEED(SEED), .LAYER(LAYER_B)
  ) u_beta (
    .clk, .rst_n, .clear,
    .in_valid  (mid_valid),
    .in_data   (mid_data),
    .out_valid (out_valid),
    .out_data  (out_data)
  );

endmodule
