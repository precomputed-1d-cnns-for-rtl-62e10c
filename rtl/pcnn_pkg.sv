// pcnn_pkg: constants, types and constant functions shared by the
// precomputed 1D-CNN atrial-fibrillation accelerator.
//
// The network is the "BIG" configuration: 12 binary channels everywhere,
// a first Split Convolutional Block with kernel 10 and the split
// (c_a,k_a,g_a,f_a,k_b,g_b,f_b) = (12,10,12,12,1,1,12), three further
// blocks with (12,6,12,12,1,1,12), pooling (8,6) after the first block and
// (3,2) after the others, and a linear+sigmoid output layer.
//
// Trained weights are not published, so every truth table is generated at
// elaboration time from small integer weights produced by a hash of
// (seed, layer, output, input). weight() is that hash. Any trained network
// with the same structure is loaded by replacing these weights (or the
// tables derived from them); the hardware does not change.
//
// Binary encoding used throughout: bit value 1 stands for activation +1,
// bit value 0 for activation -1 (bin(x) = +1 if x >= 0).
package pcnn_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned SAMPLE_W   = 12;    // ADC resolution of the ECG records
  localparam int unsigned N_CH       = 12;    // c0 of the BIG network
  localparam int unsigned N_SAMPLES  = 5000;  // time steps per inference window
  localparam int unsigned PROB_W     = 8;     // quantized sigmoid output
  localparam int unsigned N_BLOCKS   = 4;     // Split Convolutional Blocks (Table I)
  localparam int unsigned DEF_SEED   = 32'd2024;

  // index used in weight() to draw the bias (folded batch norm) of an output
  localparam int unsigned BIAS_IDX   = 32'h0000_FFFF;
  // index used in weight() to draw the sign of the batch-norm gamma
  localparam int unsigned GAMMA_IDX  = 32'h0000_FFFE;

  // Layer identifiers used to decorrelate the weights of each table.
  // Input layer = 0, block b (0-based) alpha = 1+2b, beta = 2+2b,
  // output layer = 1 + 2*N_BLOCKS.
  function automatic int unsigned layer_alpha(int unsigned b); return 1 + 2*b; endfunction
  function automatic int unsigned layer_beta (int unsigned b); return 2 + 2*b; endfunction
  localparam int unsigned LAYER_OUT = 1 + 2*N_BLOCKS;

  // ------------------------------------------------------------- weights
  // 32-bit integer hash; returns a signed weight in [-8, 7].
  function automatic int signed weight(int unsigned seed, int unsigned layer,
                                       int unsigned o, int unsigned i);
    logic [31:0] h;
    h = seed * 32'h9E37_79B1;
    h = h ^ (layer * 32'h85EB_CA77);
    h = (h ^ (h >> 15)) * 32'h2C1B_3C6D;
    h = h ^ (o * 32'hC2B2_AE3D);
    h = (h ^ (h >> 12)) * 32'h297A_2D39;
    h = h ^ (i * 32'h27D4_EB2F);
    h = (h ^ (h >> 15)) * 32'h8CB9_2BA7;
    h = h ^ (h >> 16);
    return int'({28'd0, h[3:0]}) - 8;
  endfunction

  // Channel c of layer `layer` has a negative batch-norm gamma (the
  // channel is sign-inverted around the following max pool).
  function automatic logic gamma_neg(int unsigned seed, int unsigned layer, int unsigned c);
    return weight(seed, layer, c, GAMMA_IDX) < 0;
  endfunction

  // ---------------------------------------------------- sequence lengths
  function automatic int unsigned conv_len(int unsigned len, int unsigned k);
    return (len >= k) ? len - k + 1 : 0;
  endfunction

  function automatic int unsigned pool_len(int unsigned len, int unsigned p, int unsigned s);
    return (len >= p) ? (len - p) / s + 1 : 0;
  endfunction

  // Number of outputs the network gives for a window of `len` samples.
  function automatic int unsigned net_out_len(int unsigned len, int unsigned k_first,
                                              int unsigned k_other, int unsigned p_first,
                                              int unsigned s_first, int unsigned p_other,
                                              int unsigned s_other, int unsigned n_blocks);
    int unsigned l;
    l = pool_len(conv_len(len, k_first), p_first, s_first);
    for (int unsigned b = 1; b < n_blocks; b++)
      l = pool_len(conv_len(l, k_other), p_other, s_other);
    return l;
  endfunction

  // -------------------------------------------------------- host commands
  typedef enum logic [7:0] {
    CMD_NOP         = 8'h00,
    CMD_WRITE_INPUT = 8'h01,  // addr_hi, addr_lo, then {4'b0,s[11:8]}, s[7:0] per sample
    CMD_START       = 8'h02,  // start an inference
    CMD_STATUS      = 8'h03,  // next byte returns {6'b0, busy, done}
    CMD_READ_OUTPUT = 8'h04   // addr_hi, addr_lo, then one output byte per byte clocked
  } cmd_e;

endpackage
