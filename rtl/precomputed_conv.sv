// precomputed_conv: a precomputed grouped 1D convolution on binary data.
//
// This is the "Precomputed Block" of the deployed network: the layers
// between two binary activations (grouped convolution, batch norm,
// binarization) collapsed into truth tables. The C_IN input channels are
// split into G groups of S_IN = C_IN/G channels; group g sees the last K
// time steps of its own S_IN channels, FAN = K*S_IN bits, and produces its
// S_OUT = C_OUT/G output channels through one truth table of 2**FAN
// entries. With K = 1 the block is the pointwise convolution that closes a
// Split Convolutional Block.
//
// Data path: the current input and K-1 earlier inputs (a shift register
// that moves only when in_valid is high) form the window. Table address
// bit t*S_IN + i of group g is channel g*S_IN + i at tap t, t = 0 being
// the oldest time step and t = K-1 the current one. Outputs are produced
// for every input once K inputs have been seen since the last `clear`
// (no padding, stride 1), and are registered: out_valid rises one clock
// after the in_valid that completes a window.
//
// Table contents stand for the trained layer. Output channel o of layer
// LAYER computes bin(b_o + sum_j w_oj * x_j), x_j in {-1,+1}, with integer
// weights w_oj = pcnn_pkg::weight(SEED, LAYER, o, j) and bias (the folded
// batch norm) b_o = pcnn_pkg::weight(SEED, LAYER, o, BIAS_IDX). The grouping,
// window and table structure follow the paper; the weight source, address
// order and the clear/valid handshake are this design's.
module precomputed_conv
  import pcnn_pkg::*;
#(
  parameter int unsigned C_IN  = 12,
  parameter int unsigned K     = 6,
  parameter int unsigned G     = 12,
  parameter int unsigned C_OUT = 12,
  parameter int unsigned SEED  = pcnn_pkg::DEF_SEED,
  parameter int unsigned LAYER = 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,      // start of a new sequence: empty the window
  input  logic             in_valid,
  input  logic [C_IN-1:0]  in_data,
  output logic             out_valid,
  output logic [C_OUT-1:0] out_data
);

  localparam int unsigned S_IN     = C_IN / G;
  localparam int unsigned S_OUT    = C_OUT / G;
  localparam int unsigned FAN      = K * S_IN;
  localparam int unsigned N_ENT    = 2**FAN;
  localparam int unsigned TBL_BITS = N_ENT * S_OUT;
  localparam int unsigned CW       = (TBL_BITS % 64 == 0) ? 64 : 1;
  localparam int unsigned HK       = (K > 1) ? K - 1 : 1;   // history depth
  localparam int unsigned FILL_W   = $clog2(K + 1);

  if (C_IN % G != 0 || C_OUT % G != 0) begin : g_check
    $error("precomputed_conv: C_IN and C_OUT must be multiples of G");
  end

  // Truth table of group g; entry a occupies bits [a*S_OUT +: S_OUT].
  // The weighted sum of an entry is split into the part of its LO low
  // address bits and the part of its HI high bits, each tabulated once.
  localparam int unsigned LO = FAN / 2;
  localparam int unsigned HI = FAN - LO;

  function automatic logic [TBL_BITS-1:0] make_table(int unsigned g);
    logic [TBL_BITS-1:0] t;
    logic [CW-1:0]       word;
    int signed           w [FAN];
    int signed           base [S_OUT];
    int signed           ps_lo [S_OUT * 2**LO];   // 2 * weights of set low bits
    int signed           ps_hi [S_OUT * 2**HI];   // 2 * weights of set high bits
    int unsigned         og, idx, e, o;
    int signed           tot, s;
    for (o = 0; o < S_OUT; o++) begin
      og  = g * S_OUT + o;
      tot = 0;
      for (int unsigned j = 0; j < FAN; j++) begin
        w[j] = pcnn_pkg::weight(SEED, LAYER, og, j);
        tot += w[j];
      end
      base[o] = pcnn_pkg::weight(SEED, LAYER, og, pcnn_pkg::BIAS_IDX) - tot;
      for (int unsigned a = 0; a < 2**LO; a++) begin
        s = 0;
        for (int unsigned j = 0; j < LO; j++) if (a[j]) s += 2 * w[j];
        ps_lo[o * 2**LO + a] = s;
      end
      for (int unsigned a = 0; a < 2**HI; a++) begin
        s = 0;
        for (int unsigned j = 0; j < HI; j++) if (a[j]) s += 2 * w[LO + j];
        ps_hi[o * 2**HI + a] = s;
      end
    end
    for (int unsigned k = 0; k < TBL_BITS / CW; k++) begin
      for (int unsigned j = 0; j < CW; j++) begin
        idx     = k * CW + j;
        e       = idx / S_OUT;
        o       = idx % S_OUT;
        word[j] = (base[o] + ps_lo[o * 2**LO + (e % 2**LO)]
                           + ps_hi[o * 2**HI + (e >> LO)]) >= 0;
      end
      t[k*CW +: CW] = word;
    end
    return t;
  endfunction

  // ---------------------------------------------------------------- window
  logic [C_IN-1:0]   hist [HK];
  logic [K*C_IN-1:0] win;
  logic [FILL_W-1:0] fill;
  logic              full;

  always_comb begin
    win = '0;
    for (int unsigned t = 0; t + 1 < K; t++) win[t*C_IN +: C_IN] = hist[t];
    win[(K-1)*C_IN +: C_IN] = in_data;
  end

  assign full = (fill == FILL_W'(K - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fill <= '0;
      for (int unsigned t = 0; t < HK; t++) hist[t] <= '0;
    end else if (clear) begin
      fill <= '0;
    end else if (in_valid) begin
      if (!full) fill <= fill + 1'b1;
      for (int unsigned t = 0; t + 2 < K; t++) hist[t] <= hist[t+1];
      if (K > 1) hist[HK-1] <= in_data;
    end
  end

  // ---------------------------------------------------------------- tables
  logic [C_OUT-1:0] lut_out;

  for (genvar g = 0; g < G; g++) begin : g_group
    logic [FAN-1:0] addr;
    always_comb
      for (int unsigned t = 0; t < K; t++)
        addr[t*S_IN +: S_IN] = win[t*C_IN + g*S_IN +: S_IN];

    truth_table #(.IN_W(FAN), .OUT_W(S_OUT), .TABLE(make_table(g))) u_table (
      .addr (addr),
      .data (lut_out[g*S_OUT +: S_OUT])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      out_valid <= in_valid && full && !clear;
      if (in_valid && full) out_data <= lut_out;
    end
  end

endmodule
