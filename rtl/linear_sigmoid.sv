// linear_sigmoid: precomputed output layer (linear c0 -> 1, then sigmoid).
//
// The last pooled feature vector (C_IN binary channels) addresses one truth
// table of 2**C_IN entries whose PROB_W-bit entry is the quantized
// probability of atrial fibrillation for that time step. The sigmoid is
// monotonic, so "probability >= 0.5" is the same decision as "linear
// output >= 0"; the MSB of the output is that decision.
//
// Table contents stand for the trained layer: with integer weights
// w_j = pcnn_pkg::weight(SEED, LAYER, 0, j) and bias b,
//   z = b + sum_j w_j * x_j,  x_j in {-1,+1}
//   p = clamp(2**(PROB_W-1) + z * 2**(PROB_W-5), 0, 2**PROB_W - 1),
// a piecewise-linear ("hard") sigmoid scaled to PROB_W bits. The output
// width and the sigmoid approximation are this design's choices; the paper
// does not give the output format.
//
// Timing: registered, out_valid one clock after in_valid.
module linear_sigmoid
  import pcnn_pkg::*;
#(
  parameter int unsigned C_IN  = pcnn_pkg::N_CH,
  parameter int unsigned OUT_W = pcnn_pkg::PROB_W,
  parameter int unsigned SEED  = pcnn_pkg::DEF_SEED,
  parameter int unsigned LAYER = pcnn_pkg::LAYER_OUT
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [C_IN-1:0]  in_data,
  output logic             out_valid,
  output logic [OUT_W-1:0] out_prob
);

  localparam int unsigned N_ENT    = 2**C_IN;
  localparam int unsigned TBL_BITS = N_ENT * OUT_W;
  localparam int unsigned CW       = (TBL_BITS % 64 == 0) ? 64 : 1;
  localparam int unsigned LO       = C_IN / 2;
  localparam int unsigned HI       = C_IN - LO;
  localparam int signed   PMAX     = 2**OUT_W - 1;
  localparam int signed   MID      = 2**(OUT_W-1);
  localparam int signed   SLOPE    = (OUT_W > 5) ? 2**(OUT_W-5) : 1;

  function automatic logic [TBL_BITS-1:0] make_table();
    logic [TBL_BITS-1:0] t;
    logic [CW-1:0]       word;
    logic [31:0]         p;
    int signed           w [C_IN];
    int signed           ps_lo [2**LO];
    int signed           ps_hi [2**HI];
    int signed           base, z, s, q;
    int unsigned         idx, e;
    base = pcnn_pkg::weight(SEED, LAYER, 0, pcnn_pkg::BIAS_IDX);
    for (int unsigned j = 0; j < C_IN; j++) begin
      w[j] = pcnn_pkg::weight(SEED, LAYER, 0, j);
      base -= w[j];
    end
    for (int unsigned a = 0; a < 2**LO; a++) begin
      s = 0;
      for (int unsigned j = 0; j < LO; j++) if (a[j]) s += 2 * w[j];
      ps_lo[a] = s;
    end
    for (int unsigned a = 0; a < 2**HI; a++) begin
      s = 0;
      for (int unsigned j = 0; j < HI; j++) if (a[j]) s += 2 * w[LO + j];
      ps_hi[a] = s;
    end
    for (int unsigned k = 0; k < TBL_BITS / CW; k++) begin
      for (int unsigned j = 0; j < CW; j++) begin
        idx = k * CW + j;
        e   = idx / OUT_W;
        z   = base + ps_lo[e % 2**LO] + ps_hi[e >> LO];
        q   = MID + z * SLOPE;
        if (q < 0)    q = 0;
        if (q > PMAX) q = PMAX;
        p       = q;
        word[j] = p[idx % OUT_W];
      end
      t[k*CW +: CW] = word;
    end
    return t;
  endfunction

  logic [OUT_W-1:0] lut_out;

  truth_table #(.IN_W(C_IN), .OUT_W(OUT_W), .TABLE(make_table())) u_table (
    .addr (in_data),
    .data (lut_out)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_prob  <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) out_prob <= lut_out;
    end
  end

endmodule
