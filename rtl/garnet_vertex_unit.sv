// garnet_vertex_unit: the per-vertex logic unit of a GarNet layer.
//
// For one vertex with features g_j (j < FIN) it computes, for each of the S
// aggregators, the learned distance
//     d_a = sum_j alpha_aj * g_j + beta_a          (distance calculator)
// the potential W_a = exp(-d_a^2) through garnet_exp_lut, and the weighted
// features W_a * g_j that the aggregators sum. The encoder network is not
// evaluated here: as in the paper, it is folded into the contracted decoder
// weights, so the aggregators need only W_a * g_j and W_a.
//
// Pipeline (one vertex accepted every clock, outputs VU_LAT = 3 clocks later):
//   1. multiply-accumulate, shift to s3.8 and saturate  -> d
//   2. table read                                       -> W
//   3. products W * g_j                                 -> wg
// The paper reports about 20 clocks for this unit in its HLS build; the depth
// here is this design's own. alpha and beta are s7.8; d is saturated to the
// s3.8 range before the lookup (a choice of this design).
module garnet_vertex_unit
  import garnet_pkg::*;
#(
  parameter int unsigned FIN = 4,
  parameter int unsigned S   = 4
) (
  input  logic  clk,
  input  data_t g     [FIN],
  input  coef_t alpha [S][FIN],
  input  coef_t beta  [S],
  output wgt_t  w     [S],
  output wg_t   wg    [S][FIN]
);

  dist_t d_q   [S];
  data_t g_q1  [FIN];
  data_t g_q2  [FIN];
  wgt_t  w_lut [S];

  // Stage 1: distance calculator.
  always_ff @(posedge clk) begin
    for (int a = 0; a < S; a++) begin
      logic signed [63:0] acc;
      logic signed [COEF_W+DATA_W-1:0] p;
      acc = 64'(beta[a]) <<< DATA_FRAC;                 // s.16
      for (int j = 0; j < FIN; j++) begin
        p = alpha[a][j] * g[j];
        acc += 64'(p);
      end
      d_q[a] <= D_W'(sat_s(acc >>> (COEF_FRAC + DATA_FRAC - D_FRAC), D_W));
    end
    g_q1 <= g;
  end

  // Stage 2: potential table.
  for (genvar a = 0; a < S; a++) begin : g_lut
    garnet_exp_lut u_lut (.clk(clk), .d(d_q[a]), .w(w_lut[a]));
  end

  always_ff @(posedge clk) g_q2 <= g_q1;

  // Stage 3: weighted features.
  always_ff @(posedge clk) begin
    for (int a = 0; a < S; a++) begin
      w[a] <= w_lut[a];
      for (int j = 0; j < FIN; j++) begin
        logic signed [WG_W:0] p;
        p = $signed({1'b0, w_lut[a]}) * g_q2[j];
        wg[a][j] <= WG_W'(p);
      end
    end
  end

endmodule
