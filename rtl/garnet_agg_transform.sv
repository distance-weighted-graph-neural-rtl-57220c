// garnet_agg_transform: contracted encoder/decoder applied at the aggregators.
//
// Because encoder, mean aggregation and decoder are all linear, the decoder
// input of output feature k from aggregator a reduces to
//     H_ka = sum_j wt_kja * G_ja + bt_ka * L_a
// with wt = u.w and bt = u.b the decoder kernel contracted with the encoder
// kernel and bias. For the ternary (quantized) model these are small integers
// (TW_FRAC = 0); a non-zero TW_FRAC gives fixed-point contracted weights for a
// continuous model. The contraction itself and the integer weights follow the
// paper; widths and the single registered stage are this design's.
//
// All S*FOUT*(FIN+1) products are formed in parallel; H is registered on the
// clock edge where `start` is high and holds until the next start.
module garnet_agg_transform
  import garnet_pkg::*;
#(
  parameter int unsigned FIN     = 4,
  parameter int unsigned S       = 4,
  parameter int unsigned FOUT    = 8,
  parameter int unsigned TW_W    = 8,
  parameter int unsigned TW_FRAC = 0
) (
  input  logic                   clk,
  input  logic                   start,
  input  agg_t                   g_sum [S][FIN],
  input  agg_t                   l_sum [S],
  input  logic signed [TW_W-1:0] wt    [S][FOUT][FIN],
  input  logic signed [TW_W-1:0] bt    [S][FOUT],
  output hsum_t                  h     [S][FOUT]
);

  localparam int SH = AGG_FRAC + TW_FRAC - H_FRAC;

  for (genvar a = 0; a < S; a++) begin : g_agg
    for (genvar k = 0; k < FOUT; k++) begin : g_out
      logic signed [63:0] acc;

      always_comb begin
        logic signed [TW_W+AGG_W-1:0] p;
        p   = bt[a][k] * l_sum[a];
        acc = 64'(p);
        for (int j = 0; j < FIN; j++) begin
          p = wt[a][k][j] * g_sum[a][j];
          acc += 64'(p);
        end
      end

      always_ff @(posedge clk) begin
        if (start) h[a][k] <= H_W'(sat_s(acc >>> SH, H_W));
      end
    end
  end

endmodule
