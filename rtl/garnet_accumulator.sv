// garnet_accumulator: the aggregators of a GarNet layer.
//
// Each clock during the input phase it receives the outputs of the LANES
// vertex units (one vertex each) and adds them into per-aggregator sums:
//     G_ja = (1/Vmax) * sum_v W_av * g_jv      L_a = (1/Vmax) * sum_v W_av
// Lanes whose bit in `mask` is clear (vertex index >= V) contribute nothing.
// `first` restarts the sums, `last` closes the sample: on the clock after a
// beat with `last`, `done` pulses for one cycle and G, L hold the finished
// values until the next sample closes. Division by Vmax is a right shift, so
// VMAX must be a power of two. The normalisation by the fixed Vmax (not by
// V) follows the paper; the accumulator widths (s.25 sums, s15.16 results)
// are this design's.
module garnet_accumulator
  import garnet_pkg::*;
#(
  parameter int unsigned LANES = 4,
  parameter int unsigned S     = 4,
  parameter int unsigned FIN   = 4,
  parameter int unsigned VMAX  = 128
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             valid,
  input  logic             first,
  input  logic             last,
  input  logic [LANES-1:0] mask,
  input  wgt_t             w    [LANES][S],
  input  wg_t              wg   [LANES][S][FIN],
  output logic             done,
  output agg_t             g_sum [S][FIN],
  output agg_t             l_sum [S]
);

  localparam int ACC_W = WG_W + $clog2(VMAX) + 2;
  localparam int VSH   = $clog2(VMAX);

  initial assert ((1 << VSH) == VMAX) else $error("VMAX must be a power of two");

  // One generate block per aggregator (and feature): running sum, including
  // the current beat, and the closing normalisation.
  for (genvar a = 0; a < S; a++) begin : g_agg
    logic signed [ACC_W-1:0] acc_l, nxt_l;

    always_comb begin
      nxt_l = first ? '0 : acc_l;
      for (int l = 0; l < LANES; l++)
        if (mask[l]) nxt_l += ACC_W'($signed({1'b0, w[l][a]}));
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        acc_l    <= '0;
        l_sum[a] <= '0;
      end else if (valid) begin
        acc_l <= nxt_l;
        if (last) l_sum[a] <= AGG_W'(sat_s(64'(nxt_l) >>> (VSH + WGT_FRAC - AGG_FRAC), AGG_W));
      end
    end

    for (genvar j = 0; j < FIN; j++) begin : g_feat
      logic signed [ACC_W-1:0] acc_g, nxt_g;

      always_comb begin
        nxt_g = first ? '0 : acc_g;
        for (int l = 0; l < LANES; l++)
          if (mask[l]) nxt_g += ACC_W'(wg[l][a][j]);
      end

      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          acc_g       <= '0;
          g_sum[a][j] <= '0;
        end else if (valid) begin
          acc_g <= nxt_g;
          if (last) g_sum[a][j] <= AGG_W'(sat_s(64'(nxt_g) >>> (VSH + WG_FRAC - AGG_FRAC), AGG_W));
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) done <= 1'b0;
    else        done <= valid && last;
  end

endmodule
