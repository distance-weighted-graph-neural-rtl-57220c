// vertex_mean: average of the per-vertex features of a sample.
//
// Takes the output stream of the last GarNet layer (LANES vertices per beat,
// framed by first/last, vertex count V with every beat) and sums each of the F
// features over the V valid vertices. After the last beat it multiplies the
// sums by a reciprocal 1/V taken from a VMAX+1 entry table,
//     recip[n] = round(2^16 / n),  recip[0] = 0,
// and emits the F means (s7.8, floor, saturated) with a one-clock `out_valid`
// pulse two clocks after the last beat. Averaging over the vertices follows the
// paper; dividing by the actual V through a reciprocal table is this design's
// choice (the paper does not say how the mean is formed).
module vertex_mean
  import garnet_pkg::*;
#(
  parameter int unsigned VMAX  = 128,
  parameter int unsigned LANES = 4,
  parameter int unsigned F     = 16,
  localparam int unsigned NV_W = $clog2(VMAX + 1)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid,
  input  logic            in_first,
  input  logic            in_last,
  input  logic [NV_W-1:0] in_nvtx,
  input  data_t           in_feat [LANES][F],
  output logic            out_valid,
  output data_t           out_mean [F]
);

  localparam int SUM_W   = DATA_W + NV_W + 1;
  localparam int RECIP_W = 18;

  logic [RECIP_W-1:0] recip [VMAX+1];

  initial begin
    recip[0] = '0;
    for (int n = 1; n <= VMAX; n++) recip[n] = RECIP_W'(((1 << 17) / n + 1) / 2);
  end

  logic [NV_W-1:0]          beat_cnt;
  logic signed [SUM_W-1:0]  acc     [F];
  logic signed [SUM_W-1:0]  nxt     [F];
  logic signed [SUM_W-1:0]  fin_sum [F];
  logic [RECIP_W-1:0]       fin_rcp;
  logic                     fin_valid;
  logic [NV_W-1:0]          base;

  assign base = in_first ? '0 : beat_cnt;

  always_comb begin
    for (int k = 0; k < F; k++) begin
      nxt[k] = in_first ? '0 : acc[k];
      for (int l = 0; l < LANES; l++)
        if (32'(base) + l < 32'(in_nvtx)) nxt[k] += SUM_W'(in_feat[l][k]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      beat_cnt  <= '0;
      fin_valid <= 1'b0;
      fin_rcp   <= '0;
      for (int k = 0; k < F; k++) begin
        acc[k]     <= '0;
        fin_sum[k] <= '0;
      end
    end else begin
      fin_valid <= in_valid && in_last;
      if (in_valid) begin
        beat_cnt <= base + NV_W'(LANES);
        acc      <= nxt;
        if (in_last) begin
          fin_sum <= nxt;
          fin_rcp <= recip[in_nvtx];
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int k = 0; k < F; k++) out_mean[k] <= '0;
    end else begin
      out_valid <= fin_valid;
      if (fin_valid)
        for (int k = 0; k < F; k++) out_mean[k] <= sat_data(mean_of(fin_sum[k], fin_rcp));
    end
  end

  function automatic logic signed [63:0] mean_of(input logic signed [SUM_W-1:0] s,
                                                  input logic [RECIP_W-1:0] r);
    logic signed [SUM_W+RECIP_W:0] p;
    p = s * $signed({1'b0, r});
    return 64'(p) >>> 16;
  endfunction

endmodule
