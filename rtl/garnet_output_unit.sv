// garnet_output_unit: the decoder of one vertex in a GarNet layer.
//
// Sends the aggregator information back to a vertex with the same potentials
// that gathered it and applies the decoder bias:
//     g'_k = sum_a W_a * H_ka + c_k
// W_a (u1.17) times H_ka (s19.12) is summed at full precision, shifted to
// s7.8, added to c_k and saturated to 16 bits. The result is registered: y is
// valid one clock after w. The formula is the paper's; rounding (floor) and
// saturation are this design's choice.
module garnet_output_unit
  import garnet_pkg::*;
#(
  parameter int unsigned S    = 4,
  parameter int unsigned FOUT = 8
) (
  input  logic  clk,
  input  wgt_t  w [S],
  input  hsum_t h [S][FOUT],
  input  coef_t c [FOUT],
  output data_t y [FOUT]
);

  localparam int SH = WGT_FRAC + H_FRAC - DATA_FRAC;   // 21

  always_ff @(posedge clk) begin
    for (int k = 0; k < FOUT; k++) begin
      logic signed [63:0] acc;
      logic signed [WGT_W+H_W:0] p;
      acc = '0;
      for (int a = 0; a < S; a++) begin
        p = $signed({1'b0, w[a]}) * h[a][k];
        acc += 64'(p);
      end
      y[k] <= sat_data((acc >>> SH) + (64'(c[k]) <<< (DATA_FRAC - COEF_FRAC)));
    end
  end

endmodule
