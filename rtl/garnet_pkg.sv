// garnet_pkg: number formats and shared helpers of the GarNet graph-network
// inference engine.
//
// Every quantity is a two's-complement fixed-point number. The formats below
// are this implementation's choice; the published design states only that all
// numbers carry at least eight fraction bits, that no word is wider than 18 bits
// on the datapath, and that the vertex-to-aggregator distance is 12 bits with a
// sign bit, three integer bits and eight fraction bits.
//
//   data_t  s7.8  (16 b)  vertex features, layer outputs, dense activations
//   coef_t  s7.8  (16 b)  continuous weights and biases (distance network,
//                         decoder bias, dense layers)
//   dist_t  s3.8  (12 b)  distance d_av between a vertex and an aggregator
//   wgt_t   u1.17 (18 b)  potential W_av = exp(-d_av^2)
//   wg_t    s8.25 (34 b)  product W_av * g_j
//   agg_t   s15.16 (32 b) aggregator sums G_ja and L_a
//   hsum_t  s19.12 (32 b) transformed aggregator features H_ka
//
// All right shifts are arithmetic (round toward minus infinity); every
// narrowing conversion saturates.
package garnet_pkg;

  localparam int DATA_W    = 16;
  localparam int DATA_FRAC = 8;
  localparam int COEF_W    = 16;
  localparam int COEF_FRAC = 8;
  localparam int D_W       = 12;
  localparam int D_FRAC    = 8;
  localparam int WGT_W     = 18;
  localparam int WGT_FRAC  = 17;
  localparam int WG_W      = 34;
  localparam int WG_FRAC   = WGT_FRAC + DATA_FRAC;   // 25
  localparam int AGG_W     = 32;
  localparam int AGG_FRAC  = 16;
  localparam int H_W       = 32;
  localparam int H_FRAC    = 12;

  // Configuration (weight load) bus.
  localparam int CFG_AW = 16;
  localparam int CFG_DW = 16;

  // Pipeline depth of garnet_vertex_unit (input features to W_av and W_av*g).
  localparam int VU_LAT = 3;

  typedef logic signed [DATA_W-1:0] data_t;
  typedef logic signed [COEF_W-1:0] coef_t;
  typedef logic signed [D_W-1:0]    dist_t;
  typedef logic        [WGT_W-1:0]  wgt_t;
  typedef logic signed [WG_W-1:0]   wg_t;
  typedef logic signed [AGG_W-1:0]  agg_t;
  typedef logic signed [H_W-1:0]    hsum_t;

  // Saturate a 64-bit signed value into a signed field of `width` bits,
  // returned sign-extended in 64 bits.
  function automatic logic signed [63:0] sat_s(input logic signed [63:0] x, input int width);
    logic signed [63:0] hi, lo;
    hi = (64'sd1 <<< (width - 1)) - 64'sd1;
    lo = -(64'sd1 <<< (width - 1));
    if (x > hi) return hi;
    if (x < lo) return lo;
    return x;
  endfunction

  function automatic data_t sat_data(input logic signed [63:0] x);
    logic signed [63:0] s;
    s = sat_s(x, DATA_W);
    return s[DATA_W-1:0];
  endfunction

endpackage
