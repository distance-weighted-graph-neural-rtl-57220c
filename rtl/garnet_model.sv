// garnet_model: GarNet-based particle identification and energy regression.
//
// Input is one calorimeter cluster per sample: up to VMAX hits with four
// features each (x, y, z, energy), delivered LANES hits per clock as a
// framed stream (see garnet_layer). The network is
//   GarNet (S=4,  F_LR=8,  F_out=8)  -> GarNet (S=4, F_LR=8, F_out=8)
//   -> GarNet (S=8, F_LR=16, F_out=16) -> mean over the V hits
//   -> dense 16 ReLU -> dense 8 ReLU -> { dense 1 + sigmoid : electron probability
//                                          dense 1 linear    : energy }
// The three GarNet layers pass vertices to each other as streams, so layer
// n+1 gathers a sample while layer n is still emitting it, and every layer can
// hold two samples (one gathering, one emitting). The encoder and decoder
// weights are the ternary (quantized) model's contracted integer weights.
// F_LR does not appear in the hardware: the encoder is folded into the
// contracted weights.
//
// Outputs: out_valid pulses once per sample with out_prob (u0.16) and
// out_energy (s7.8). Latency for a full sample (V = 128) is about 165 clocks
// and a new full sample can enter about every 40 clocks (the testbench
// measures both). in_ready is the first layer's sample-level ready.
//
// Weights are written through cfg_we/cfg_addr/cfg_data before use:
//   0x0000 GarNet 1    0x0400 GarNet 2    0x0800 GarNet 3
//   0x1000 dense 16    0x1200 dense 8     0x1300 classifier   0x1310 regressor
// (layouts in garnet_layer and dense_layer). The network shape, VMAX = 128 and
// R_reuse = 32 follow the paper's quantized model; the stream interface, the
// weight-load port and the number formats are this design's choices.
module garnet_model
  import garnet_pkg::*;
#(
  parameter int unsigned VMAX  = 128,
  parameter int unsigned REUSE = 32,
  localparam int unsigned LANES = VMAX / REUSE,
  localparam int unsigned NV_W  = $clog2(VMAX + 1),
  localparam int unsigned FIN   = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cfg_we,
  input  logic [CFG_AW-1:0] cfg_addr,
  input  logic [CFG_DW-1:0] cfg_data,
  output logic              in_ready,
  input  logic              in_valid,
  input  logic              in_first,
  input  logic              in_last,
  input  logic [NV_W-1:0]   in_nvtx,
  input  data_t             in_feat [LANES][FIN],
  output logic              out_valid,
  output logic [15:0]       out_prob,
  output data_t             out_energy
);

  localparam int unsigned F1 = 8, F2 = 8, F3 = 16;

  // Layer 1 -> 2
  logic            s1_ready, s1_valid, s1_first, s1_last;
  logic [NV_W-1:0] s1_nvtx;
  data_t           s1_feat [LANES][F1];
  // Layer 2 -> 3
  logic            s2_ready, s2_valid, s2_first, s2_last;
  logic [NV_W-1:0] s2_nvtx;
  data_t           s2_feat [LANES][F2];
  // Layer 3 -> mean
  logic            s3_valid, s3_first, s3_last;
  logic [NV_W-1:0] s3_nvtx;
  data_t           s3_feat [LANES][F3];

  garnet_layer #(.VMAX(VMAX), .REUSE(REUSE), .FIN(FIN), .S(4), .FOUT(F1), .BASE(16'h0000)) u_gn1 (
    .clk(clk), .rst_n(rst_n), .cfg_we(cfg_we), .cfg_addr(cfg_addr), .cfg_data(cfg_data),
    .in_ready(in_ready), .in_valid(in_valid), .in_first(in_first), .in_last(in_last),
    .in_nvtx(in_nvtx), .in_feat(in_feat),
    .out_ready(s1_ready), .out_valid(s1_valid), .out_first(s1_first), .out_last(s1_last),
    .out_nvtx(s1_nvtx), .out_feat(s1_feat));

  garnet_layer #(.VMAX(VMAX), .REUSE(REUSE), .FIN(F1), .S(4), .FOUT(F2), .BASE(16'h0400)) u_gn2 (
    .clk(clk), .rst_n(rst_n), .cfg_we(cfg_we), .cfg_addr(cfg_addr), .cfg_data(cfg_data),
    .in_ready(s1_ready), .in_valid(s1_valid), .in_first(s1_first), .in_last(s1_last),
    .in_nvtx(s1_nvtx), .in_feat(s1_feat),
    .out_ready(s2_ready), .out_valid(s2_valid), .out_first(s2_first), .out_last(s2_last),
    .out_nvtx(s2_nvtx), .out_feat(s2_feat));

  garnet_layer #(.VMAX(VMAX), .REUSE(REUSE), .FIN(F2), .S(8), .FOUT(F3), .BASE(16'h0800)) u_gn3 (
    .clk(clk), .rst_n(rst_n), .cfg_we(cfg_we), .cfg_addr(cfg_addr), .cfg_data(cfg_data),
    .in_ready(s2_ready), .in_valid(s2_valid), .in_first(s2_first), .in_last(s2_last),
    .in_nvtx(s2_nvtx), .in_feat(s2_feat),
    .out_ready(1'b1), .out_valid(s3_valid), .out_first(s3_first), .out_last(s3_last),
    .out_nvtx(s3_nvtx), .out_feat(s3_feat));

  logic  m_valid;
  data_t m_feat [F3];

  vertex_mean #(.VMAX(VMAX), .LANES(LANES), .F(F3)) u_mean (
    .clk(clk), .rst_n(rst_n),
    .in_valid(s3_valid), .in_first(s3_first), .in_last(s3_last), .in_nvtx(s3_nvtx),
    .in_feat(s3_feat), .out_valid(m_valid), .out_mean(m_feat));

  logic  d1_valid, d2_valid, cl_valid, rg_valid;
  data_t d1 [16];
  data_t d2 [8];
  data_t cl [1];
  data_t rg [1];

  dense_layer #(.NIN(F3), .NOUT(16), .RELU(1'b1), .BASE(16'h1000)) u_d1 (
    .clk(clk), .rst_n(rst_n), .cfg_we(cfg_we), .cfg_addr(cfg_addr), .cfg_data(cfg_data),
    .in_valid(m_valid), .x(m_feat), .out_valid(d1_valid), .y(d1));

  dense_layer #(.NIN(16), .NOUT(8), .RELU(1'b1), .BASE(16'h1200)) u_d2 (
    .clk(clk), .rst_n(rst_n), .cfg_we(cfg_we), .cfg_addr(cfg_addr), .cfg_data(cfg_data),
    .in_valid(d1_valid), .x(d1), .out_valid(d2_valid), .y(d2));

  dense_layer #(.NIN(8), .NOUT(1), .RELU(1'b0), .BASE(16'h1300)) u_cls (
    .clk(clk), .rst_n(rst_n), .cfg_we(cfg_we), .cfg_addr(cfg_addr), .cfg_data(cfg_data),
    .in_valid(d2_valid), .x(d2), .out_valid(cl_valid), .y(cl));

  dense_layer #(.NIN(8), .NOUT(1), .RELU(1'b0), .BASE(16'h1310)) u_reg (
    .clk(clk), .rst_n(rst_n), .cfg_we(cfg_we), .cfg_addr(cfg_addr), .cfg_data(cfg_data),
    .in_valid(d2_valid), .x(d2), .out_valid(rg_valid), .y(rg));

  sigmoid_lut u_sig (
    .clk(clk), .rst_n(rst_n), .in_valid(cl_valid), .x(cl[0]),
    .out_valid(out_valid), .p(out_prob));

  // Delay the energy by the sigmoid's clock so both outputs leave together.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        out_energy <= '0;
    else if (rg_valid) out_energy <= rg[0];
  end

endmodule
