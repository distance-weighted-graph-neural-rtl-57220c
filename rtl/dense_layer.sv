// dense_layer: fully connected layer of the network head.
//
// y_o = act( sum_i W_oi * x_i + b_o ),  act = ReLU (RELU = 1) or identity.
// Inputs, weights, biases and outputs are s7.8; products are summed at full
// precision, shifted back to s7.8 (floor) and saturated. All NOUT*NIN products
// are formed in parallel and the result is registered: out_valid/y follow
// in_valid/x by one clock. The layer sizes and activations come from the
// paper's network; the number format, full parallelism and run-time loaded
// weights are this design's choice.
//
// Configuration words at offsets from BASE: W_oi at o*NIN + i, b_o at
// NOUT*NIN + o (coef_t).
module dense_layer
  import garnet_pkg::*;
#(
  parameter int unsigned NIN  = 16,
  parameter int unsigned NOUT = 16,
  parameter bit          RELU = 1'b1,
  parameter logic [CFG_AW-1:0] BASE = '0
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cfg_we,
  input  logic [CFG_AW-1:0] cfg_addr,
  input  logic [CFG_DW-1:0] cfg_data,
  input  logic              in_valid,
  input  data_t             x [NIN],
  output logic              out_valid,
  output data_t             y [NOUT]
);

  localparam int unsigned NWORDS = NOUT * NIN + NOUT;

  coef_t w [NOUT][NIN];
  coef_t b [NOUT];
  data_t y_next [NOUT];

  logic [CFG_DW-1:0] wreg [NWORDS];

  cfg_regfile #(.NWORDS(NWORDS), .BASE(BASE)) u_wregs (
    .clk(clk), .cfg_we(cfg_we), .cfg_addr(cfg_addr), .cfg_data(cfg_data),
    .q(wreg));

  for (genvar o = 0; o < NOUT; o++) begin : g_wo
    assign b[o] = coef_t'(wreg[NOUT*NIN + o]);
    for (genvar i = 0; i < NIN; i++) begin : g_wi
      assign w[o][i] = coef_t'(wreg[o*NIN + i]);
    end
  end

  always_comb begin
    for (int o = 0; o < NOUT; o++) begin
      logic signed [63:0] acc;
      logic signed [COEF_W+DATA_W-1:0] p;
      data_t s;
      acc = '0;
      for (int i = 0; i < NIN; i++) begin
        p = w[o][i] * x[i];
        acc += 64'(p);
      end
      s = sat_data((acc >>> COEF_FRAC) + (64'(b[o]) <<< (DATA_FRAC - COEF_FRAC)));
      y_next[o] = (RELU && s < 0) ? '0 : s;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int o = 0; o < NOUT; o++) y[o] <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) y <= y_next;
    end
  end

endmodule
