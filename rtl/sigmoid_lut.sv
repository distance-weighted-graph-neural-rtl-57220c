// sigmoid_lut: logistic activation of the classification output.
//
// x (s7.8) is reduced to s.6 (x >>> 2), clamped to [-8, 8) and used as the
// address of a 1024-entry table holding
//     p[i] = min(65535, round(65536 / (1 + exp(-(i - 512) / 64))))
// so p is the electron probability in u0.16. The table is filled at
// elaboration time; the read is registered (p and out_valid one clock after x
// and in_valid). The paper names only the sigmoid; table size, range and
// formats are this design's choice.
module sigmoid_lut
  import garnet_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  data_t       x,
  output logic        out_valid,
  output logic [15:0] p
);

  localparam int N = 1024;

  logic [15:0] rom [N];

  function automatic logic [15:0] entry(input int i);
    real v, s;
    v = real'(i - N/2) / 64.0;
    s = 65536.0 / (1.0 + $exp(-v)) + 0.5;
    if (s > 65535.0) s = 65535.0;
    return 16'($rtoi(s));
  endfunction

  initial begin
    for (int i = 0; i < N; i++) rom[i] = entry(i);
  end

  logic signed [DATA_W-3:0] xs;
  logic [9:0]               idx;

  always_comb begin
    xs = (DATA_W-2)'(x >>> 2);
    if (xs < -(N/2))     idx = '0;
    else if (xs >= N/2)  idx = 10'(N - 1);
    else                 idx = 10'(xs + N/2);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end

  always_ff @(posedge clk) p <= rom[idx];

endmodule
