// tb_vertex_mean: streams six samples (VMAX = 16, LANES = 4, F = 3) of random
// features with vertex counts 16, 5, 1, 0, 12 and 16, and checks each mean
// (sum over the V valid vertices times round(2^16/V), shifted by 16) and that
// out_valid pulses two clocks after the last beat.
module tb_vertex_mean;
  import garnet_pkg::*;
  import garnet_ref_pkg::*;

  localparam int VMAX = 16, LANES = 4, F = 3, NV_W = 5, NS = 6;
  localparam int SIZES [NS] = '{16, 5, 1, 0, 12, 16};

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0, in_first = 1'b0, in_last = 1'b0;
  logic [NV_W-1:0] in_nvtx = '0;
  data_t in_feat [LANES][F];
  logic out_valid;
  data_t out_mean [F];
  int checks = 0, failures = 0;

  vertex_mean #(.VMAX(VMAX), .LANES(LANES), .F(F)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int y[];
    for (int l = 0; l < LANES; l++) for (int k = 0; k < F; k++) in_feat[l][k] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int s = 0; s < NS; s++) begin
      int nb;
      nb = (SIZES[s] == 0) ? 1 : (SIZES[s] + LANES - 1) / LANES;
      y = new[VMAX*F];
      foreach (y[i]) y[i] = int'($urandom_range(8000)) - 4000;
      for (int b = 0; b < nb; b++) begin
        @(negedge clk);
        in_valid = 1'b1; in_first = (b == 0); in_last = (b == nb - 1);
        in_nvtx = NV_W'(SIZES[s]);
        for (int l = 0; l < LANES; l++)
          for (int k = 0; k < F; k++)
            in_feat[l][k] = (b*LANES + l < SIZES[s]) ? data_t'(y[(b*LANES+l)*F+k]) : data_t'($urandom);
      end
      @(negedge clk);
      in_valid = 1'b0; in_first = 1'b0; in_last = 1'b0;
      checks++;
      if (out_valid) begin failures++; $display("out_valid one clock early"); end
      @(negedge clk);
      checks++;
      if (!out_valid) begin failures++; $display("s%0d: no out_valid two clocks after last", s); end
      for (int k = 0; k < F; k++) begin
        checks++;
        if (int'(out_mean[k]) != ref_mean(SIZES[s], F, k, y)) begin
          failures++;
          $display("s%0d k%0d: mean %0d expected %0d", s, k, out_mean[k], ref_mean(SIZES[s], F, k, y));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
