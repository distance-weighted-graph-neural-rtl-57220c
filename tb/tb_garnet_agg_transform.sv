// tb_garnet_agg_transform: applies random aggregator sums G, L and random
// small-integer contracted weights (FIN = 3, S = 2, FOUT = 4) and checks
// H = wt.G + bt.L (s19.12) one clock after `start`, and that H holds while
// `start` is low.
module tb_garnet_agg_transform;
  import garnet_pkg::*;
  import garnet_ref_pkg::*;

  localparam int FIN = 3, S = 2, FOUT = 4, TW_W = 8;

  logic clk = 1'b0, start = 1'b0;
  agg_t g_sum [S][FIN];
  agg_t l_sum [S];
  logic signed [TW_W-1:0] wt [S][FOUT][FIN];
  logic signed [TW_W-1:0] bt [S][FOUT];
  hsum_t h [S][FOUT];
  int checks = 0, failures = 0;

  garnet_agg_transform #(.FIN(FIN), .S(S), .FOUT(FOUT), .TW_W(TW_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint gs[], ls[], eh[];
    int wa[], ba[];
    for (int trial = 0; trial < 20; trial++) begin
      gs = new[S*FIN]; ls = new[S]; wa = new[S*FOUT*FIN]; ba = new[S*FOUT];
      foreach (gs[i]) gs[i] = longint'(int'($urandom_range(1 << 22)) - (1 << 21));
      foreach (ls[i]) ls[i] = longint'($urandom_range(1 << 16));
      foreach (wa[i]) wa[i] = int'($urandom_range(6)) - 3;
      foreach (ba[i]) ba[i] = int'($urandom_range(4)) - 2;
      @(negedge clk);
      for (int a = 0; a < S; a++) begin
        l_sum[a] = agg_t'(ls[a]);
        for (int j = 0; j < FIN; j++) g_sum[a][j] = agg_t'(gs[a*FIN+j]);
        for (int k = 0; k < FOUT; k++) begin
          bt[a][k] = TW_W'(ba[a*FOUT+k]);
          for (int j = 0; j < FIN; j++) wt[a][k][j] = TW_W'(wa[(a*FOUT+k)*FIN+j]);
        end
      end
      start = 1'b1;
      ref_xform(FIN, S, FOUT, 0, gs, ls, wa, ba, eh);
      @(negedge clk);
      start = 1'b0;
      // Change inputs: H must not follow while start is low.
      for (int a = 0; a < S; a++) l_sum[a] = agg_t'($urandom);
      @(negedge clk);
      for (int a = 0; a < S; a++) for (int k = 0; k < FOUT; k++) begin
        checks++;
        if (longint'(h[a][k]) != eh[a*FOUT+k]) begin
          failures++;
          $display("trial %0d H[%0d][%0d]=%0d expected %0d", trial, a, k, h[a][k], eh[a*FOUT+k]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
