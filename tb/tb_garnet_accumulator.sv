// tb_garnet_accumulator: feeds three samples of random potentials and
// weighted features (LANES = 4, S = 2, FIN = 3, VMAX = 16) with random lane
// masks, one of them with a gap cycle between beats, and checks that `done`
// pulses exactly one clock after the last beat and that G and L equal the
// masked sums divided by VMAX (s15.16).
module tb_garnet_accumulator;
  import garnet_pkg::*;
  import garnet_ref_pkg::*;

  localparam int LANES = 4, S = 2, FIN = 3, VMAX = 16, NB = 4;

  logic clk = 1'b0, rst_n = 1'b0;
  logic valid = 1'b0, first = 1'b0, last = 1'b0;
  logic [LANES-1:0] mask = '0;
  wgt_t w [LANES][S];
  wg_t wg [LANES][S][FIN];
  logic done;
  agg_t g_sum [S][FIN];
  agg_t l_sum [S];
  int checks = 0, failures = 0;

  garnet_accumulator #(.LANES(LANES), .S(S), .FIN(FIN), .VMAX(VMAX)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int l = 0; l < LANES; l++) for (int a = 0; a < S; a++) begin
      w[l][a] = '0;
      for (int j = 0; j < FIN; j++) wg[l][a][j] = '0;
    end
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int smp = 0; smp < 3; smp++) begin
      longint sl [S], sg [S][FIN];
      for (int a = 0; a < S; a++) begin
        sl[a] = 0;
        for (int j = 0; j < FIN; j++) sg[a][j] = 0;
      end
      for (int b = 0; b < NB; b++) begin
        @(negedge clk);
        if (smp == 1 && b == 2) begin valid = 1'b0; @(negedge clk); end
        valid = 1'b1; first = (b == 0); last = (b == NB - 1);
        mask = LANES'($urandom);
        for (int l = 0; l < LANES; l++) for (int a = 0; a < S; a++) begin
          int gv;
          w[l][a] = wgt_t'($urandom_range(1 << 17));
          for (int j = 0; j < FIN; j++) begin
            gv = int'($urandom_range(2048)) - 1024;
            wg[l][a][j] = wg_t'(longint'(w[l][a]) * gv);
            if (mask[l]) sg[a][j] += longint'(w[l][a]) * gv;
          end
          if (mask[l]) sl[a] += longint'(w[l][a]);
        end
      end
      @(negedge clk);
      valid = 1'b0; first = 1'b0; last = 1'b0;
      checks++;
      if (!done) begin failures++; $display("sample %0d: done not one clock after last", smp); end
      for (int a = 0; a < S; a++) begin
        checks++;
        if (longint'(l_sum[a]) != sat(sl[a] >>> 5, 32)) begin
          failures++; $display("L[%0d]=%0d expected %0d", a, l_sum[a], sl[a] >>> 5);
        end
        for (int j = 0; j < FIN; j++) begin
          checks++;
          if (longint'(g_sum[a][j]) != sat(sg[a][j] >>> 13, 32)) begin
            failures++; $display("G[%0d][%0d]=%0d expected %0d", a, j, g_sum[a][j], sg[a][j] >>> 13);
          end
        end
      end
      @(negedge clk);
      checks++;
      if (done) begin failures++; $display("done longer than one clock"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
