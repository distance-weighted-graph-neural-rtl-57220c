// tb_garnet_vertex_unit: streams 64 random vertices, one per clock, through a
// vertex unit with FIN = 4 features and S = 4 aggregators, and checks W_a and
// W_a*g_j exactly VU_LAT = 3 clocks after each vertex entered, against the
// reference distance calculator and exp table. Distances cover the whole
// table range, including saturation at +-8.
module tb_garnet_vertex_unit;
  import garnet_pkg::*;
  import garnet_ref_pkg::*;

  localparam int FIN = 4, S = 4, NV = 64;

  logic clk = 1'b0;
  data_t g [FIN];
  coef_t alpha [S][FIN];
  coef_t beta [S];
  wgt_t w [S];
  wg_t wg [S][FIN];
  int checks = 0, failures = 0;

  garnet_vertex_unit #(.FIN(FIN), .S(S)) dut (.*);

  always #5 clk = ~clk;

  int ga[], aa[], ba[];

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ga = new[NV*FIN]; aa = new[S*FIN]; ba = new[S];
    foreach (ga[i]) ga[i] = int'($urandom_range(1024)) - 512;
    foreach (aa[i]) aa[i] = int'($urandom_range(512)) - 256;
    foreach (ba[i]) ba[i] = int'($urandom_range(1024)) - 512;
    for (int a = 0; a < S; a++) begin
      beta[a] = coef_t'(ba[a]);
      for (int j = 0; j < FIN; j++) alpha[a][j] = coef_t'(aa[a*FIN+j]);
    end
    for (int t = 0; t < NV + VU_LAT; t++) begin
      @(negedge clk);
      if (t < NV) for (int j = 0; j < FIN; j++) g[j] = data_t'(ga[t*FIN+j]);
      if (t >= VU_LAT) begin
        int v;
        v = t - VU_LAT;
        for (int a = 0; a < S; a++) begin
          longint ew;
          ew = ref_w(ref_d(FIN, a, v, ga, aa, ba));
          checks++;
          if (longint'(w[a]) != ew) begin
            failures++;
            $display("v%0d a%0d: W=%0d expected %0d", v, a, w[a], ew);
          end
          for (int j = 0; j < FIN; j++) begin
            checks++;
            if (longint'(wg[a][j]) != ew * ga[v*FIN+j]) begin
              failures++;
              $display("v%0d a%0d j%0d: Wg=%0d expected %0d", v, a, j, wg[a][j], ew * ga[v*FIN+j]);
            end
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
