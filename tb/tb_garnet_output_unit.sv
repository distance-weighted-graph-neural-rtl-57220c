// tb_garnet_output_unit: random potentials W (S = 4), transformed features H
// and biases c (FOUT = 3); checks y_k = sat16(((sum_a W_a H_ak) >>> 21) + c_k)
// one clock later. H spans a range wide enough to reach saturation.
module tb_garnet_output_unit;
  import garnet_pkg::*;
  import garnet_ref_pkg::*;

  localparam int S = 4, FOUT = 3;

  logic clk = 1'b0;
  wgt_t w [S];
  hsum_t h [S][FOUT];
  coef_t c [FOUT];
  data_t y [FOUT];
  int checks = 0, failures = 0, nsat = 0;

  garnet_output_unit #(.S(S), .FOUT(FOUT)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint wa[], ha[];
    int ca[];
    for (int trial = 0; trial < 50; trial++) begin
      int range;
      range = (trial % 5 == 0) ? (1 << 22) : (1 << 16);
      wa = new[S]; ha = new[S*FOUT]; ca = new[FOUT];
      foreach (wa[i]) wa[i] = longint'($urandom_range(1 << 17));
      foreach (ha[i]) ha[i] = longint'(int'($urandom_range(2*range)) - range);
      foreach (ca[i]) ca[i] = int'($urandom_range(1024)) - 512;
      @(negedge clk);
      for (int a = 0; a < S; a++) begin
        w[a] = wgt_t'(wa[a]);
        for (int k = 0; k < FOUT; k++) h[a][k] = hsum_t'(ha[a*FOUT+k]);
      end
      for (int k = 0; k < FOUT; k++) c[k] = coef_t'(ca[k]);
      @(negedge clk);
      for (int k = 0; k < FOUT; k++) begin
        int e;
        e = ref_out(S, FOUT, k, wa, ha, ca);
        if (e == 32767 || e == -32768) nsat++;
        checks++;
        if (int'(y[k]) != e) begin
          failures++;
          $display("trial %0d y[%0d]=%0d expected %0d", trial, k, y[k], e);
        end
      end
    end
    checks++;
    if (nsat == 0) begin failures++; $display("saturation never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
