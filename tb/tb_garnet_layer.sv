// tb_garnet_layer: one GarNet layer at reduced size (VMAX = 32, REUSE = 8, so
// four lanes; FIN = 3, S = 2, FOUT = 4) against the reference layer.
//
// Loads random weights through the configuration port, then sends eight
// samples of assorted sizes (full, partial, a single vertex, none) back to
// back whenever in_ready allows. The downstream ready is held low for a while
// so the layer must keep a finished sample, and both banks fill. Checks every
// output feature of every valid vertex, the output framing (first, last,
// vertex count, ceil(V/4) beats per sample), and the input-phase timing: for
// a full sample the aggregators close REUSE + VU_LAT clocks after the first
// beat is accepted (the R_reuse serial passes plus the vertex-unit depth, the
// counterpart of T_W = T0_W + R_reuse).
module tb_garnet_layer;
  import garnet_pkg::*;
  import garnet_ref_pkg::*;

  localparam int VMAX = 32, REUSE = 8, LANES = 4, FIN = 3, S = 2, FOUT = 4, NV_W = 6;
  localparam int NS = 8;
  localparam int SIZES [NS] = '{32, 17, 32, 1, 0, 32, 9, 32};

  logic clk = 1'b0, rst_n = 1'b0;
  logic cfg_we = 1'b0;
  logic [CFG_AW-1:0] cfg_addr = '0;
  logic [CFG_DW-1:0] cfg_data = '0;
  logic in_ready, in_valid = 1'b0, in_first = 1'b0, in_last = 1'b0;
  logic [NV_W-1:0] in_nvtx = '0;
  data_t in_feat [LANES][FIN];
  logic out_ready = 1'b0;
  logic out_valid, out_first, out_last;
  logic [NV_W-1:0] out_nvtx;
  data_t out_feat [LANES][FOUT];

  garnet_layer #(.VMAX(VMAX), .REUSE(REUSE), .FIN(FIN), .S(S), .FOUT(FOUT), .BASE(16'h0100)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  int al[], be[], wt[], bt[], cc[];
  int feats [NS][];
  int expy [NS][];
  longint t_first [NS];
  int n_hold = 0;

  function automatic int rnd(input int lo, input int hi);
    return lo + int'($urandom_range(hi - lo));
  endfunction

  task automatic cfg_write(input int addr, input int data);
    @(negedge clk);
    cfg_we = 1'b1; cfg_addr = CFG_AW'(addr); cfg_data = CFG_DW'(data);
    @(negedge clk);
    cfg_we = 1'b0;
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Gather timing of the first (full) sample.
  initial begin
    @(posedge rst_n);
    @(posedge clk iff (dut.u_acc.done));
    checks++;
    if (cyc - t_first[0] != REUSE + VU_LAT) begin
      failures++;
      $display("gather took %0d clocks, expected %0d", cyc - t_first[0], REUSE + VU_LAT);
    end
  end

  // Hold downstream for a while, then release it.
  always @(posedge clk) if (rst_n && !out_ready && int'(dut.bank_state[dut.rb]) == 2) n_hold++;
  initial begin
    out_ready = 1'b0;
    @(posedge rst_n);
    repeat (1300) @(posedge clk);
    @(negedge clk);
    out_ready = 1'b1;
  end

  // Output checker.
  int os = 0, ob = 0;
  always @(posedge clk) if (rst_n && out_valid) begin
    int nb;
    nb = (SIZES[os] == 0) ? 1 : (SIZES[os] + LANES - 1) / LANES;
    checks += 3;
    if (out_first != (ob == 0)) begin failures++; $display("s%0d b%0d: bad first", os, ob); end
    if (out_last != (ob == nb - 1)) begin failures++; $display("s%0d b%0d: bad last", os, ob); end
    if (int'(out_nvtx) != SIZES[os]) begin failures++; $display("s%0d: bad nvtx", os); end
    for (int l = 0; l < LANES; l++) begin
      int v;
      v = ob*LANES + l;
      if (v < SIZES[os])
        for (int k = 0; k < FOUT; k++) begin
          checks++;
          if (int'(out_feat[l][k]) != expy[os][v*FOUT+k]) begin
            failures++;
            $display("s%0d v%0d k%0d: %0d expected %0d", os, v, k, out_feat[l][k], expy[os][v*FOUT+k]);
          end
        end
    end
    if (out_last) begin os++; ob = 0; end else ob++;
  end

  initial begin
    for (int l = 0; l < LANES; l++) for (int j = 0; j < FIN; j++) in_feat[l][j] = '0;
    al = new[S*FIN]; be = new[S]; wt = new[S*FOUT*FIN]; bt = new[S*FOUT]; cc = new[FOUT];
    foreach (al[i]) al[i] = rnd(-96, 96);
    foreach (be[i]) be[i] = rnd(-128, 128);
    foreach (wt[i]) wt[i] = rnd(-3, 3);
    foreach (bt[i]) bt[i] = rnd(-2, 2);
    foreach (cc[i]) cc[i] = rnd(-256, 256);
    for (int s = 0; s < NS; s++) begin
      feats[s] = new[VMAX*FIN];
      foreach (feats[s][i]) feats[s][i] = rnd(-512, 512);
      ref_layer(VMAX, SIZES[s], FIN, S, FOUT, 0, feats[s], al, be, wt, bt, cc, expy[s]);
    end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    begin
      int off;
      off = 'h100;
      foreach (al[i]) begin cfg_write(off, al[i]); off++; end
      foreach (be[i]) begin cfg_write(off, be[i]); off++; end
      foreach (wt[i]) begin cfg_write(off, wt[i]); off++; end
      foreach (bt[i]) begin cfg_write(off, bt[i]); off++; end
      foreach (cc[i]) begin cfg_write(off, cc[i]); off++; end
    end
    for (int s = 0; s < NS; s++) begin
      int nb;
      nb = (SIZES[s] == 0) ? 1 : (SIZES[s] + LANES - 1) / LANES;
      @(negedge clk);
      while (!in_ready) @(negedge clk);
      for (int b = 0; b < nb; b++) begin
        in_valid = 1'b1; in_first = (b == 0); in_last = (b == nb - 1);
        in_nvtx = NV_W'(SIZES[s]);
        for (int l = 0; l < LANES; l++)
          for (int j = 0; j < FIN; j++)
            in_feat[l][j] = (b*LANES + l < SIZES[s]) ? data_t'(feats[s][(b*LANES+l)*FIN+j])
                                                    : data_t'($urandom);
        if (b == 0) t_first[s] = cyc;
        @(negedge clk);
      end
      in_valid = 1'b0; in_first = 1'b0; in_last = 1'b0;
    end
    wait (os == NS);
    repeat (10) @(posedge clk);
    checks += 2;
    if (n_hold == 0) begin failures++; $display("downstream hold never exercised"); end
    if (out_valid) begin failures++; $display("extra output"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
