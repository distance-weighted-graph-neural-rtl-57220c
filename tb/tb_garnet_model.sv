// tb_garnet_model: end-to-end test of the whole network at its default size
// (VMAX = 128, REUSE = 32, four vertex lanes per layer).
//
// Loads random weights through the configuration port (small contracted
// integer weights for the GarNet layers, s7.8 values elsewhere), then streams
// a mix of full and partial clusters back to back, as fast as in_ready allows.
// Every result (electron probability and energy) is compared bit for bit with
// the reference model of garnet_ref_pkg. It also measures the latency of a
// full cluster and the steady-state interval between full clusters (third to
// fourth of four full clusters sent back to back), and counts the
// mechanisms the design relies on: early end of the serial loop for small
// clusters, input-phase/output-phase overlap inside a layer, input stalls
// (in_ready low with a cluster waiting) and a layer holding a finished sample
// because the next layer was busy. A mechanism that never occurred is a
// failure.
module tb_garnet_model;
  import garnet_pkg::*;
  import garnet_ref_pkg::*;

  localparam int VMAX = 128, REUSE = 32, LANES = VMAX / REUSE, FIN = 4, NV_W = 8;
  localparam int NS = 10;
  localparam int SIZES [NS] = '{128, 128, 128, 128, 37, 1, 0, 64, 5, 128};

  logic clk = 1'b0, rst_n = 1'b0;
  logic cfg_we = 1'b0;
  logic [CFG_AW-1:0] cfg_addr = '0;
  logic [CFG_DW-1:0] cfg_data = '0;
  logic in_ready, in_valid = 1'b0, in_first = 1'b0, in_last = 1'b0;
  logic [NV_W-1:0] in_nvtx = '0;
  data_t in_feat [LANES][FIN];
  logic out_valid;
  logic [15:0] out_prob;
  data_t out_energy;

  garnet_model dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // Weights, flat (see garnet_ref_pkg).
  int al[3][], be[3][], wt[3][], bt[3][], cc[3][];
  int d1w[], d1b[], d2w[], d2b[], cw[], cb[], rw[], rb[];
  int LFIN [3] = '{4, 8, 8};
  int LS   [3] = '{4, 4, 8};
  int LFO  [3] = '{8, 8, 16};
  int LBASE[3] = '{'h0000, 'h0400, 'h0800};

  int feats [NS][];
  int exp_prob [NS], exp_en [NS];
  longint t_first [NS], t_out [NS];
  int n_out = 0;

  function automatic int rnd(input int lo, input int hi);
    return lo + int'($urandom_range(hi - lo));
  endfunction

  task automatic cfg_write(input int addr, input int data);
    @(negedge clk);
    cfg_we = 1'b1; cfg_addr = CFG_AW'(addr); cfg_data = CFG_DW'(data);
    @(negedge clk);
    cfg_we = 1'b0;
  endtask

  // Reference chain for one cluster.
  task automatic reference(input int s);
    int x[], y[], m[], h1[], h2[], o1[], o2[];
    x = feats[s];
    for (int l = 0; l < 3; l++) begin
      ref_layer(VMAX, SIZES[s], LFIN[l], LS[l], LFO[l], 0, x, al[l], be[l], wt[l], bt[l], cc[l], y);
      x = y;
    end
    m = new[16];
    for (int k = 0; k < 16; k++) m[k] = ref_mean(SIZES[s], 16, k, x);
    ref_dense(16, 16, 1'b1, m, d1w, d1b, h1);
    ref_dense(16, 8, 1'b1, h1, d2w, d2b, h2);
    ref_dense(8, 1, 1'b0, h2, cw, cb, o1);
    ref_dense(8, 1, 1'b0, h2, rw, rb, o2);
    exp_prob[s] = ref_sigmoid(o1[0]);
    exp_en[s]   = o2[0] & 16'hFFFF;
  endtask

  // Mechanism counters.
  int n_early = 0, n_overlap = 0, n_stall = 0, n_hold = 0;
  bit waiting = 1'b0;

  always @(posedge clk) if (rst_n) begin
    if ((dut.u_gn1.accept && dut.u_gn1.sc_issue) || (dut.u_gn2.accept && dut.u_gn2.sc_issue) ||
        (dut.u_gn3.accept && dut.u_gn3.sc_issue)) n_overlap++;
    if (waiting && !in_ready) n_stall++;
    if ((int'(dut.u_gn1.bank_state[dut.u_gn1.rb]) == 2 && !dut.u_gn2.in_ready && dut.u_gn1.sc_state == dut.u_gn1.SC_IDLE) ||
        (int'(dut.u_gn2.bank_state[dut.u_gn2.rb]) == 2 && !dut.u_gn3.in_ready && dut.u_gn2.sc_state == dut.u_gn2.SC_IDLE))
      n_hold++;
  end

  // Output monitor.
  always @(posedge clk) if (rst_n && out_valid) begin
    if (n_out < NS) begin
      t_out[n_out] = cyc;
      $display("sample %0d (V=%0d): prob %0d energy %0d", n_out, SIZES[n_out], out_prob, out_energy);
      checks += 2;
      if (int'(out_prob) != exp_prob[n_out]) begin
        failures++;
        $display("sample %0d: prob %0d expected %0d", n_out, out_prob, exp_prob[n_out]);
      end
      if ((int'(out_energy) & 16'hFFFF) != exp_en[n_out]) begin
        failures++;
        $display("sample %0d: energy %0d expected %0d", n_out, out_energy, $signed(16'(exp_en[n_out])));
      end
    end else begin
      failures++;
      $display("unexpected extra output");
    end
    n_out++;
  end

  initial begin
    // Watchdog.
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired, %0d outputs seen", n_out);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int l = 0; l < LANES; l++) for (int j = 0; j < FIN; j++) in_feat[l][j] = '0;
    // Random weights.
    for (int l = 0; l < 3; l++) begin
      int amax;
      amax = (l == 0) ? 48 : 10;
      al[l] = new[LS[l]*LFIN[l]]; be[l] = new[LS[l]]; wt[l] = new[LS[l]*LFO[l]*LFIN[l]];
      bt[l] = new[LS[l]*LFO[l]]; cc[l] = new[LFO[l]];
      foreach (al[l][i]) al[l][i] = rnd(-amax, amax);
      foreach (be[l][i]) be[l][i] = rnd(-128, 128);
      foreach (wt[l][i]) wt[l][i] = rnd(-3, 3);
      foreach (bt[l][i]) bt[l][i] = rnd(-2, 2);
      foreach (cc[l][i]) cc[l][i] = rnd(-256, 256);
    end
    d1w = new[256]; d1b = new[16]; d2w = new[128]; d2b = new[8];
    cw = new[8]; cb = new[1]; rw = new[8]; rb = new[1];
    foreach (d1w[i]) d1w[i] = rnd(-64, 64);
    foreach (d1b[i]) d1b[i] = rnd(-128, 128);
    foreach (d2w[i]) d2w[i] = rnd(-64, 64);
    foreach (d2b[i]) d2b[i] = rnd(-128, 128);
    foreach (cw[i])  cw[i]  = rnd(-256, 256);
    foreach (rw[i])  rw[i]  = rnd(-256, 256);
    cb[0] = rnd(-128, 128); rb[0] = rnd(-128, 128);

    for (int s = 0; s < NS; s++) begin
      feats[s] = new[VMAX*FIN];
      foreach (feats[s][i]) feats[s][i] = rnd(-512, 512);
      reference(s);
    end

    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // Load weights.
    for (int l = 0; l < 3; l++) begin
      int off;
      off = LBASE[l];
      foreach (al[l][i]) begin cfg_write(off, al[l][i]); off++; end
      foreach (be[l][i]) begin cfg_write(off, be[l][i]); off++; end
      foreach (wt[l][i]) begin cfg_write(off, wt[l][i]); off++; end
      foreach (bt[l][i]) begin cfg_write(off, bt[l][i]); off++; end
      foreach (cc[l][i]) begin cfg_write(off, cc[l][i]); off++; end
    end
    foreach (d1w[i]) cfg_write('h1000 + i, d1w[i]);
    foreach (d1b[i]) cfg_write('h1000 + 256 + i, d1b[i]);
    foreach (d2w[i]) cfg_write('h1200 + i, d2w[i]);
    foreach (d2b[i]) cfg_write('h1200 + 128 + i, d2b[i]);
    foreach (cw[i])  cfg_write('h1300 + i, cw[i]);
    cfg_write('h1300 + 8, cb[0]);
    foreach (rw[i])  cfg_write('h1310 + i, rw[i]);
    cfg_write('h1310 + 8, rb[0]);

    // Stream the clusters.
    for (int s = 0; s < NS; s++) begin
      int nb;
      nb = (SIZES[s] == 0) ? 1 : (SIZES[s] + LANES - 1) / LANES;
      if (nb < REUSE) n_early++;
      @(negedge clk);
      waiting = 1'b1;
      while (!in_ready) @(negedge clk);
      waiting = 1'b0;
      for (int b = 0; b < nb; b++) begin
        in_valid = 1'b1;
        in_first = (b == 0);
        in_last  = (b == nb - 1);
        in_nvtx  = NV_W'(SIZES[s]);
        for (int l = 0; l < LANES; l++)
          for (int j = 0; j < FIN; j++)
            in_feat[l][j] = (b*LANES + l < SIZES[s]) ? data_t'(feats[s][(b*LANES+l)*FIN+j])
                                                    : data_t'($urandom);
        if (b == 0) t_first[s] = cyc;
        @(negedge clk);
      end
      in_valid = 1'b0; in_first = 1'b0; in_last = 1'b0;
    end

    wait (n_out == NS);
    repeat (20) @(posedge clk);

    begin
      longint lat, ii;
      lat = t_out[0] - t_first[0];
      ii  = t_first[3] - t_first[2];
      $display("full cluster: latency %0d clocks, interval %0d clocks", lat, ii);
      $display("mechanisms: early-end %0d, overlap %0d, input stall %0d, hold %0d",
               n_early, n_overlap, n_stall, n_hold);
      // Trigger budget: about 1 us at 200 MHz (200 clocks); the published HLS
      // build of the quantized network has an interval of 50 clocks.
      checks += 2;
      if (lat > 200) begin failures++; $display("latency above 200 clocks"); end
      if (ii > 50) begin failures++; $display("interval above 50 clocks"); end
      checks++;
      if (n_early == 0 || n_overlap == 0 || n_stall == 0 || n_hold == 0) begin
        failures++;
        $display("a mechanism never occurred");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
