// garnet_layer: one simplified GarNet graph layer.
//
// A sample is a set of V <= VMAX vertices with FIN features each. The layer
// learns a distance d_av from every vertex to S aggregators, gathers the
// vertices at the aggregators weighted by W_av = exp(-d_av^2), transforms the
// gathered information with the contracted encoder/decoder weights and sends
// it back to every vertex with the same weights, giving FOUT features per
// vertex. There are no input edges: the graph is the complete bipartite graph
// between vertices and aggregators, weighted by W_av.
//
// Structure (paper: V_max/R_reuse vertex units, each reused R_reuse times):
//   input phase   LANES = VMAX/REUSE garnet_vertex_unit copies take LANES
//                 vertices per clock; garnet_accumulator forms G_ja and L_a;
//                 the W_av go into garnet_weight_buffer.
//   output phase  garnet_agg_transform forms H_ka = wt.G + bt.L once per
//                 sample, then LANES garnet_output_unit copies read the W_av
//                 back and emit g'_kv = sum_a W_av H_ka + c_k, LANES vertices
//                 per clock.
// The two phases work on different banks of the weight buffer, so sample n+1
// can be gathered while sample n is scattered. A sample of V vertices takes
// ceil(V/LANES) beats (at least one) in each phase: the serial reuse ends
// early for small samples.
//
// Stream interface (in and out alike): a beat carries LANES vertices, vertex
// beat*LANES + l in lane l; `first`/`last` mark the first and last beat and
// `nvtx` (V) is valid with `first`. Lanes at or beyond V carry don't-care data.
// Flow control is per sample: `in_ready` high means a sample may begin with a
// `first` beat; once begun, beats are accepted on every clock `in_valid` is
// high. The layer starts emitting a sample only while `out_ready` (the next
// stage's in_ready) is high.
//
// Timing: the accumulators close a sample VU_LAT+1 clocks after its last beat;
// the output phase then needs 1 clock to start, 1 for the aggregator transform,
// ceil(V/LANES) read clocks, and its first beat leaves 2 clocks after the first
// read. It waits 2 more clocks after a sample before starting the next.
//
// Weights are registers written through the configuration port (cfg_we,
// cfg_addr, cfg_data), word offsets from BASE:
//   alpha[a][j]  a*FIN + j                        (coef_t, s7.8)
//   beta[a]      S*FIN + a                        (coef_t)
//   wt[a][k][j]  S*FIN + S + (a*FOUT + k)*FIN + j (low TW_W bits, signed)
//   bt[a][k]     S*FIN + S + S*FOUT*FIN + a*FOUT + k
//   c[k]         S*FIN + S + S*FOUT*(FIN+1) + k   (coef_t)
// The paper fixes the contracted weights at synthesis time; loading them at
// run time, the stream framing and the handshake are this design's choices.
module garnet_layer
  import garnet_pkg::*;
#(
  parameter int unsigned VMAX    = 128,
  parameter int unsigned REUSE   = 32,
  parameter int unsigned FIN     = 4,
  parameter int unsigned S       = 4,
  parameter int unsigned FOUT    = 8,
  parameter int unsigned TW_W    = 8,
  parameter int unsigned TW_FRAC = 0,
  parameter logic [CFG_AW-1:0] BASE = '0,
  localparam int unsigned LANES = VMAX / REUSE,
  localparam int unsigned NV_W  = $clog2(VMAX + 1)
) (
  input  logic                clk,
  input  logic                rst_n,
  // configuration
  input  logic                cfg_we,
  input  logic [CFG_AW-1:0]   cfg_addr,
  input  logic [CFG_DW-1:0]   cfg_data,
  // input vertex stream
  output logic                in_ready,
  input  logic                in_valid,
  input  logic                in_first,
  input  logic                in_last,
  input  logic [NV_W-1:0]     in_nvtx,
  input  data_t               in_feat [LANES][FIN],
  // output vertex stream
  input  logic                out_ready,
  output logic                out_valid,
  output logic                out_first,
  output logic                out_last,
  output logic [NV_W-1:0]     out_nvtx,
  output data_t               out_feat [LANES][FOUT]
);

  localparam int unsigned BW       = (REUSE > 1) ? $clog2(REUSE) : 1;
  localparam int unsigned OFF_BETA = S * FIN;
  localparam int unsigned OFF_WT   = OFF_BETA + S;
  localparam int unsigned OFF_BT   = OFF_WT + S * FOUT * FIN;
  localparam int unsigned OFF_C    = OFF_BT + S * FOUT;
  localparam int unsigned NWORDS   = OFF_C + FOUT;

  initial assert (LANES * REUSE == VMAX) else $error("VMAX must be a multiple of REUSE");

  // ------------------------------------------------------------------
  // Weight registers
  // ------------------------------------------------------------------
  coef_t                  alpha [S][FIN];
  coef_t                  beta  [S];
  logic signed [TW_W-1:0] wt    [S][FOUT][FIN];
  logic signed [TW_W-1:0] bt    [S][FOUT];
  coef_t                  c     [FOUT];

  logic [CFG_DW-1:0] wreg [NWORDS];

  cfg_regfile #(.NWORDS(NWORDS), .BASE(BASE)) u_wregs (
    .clk(clk), .cfg_we(cfg_we), .cfg_addr(cfg_addr), .cfg_data(cfg_data),
    .q(wreg));

  for (genvar a = 0; a < S; a++) begin : g_wa
    assign beta[a] = coef_t'(wreg[OFF_BETA + a]);
    for (genvar j = 0; j < FIN; j++) begin : g_wj
      assign alpha[a][j] = coef_t'(wreg[a*FIN + j]);
    end
    for (genvar k = 0; k < FOUT; k++) begin : g_wk
      assign bt[a][k] = wreg[OFF_BT + a*FOUT + k][TW_W-1:0];
      for (genvar j = 0; j < FIN; j++) begin : g_wkj
        assign wt[a][k][j] = wreg[OFF_WT + (a*FOUT + k)*FIN + j][TW_W-1:0];
      end
    end
  end
  for (genvar k = 0; k < FOUT; k++) begin : g_wc
    assign c[k] = coef_t'(wreg[OFF_C + k]);
  end

  // ------------------------------------------------------------------
  // Bank bookkeeping
  // ------------------------------------------------------------------
  typedef enum logic [1:0] {BANK_FREE, BANK_FILLING, BANK_FULL} bank_state_e;

  bank_state_e         bank_state [2];
  agg_t                g_bank     [2][S][FIN];
  agg_t                l_bank     [2][S];
  logic [NV_W-1:0]     nvtx_bank  [2];

  // ------------------------------------------------------------------
  // Input phase
  // ------------------------------------------------------------------
  logic            in_sample;      // between an accepted first and last beat
  logic            wb;             // bank being written by the next/current sample
  logic [BW-1:0]   beat_cnt;
  logic [NV_W-1:0] cur_nvtx;

  logic            accept;
  logic [BW-1:0]   beat_idx;
  logic [NV_W-1:0] beat_nvtx;
  logic [LANES-1:0] beat_mask;

  assign in_ready  = !in_sample && (bank_state[wb] == BANK_FREE);
  assign accept    = in_valid && (in_sample || in_first);
  assign beat_idx  = in_first ? '0 : beat_cnt;
  assign beat_nvtx = in_first ? in_nvtx : cur_nvtx;

  always_comb begin
    for (int l = 0; l < LANES; l++)
      beat_mask[l] = (32'(beat_idx) * LANES + l) < 32'(beat_nvtx);
  end

  // Sideband pipeline, aligned with the vertex units.
  logic             p_valid [VU_LAT];
  logic             p_first [VU_LAT];
  logic             p_last  [VU_LAT];
  logic             p_bank  [VU_LAT];
  logic [BW-1:0]    p_beat  [VU_LAT];
  logic [LANES-1:0] p_mask  [VU_LAT];
  logic [NV_W-1:0]  p_nvtx  [VU_LAT];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < VU_LAT; i++) begin
        p_valid[i] <= 1'b0; p_first[i] <= 1'b0; p_last[i] <= 1'b0; p_bank[i] <= 1'b0;
        p_beat[i] <= '0; p_mask[i] <= '0; p_nvtx[i] <= '0;
      end
    end else begin
      p_valid[0] <= accept;
      p_first[0] <= in_first;
      p_last[0]  <= in_last;
      p_bank[0]  <= wb;
      p_beat[0]  <= beat_idx;
      p_mask[0]  <= beat_mask;
      p_nvtx[0]  <= beat_nvtx;
      for (int i = 1; i < VU_LAT; i++) begin
        p_valid[i] <= p_valid[i-1]; p_first[i] <= p_first[i-1]; p_last[i] <= p_last[i-1];
        p_bank[i] <= p_bank[i-1]; p_beat[i] <= p_beat[i-1]; p_mask[i] <= p_mask[i-1];
        p_nvtx[i] <= p_nvtx[i-1];
      end
    end
  end

  // Vertex units.
  wgt_t vu_w  [LANES][S];
  wg_t  vu_wg [LANES][S][FIN];
  wgt_t wb_data [LANES][S];

  for (genvar l = 0; l < LANES; l++) begin : g_vu
    garnet_vertex_unit #(.FIN(FIN), .S(S)) u_vu (
      .clk(clk), .g(in_feat[l]), .alpha(alpha), .beta(beta),
      .w(vu_w[l]), .wg(vu_wg[l]));
  end

  always_comb begin
    for (int l = 0; l < LANES; l++)
      for (int a = 0; a < S; a++)
        wb_data[l][a] = p_mask[VU_LAT-1][l] ? vu_w[l][a] : '0;
  end

  // Aggregators.
  logic acc_done;
  agg_t acc_g [S][FIN];
  agg_t acc_l [S];
  logic            done_bank;
  logic [NV_W-1:0] done_nvtx;

  garnet_accumulator #(.LANES(LANES), .S(S), .FIN(FIN), .VMAX(VMAX)) u_acc (
    .clk(clk), .rst_n(rst_n),
    .valid(p_valid[VU_LAT-1]), .first(p_first[VU_LAT-1]), .last(p_last[VU_LAT-1]),
    .mask(p_mask[VU_LAT-1]), .w(vu_w), .wg(vu_wg),
    .done(acc_done), .g_sum(acc_g), .l_sum(acc_l));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      done_bank <= 1'b0;
      done_nvtx <= '0;
    end else if (p_valid[VU_LAT-1] && p_last[VU_LAT-1]) begin
      done_bank <= p_bank[VU_LAT-1];
      done_nvtx <= p_nvtx[VU_LAT-1];
    end
  end

  // ------------------------------------------------------------------
  // Output phase
  // ------------------------------------------------------------------
  typedef enum logic [1:0] {SC_IDLE, SC_AGG, SC_RUN, SC_DRAIN} sc_state_e;

  sc_state_e       sc_state;
  logic            rb;
  logic [BW-1:0]   rbeat;
  logic [BW:0]     nbeats;
  logic [NV_W-1:0] sc_nvtx;
  logic [1:0]      drain_cnt;
  logic            sc_start, sc_issue, sc_issue_last;

  assign sc_start      = (sc_state == SC_IDLE) && (bank_state[rb] == BANK_FULL) && out_ready;
  assign sc_issue      = (sc_state == SC_RUN);
  assign sc_issue_last = sc_issue && ((BW+1)'(rbeat) + 1'b1 == nbeats);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sc_state  <= SC_IDLE;
      rb        <= 1'b0;
      rbeat     <= '0;
      nbeats    <= '0;
      sc_nvtx   <= '0;
      drain_cnt <= '0;
    end else begin
      unique case (sc_state)
        SC_IDLE: if (sc_start) begin
          sc_state <= SC_AGG;
          sc_nvtx  <= nvtx_bank[rb];
          nbeats   <= (nvtx_bank[rb] == 0) ? (BW+1)'(1)
                      : (BW+1)'((32'(nvtx_bank[rb]) + LANES - 1) / LANES);
          rbeat    <= '0;
        end
        SC_AGG: sc_state <= SC_RUN;
        SC_RUN: begin
          rbeat <= rbeat + 1'b1;
          if (sc_issue_last) begin
            sc_state  <= SC_DRAIN;
            drain_cnt <= 2'd1;
            rb        <= ~rb;
          end
        end
        SC_DRAIN: begin
          drain_cnt <= drain_cnt - 1'b1;
          if (drain_cnt == 0) sc_state <= SC_IDLE;
        end
        default: sc_state <= SC_IDLE;
      endcase
    end
  end

  // Input-phase bank pointer and bank states.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_sample <= 1'b0;
      wb        <= 1'b0;
      beat_cnt  <= '0;
      cur_nvtx  <= '0;
      for (int b = 0; b < 2; b++) begin
        bank_state[b] <= BANK_FREE;
        nvtx_bank[b]  <= '0;
        for (int a = 0; a < S; a++) begin
          l_bank[b][a] <= '0;
          for (int j = 0; j < FIN; j++) g_bank[b][a][j] <= '0;
        end
      end
    end else begin
      if (accept) begin
        beat_cnt <= beat_idx + 1'b1;
        if (in_first) begin
          cur_nvtx <= in_nvtx;
          bank_state[wb] <= BANK_FILLING;
        end
        if (in_last) begin
          in_sample <= 1'b0;
          wb        <= ~wb;
        end else begin
          in_sample <= 1'b1;
        end
      end
      if (acc_done) begin
        bank_state[done_bank] <= BANK_FULL;
        g_bank[done_bank]     <= acc_g;
        l_bank[done_bank]     <= acc_l;
        nvtx_bank[done_bank]  <= done_nvtx;
      end
      if (sc_issue_last) bank_state[rb] <= BANK_FREE;
    end
  end

  wgt_t  rd_w [LANES][S];
  hsum_t h    [S][FOUT];

  garnet_weight_buffer #(.LANES(LANES), .S(S), .REUSE(REUSE)) u_wbuf (
    .clk(clk),
    .we(p_valid[VU_LAT-1]), .wbank(p_bank[VU_LAT-1]), .waddr(p_beat[VU_LAT-1]), .wdata(wb_data),
    .re(sc_issue), .rbank(rb), .raddr(rbeat), .rdata(rd_w));

  garnet_agg_transform #(.FIN(FIN), .S(S), .FOUT(FOUT), .TW_W(TW_W), .TW_FRAC(TW_FRAC)) u_xform (
    .clk(clk), .start(sc_start), .g_sum(g_bank[rb]), .l_sum(l_bank[rb]),
    .wt(wt), .bt(bt), .h(h));

  for (genvar l = 0; l < LANES; l++) begin : g_ou
    garnet_output_unit #(.S(S), .FOUT(FOUT)) u_ou (
      .clk(clk), .w(rd_w[l]), .h(h), .c(c), .y(out_feat[l]));
  end

  // Output sideband: read issue -> buffer data (1) -> output unit (2).
  logic            q_valid [2];
  logic            q_first [2];
  logic            q_last  [2];
  logic [NV_W-1:0] q_nvtx  [2];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < 2; i++) begin
        q_valid[i] <= 1'b0; q_first[i] <= 1'b0; q_last[i] <= 1'b0; q_nvtx[i] <= '0;
      end
    end else begin
      q_valid[0] <= sc_issue;
      q_first[0] <= sc_issue && (rbeat == 0);
      q_last[0]  <= sc_issue_last;
      q_nvtx[0]  <= sc_nvtx;
      q_valid[1] <= q_valid[0];
      q_first[1] <= q_first[0];
      q_last[1]  <= q_last[0];
      q_nvtx[1]  <= q_nvtx[0];
    end
  end

  assign out_valid = q_valid[1];
  assign out_first = q_first[1];
  assign out_last  = q_last[1];
  assign out_nvtx  = q_nvtx[1];

  // ------------------------------------------------------------------
  // Protocol checks
  // ------------------------------------------------------------------
  always_ff @(posedge clk) begin
    if (rst_n && in_valid) begin
      // A sample may only begin while in_ready is high.
      if (in_first) assert (in_ready) else $error("garnet_layer: sample started while not ready");
      // A beat that is not a first beat must belong to an open sample.
      if (!in_first) assert (in_sample) else $error("garnet_layer: beat outside a sample");
      // No sample may have more than REUSE beats.
      if (!in_first) assert (32'(beat_cnt) < REUSE) else $error("garnet_layer: too many beats");
    end
  end

endmodule
