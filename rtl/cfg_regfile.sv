// cfg_regfile: run-time loadable weight registers.
//
// NWORDS words of CFG_DW bits. A write with cfg_we high and
// cfg_addr = BASE + i loads cfg_data into word i on the rising clock edge;
// addresses outside [BASE, BASE+NWORDS) are ignored, so several register
// files can share one configuration bus. All words are visible in parallel on
// q. The words are not reset: they must be written before the network is used
// (the integrating system loads all weights after power-up).
module cfg_regfile
  import garnet_pkg::*;
#(
  parameter int unsigned       NWORDS = 16,
  parameter logic [CFG_AW-1:0] BASE   = '0
) (
  input  logic              clk,
  input  logic              cfg_we,
  input  logic [CFG_AW-1:0] cfg_addr,
  input  logic [CFG_DW-1:0] cfg_data,
  output logic [CFG_DW-1:0] q [NWORDS]
);

  localparam int unsigned AW = (NWORDS > 1) ? $clog2(NWORDS) : 1;

  logic [CFG_DW-1:0] mem [NWORDS];
  logic [CFG_AW-1:0] off;

  assign off = cfg_addr - BASE;

  always_ff @(posedge clk) begin
    if (cfg_we && 32'(off) < NWORDS) mem[AW'(off)] <= cfg_data;
  end

  for (genvar i = 0; i < NWORDS; i++) begin : g_rd
    assign q[i] = mem[i];
  end

endmodule
