// garnet_weight_buffer: storage for the potentials W_av of a GarNet layer.
//
// The output transformation needs every W_av of a sample again after the
// aggregators have finished, so the input phase writes them here. The buffer
// has two banks: while the output phase reads the W_av of one sample from one
// bank, the input phase may already write the next sample into the other.
// This is what lets a new sample enter once W, G and L of the previous one are
// known, as the paper requires; the two-bank organisation itself is this
// design's choice.
//
// One word holds the S potentials of the LANES vertices that travel together
// in one beat; a bank holds REUSE words (VMAX vertices). One write port and
// one read port with a registered read (data one clock after `re`).
module garnet_weight_buffer
  import garnet_pkg::*;
#(
  parameter int unsigned LANES = 4,
  parameter int unsigned S     = 4,
  parameter int unsigned REUSE = 32
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic                     wbank,
  input  logic [$clog2(REUSE)-1:0] waddr,
  input  wgt_t                     wdata [LANES][S],
  input  logic                     re,
  input  logic                     rbank,
  input  logic [$clog2(REUSE)-1:0] raddr,
  output wgt_t                     rdata [LANES][S]
);

  localparam int WORD_W = LANES * S * WGT_W;
  typedef logic [WORD_W-1:0] word_t;

  word_t mem [2*REUSE];
  word_t wword, rword;

  always_comb begin
    for (int l = 0; l < LANES; l++)
      for (int a = 0; a < S; a++)
        wword[(l*S + a)*WGT_W +: WGT_W] = wdata[l][a];
  end

  always_ff @(posedge clk) begin
    if (we) mem[{wbank, waddr}] <= wword;
    if (re) rword <= mem[{rbank, raddr}];
  end

  always_comb begin
    for (int l = 0; l < LANES; l++)
      for (int a = 0; a < S; a++)
        rdata[l][a] = rword[(l*S + a)*WGT_W +: WGT_W];
  end

endmodule
