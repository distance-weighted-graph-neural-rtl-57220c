// garnet_exp_lut: the potential-function table W = exp(-d^2) of a GarNet layer.
//
// The distance d (s3.8, 12 bits) is used unchanged as a 12-bit unsigned table
// address, exactly as the published design does, so entry i holds
// exp(-(signed(i)/256)^2): addresses 0..2047 cover d = 0 .. 7.996 and
// 2048..4095 cover d = -8 .. -0.004. Entries are rounded to nearest in u1.17,
// so W(0) = 2^17 and W falls below half an LSB (reads 0) for |d| above ~3.5.
//
// The table is filled at elaboration time from exp(); synthesis sees a ROM
// with its initial contents. The read is registered: w is valid one clock
// after d. The 4,096-entry size and the address mapping follow the paper; the
// 18-bit u1.17 entry format and rounding are this design's choice.
module garnet_exp_lut
  import garnet_pkg::*;
(
  input  logic  clk,
  input  dist_t d,
  output wgt_t  w
);

  localparam int unsigned ENTRIES = 1 << D_W;   // 4096

  wgt_t rom [ENTRIES];

  // Entry i: exp(-d^2) with d = signed(i) / 2^D_FRAC, rounded to u1.17.
  // Written as a single statement per entry to keep elaboration-time
  // evaluation short.
  initial begin
    for (int i = 0; i < ENTRIES; i++)
      rom[i] = WGT_W'($rtoi($exp(-((real'($signed(D_W'(i))) / real'(1 << D_FRAC)) ** 2))
                            * real'(1 << WGT_FRAC) + 0.5));
  end

  always_ff @(posedge clk) w <= rom[$unsigned(d)];

endmodule
