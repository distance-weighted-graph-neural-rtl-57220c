// tb_garnet_exp_lut: reads all 4,096 entries of the potential table, one per
// clock, and compares each with exp(-d^2) recomputed here (u1.17, rounded),
// with d the 12-bit address taken as s3.8. Also checks the one-clock read
// latency by changing the address every clock.
module tb_garnet_exp_lut;
  import garnet_pkg::*;
  import garnet_ref_pkg::*;

  logic clk = 1'b0;
  dist_t d = '0;
  wgt_t w;
  int checks = 0, failures = 0;

  garnet_exp_lut dut (.clk(clk), .d(d), .w(w));

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    @(negedge clk);
    for (int i = 0; i < 4096; i++) begin
      d = dist_t'(i);
      @(posedge clk);
      #1;
      checks++;
      if (longint'(w) != ref_w(i)) begin
        failures++;
        if (failures < 10) $display("addr %0d: w=%0d expected %0d", i, w, ref_w(i));
      end
      @(negedge clk);
    end
    // Registered read: a new address shows only after the clock edge.
    d = dist_t'(0);
    @(posedge clk); #1;
    d = dist_t'(12'd1024);   // d = 4.0, W = 0
    #1;
    checks++;
    if (w != wgt_t'(1 << 17)) begin failures++; $display("read is not registered"); end
    @(posedge clk); #1;
    checks++;
    if (w != '0) begin failures++; $display("W(4.0) should be 0"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
