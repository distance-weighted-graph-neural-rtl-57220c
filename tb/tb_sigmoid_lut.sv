// tb_sigmoid_lut: sweeps x over the whole s7.8 range in steps of 13 LSB plus
// the extremes and zero, and checks p one clock later against the logistic
// function computed here (address x >>> 2 clamped to [-512, 511], u0.16
// result saturated at 65535), and that out_valid follows in_valid.
module tb_sigmoid_lut;
  import garnet_pkg::*;
  import garnet_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0, out_valid;
  data_t x = '0;
  logic [15:0] p;
  int checks = 0, failures = 0;

  sigmoid_lut dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input int xv);
    @(negedge clk);
    x = data_t'(xv);
    in_valid = 1'b1;
    @(negedge clk);
    in_valid = 1'b0;
    checks += 2;
    if (!out_valid) begin failures++; $display("out_valid missing"); end
    if (int'(p) != ref_sigmoid(xv)) begin
      failures++;
      $display("x=%0d: p=%0d expected %0d", xv, p, ref_sigmoid(xv));
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    check(0); check(-32768); check(32767); check(-2048); check(2047); check(2048); check(-2049);
    for (int xv = -32768; xv < 32768; xv += 13) check(xv);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
