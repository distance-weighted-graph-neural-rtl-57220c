// tb_dense_layer: two dense layers on one configuration bus, a ReLU layer
// (NIN = 5, NOUT = 3, base 0x40) and a linear one (NIN = 3, NOUT = 2, base
// 0x60). Loads random weights, applies 40 random inputs to each and checks the
// outputs one clock later against the reference, including ReLU clipping and
// saturation, and that a write to the other layer's addresses leaves a layer
// unchanged.
module tb_dense_layer;
  import garnet_pkg::*;
  import garnet_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic cfg_we = 1'b0;
  logic [CFG_AW-1:0] cfg_addr = '0;
  logic [CFG_DW-1:0] cfg_data = '0;
  logic in_valid = 1'b0;
  data_t xa [5];
  data_t xb [3];
  data_t ya [3];
  data_t yb [2];
  logic va, vb;
  int checks = 0, failures = 0, nclip = 0;

  dense_layer #(.NIN(5), .NOUT(3), .RELU(1'b1), .BASE(16'h0040)) dut_a (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_data, .in_valid, .x(xa), .out_valid(va), .y(ya));
  dense_layer #(.NIN(3), .NOUT(2), .RELU(1'b0), .BASE(16'h0060)) dut_b (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_data, .in_valid, .x(xb), .out_valid(vb), .y(yb));

  always #5 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic cfg_write(input int addr, input int data);
    @(negedge clk);
    cfg_we = 1'b1; cfg_addr = CFG_AW'(addr); cfg_data = CFG_DW'(data);
    @(negedge clk);
    cfg_we = 1'b0;
  endtask

  initial begin
    int wa[], ba[], wb[], bb[], x1[], x2[], e1[], e2[];
    wa = new[15]; ba = new[3]; wb = new[6]; bb = new[2];
    foreach (wa[i]) wa[i] = int'($urandom_range(1024)) - 512;
    foreach (ba[i]) ba[i] = int'($urandom_range(1024)) - 512;
    foreach (wb[i]) wb[i] = int'($urandom_range(1024)) - 512;
    foreach (bb[i]) bb[i] = int'($urandom_range(1024)) - 512;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    foreach (wa[i]) cfg_write('h40 + i, wa[i]);
    foreach (ba[i]) cfg_write('h40 + 15 + i, ba[i]);
    foreach (wb[i]) cfg_write('h60 + i, wb[i]);
    foreach (bb[i]) cfg_write('h60 + 6 + i, bb[i]);
    cfg_write('h5F, 16'h7FFF);   // just past layer A, before layer B: ignored
    for (int t = 0; t < 40; t++) begin
      int r;
      r = (t % 8 == 0) ? 30000 : 2000;
      x1 = new[5]; x2 = new[3];
      foreach (x1[i]) x1[i] = int'($urandom_range(2*r)) - r;
      foreach (x2[i]) x2[i] = int'($urandom_range(2*r)) - r;
      @(negedge clk);
      in_valid = 1'b1;
      foreach (x1[i]) xa[i] = data_t'(x1[i]);
      foreach (x2[i]) xb[i] = data_t'(x2[i]);
      ref_dense(5, 3, 1'b1, x1, wa, ba, e1);
      ref_dense(3, 2, 1'b0, x2, wb, bb, e2);
      @(negedge clk);
      in_valid = 1'b0;
      checks += 2;
      if (!va || !vb) begin failures++; $display("out_valid missing"); end
      foreach (e1[i]) begin
        checks++;
        if (e1[i] == 0) nclip++;
        if (int'(ya[i]) != e1[i]) begin failures++; $display("t%0d A y%0d=%0d expected %0d", t, i, ya[i], e1[i]); end
      end
      foreach (e2[i]) begin
        checks++;
        if (int'(yb[i]) != e2[i]) begin failures++; $display("t%0d B y%0d=%0d expected %0d", t, i, yb[i], e2[i]); end
      end
    end
    checks++;
    if (nclip == 0) begin failures++; $display("ReLU clipping never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
