// tb_garnet_weight_buffer: fills both banks (LANES = 4, S = 2, REUSE = 8)
// with random words, then reads every word of both banks back while writing
// new data into the opposite bank, checking the data one clock after each
// read and that the bank being written is not disturbed.
module tb_garnet_weight_buffer;
  import garnet_pkg::*;

  localparam int LANES = 4, S = 2, REUSE = 8, AW = $clog2(REUSE);

  logic clk = 1'b0;
  logic we = 1'b0, wbank = 1'b0, re = 1'b0, rbank = 1'b0;
  logic [AW-1:0] waddr = '0, raddr = '0;
  wgt_t wdata [LANES][S];
  wgt_t rdata [LANES][S];
  int checks = 0, failures = 0;
  wgt_t model [2][REUSE][LANES][S];

  garnet_weight_buffer #(.LANES(LANES), .S(S), .REUSE(REUSE)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic randomize_word();
    for (int l = 0; l < LANES; l++) for (int a = 0; a < S; a++) wdata[l][a] = wgt_t'($urandom);
  endtask

  initial begin
    for (int b = 0; b < 2; b++)
      for (int i = 0; i < REUSE; i++) begin
        @(negedge clk);
        we = 1'b1; wbank = b[0]; waddr = AW'(i);
        randomize_word();
        model[b][i] = wdata;
      end
    @(negedge clk);
    we = 1'b0;
    for (int pass = 0; pass < 2; pass++)
      for (int b = 0; b < 2; b++)
        for (int i = 0; i < REUSE; i++) begin
          @(negedge clk);
          re = 1'b1; rbank = b[0]; raddr = AW'(i);
          // Overwrite the other bank meanwhile in the first pass.
          we = (pass == 0); wbank = ~b[0]; waddr = AW'(i);
          randomize_word();
          @(posedge clk);
          if (we) model[~b[0]][i] = wdata;
          #1;
          for (int l = 0; l < LANES; l++) for (int a = 0; a < S; a++) begin
            checks++;
            if (rdata[l][a] != model[b][i][l][a]) begin
              failures++;
              $display("bank %0d word %0d lane %0d agg %0d: %0h expected %0h", b, i, l, a,
                       rdata[l][a], model[b][i][l][a]);
            end
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
