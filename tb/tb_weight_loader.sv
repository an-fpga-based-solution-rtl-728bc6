// tb_weight_loader: weight-stationary fetch from four model weight BRAMs.
// Each period the testbench either asks for a reload at a random kernel
// channel (wbase = 9*n) or not.  After a reload period the four outputs must
// hold the nine taps of that channel from each BRAM; in the reload period
// itself and after a period without reload they must keep the old weights.
`timescale 1ns/1ps
module tb_weight_loader;
  import conv_pkg::*;
  localparam int AW = 8, T = TILE_CYCLES, PHW = $clog2(T), NCH = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [PHW-1:0] phase = '0;
  logic ld_valid = 0, reload = 0;
  logic [AW-1:0] wbase = '0;
  logic [NPCORE-1:0] a_en, b_en;
  logic [AW-1:0] a_addr [NPCORE];
  logic [AW-1:0] b_addr [NPCORE];
  logic [DATA_W-1:0] a_rdata [NPCORE];
  logic [DATA_W-1:0] b_rdata [NPCORE];
  tile_t weights [NPCORE];
  int checks = 0, failures = 0;
  logic [7:0] mem [NPCORE][NCH * 9];

  weight_loader #(.AW(AW)) dut (.*);

  always @(posedge clk)
    for (int j = 0; j < NPCORE; j++) begin
      if (a_en[j]) a_rdata[j] <= mem[j][a_addr[j]];
      if (b_en[j]) b_rdata[j] <= mem[j][b_addr[j]];
    end

  initial begin
    repeat (4000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    tile_t cur [NPCORE];
    tile_t nxt [NPCORE];
    bit rl;
    foreach (mem[j, i]) mem[j][i] = 8'($urandom);
    foreach (cur[j]) cur[j] = '0;
    foreach (a_rdata[j]) begin a_rdata[j] = '0; b_rdata[j] = '0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int p = 0; p < 60; p++) begin
      int n;
      n  = $urandom % NCH;
      rl = ($urandom % 3 != 0);
      for (int j = 0; j < NPCORE; j++)
        for (int t = 0; t < 9; t++) nxt[j][8 - t] = mem[j][n * 9 + t];
      for (int ph = 0; ph < T; ph++) begin
        phase = PHW'(ph); ld_valid = 1; reload = rl; wbase = AW'(n * 9);
        @(negedge clk);
        // the old weights stay in place during the whole fetch period
        if (ph == T - 2)
          for (int j = 0; j < NPCORE; j++) begin
            checks++;
            if (weights[j] != cur[j]) begin failures++; $display("FAIL weights changed early"); end
          end
      end
      if (rl) cur = nxt;
      for (int j = 0; j < NPCORE; j++) begin
        checks++;
        if (weights[j] != cur[j]) begin failures++; $display("FAIL w[%0d] %h exp %h", j, weights[j], cur[j]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
