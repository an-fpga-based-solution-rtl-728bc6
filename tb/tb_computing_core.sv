// tb_computing_core: one multi-kernel computing core on the waveform example.
// The image BRAM model holds two 5x5 channels, pixels 1..25 and 26..50; the
// four weight BRAM models hold, for the first channel, the kernels of the
// published waveform (01..09, 91..99, 21..29, b1..b9) and random kernels for
// the second.  The testbench sequences the core like the controller: one tile
// per 8-cycle period, reload on the first tile of each channel, and checks
// that in every period the four psums of the previous period's tile appear.
// For the first channel the expected psums are the values printed in the
// waveform (psum_0: 9b c8 f5 7c a9 d6 5d 8a b7, and so on); for the second
// they are computed with a direct dot product.
`timescale 1ns/1ps
module tb_computing_core;
  import conv_pkg::*;
  localparam int AW = 8, T = TILE_CYCLES, PHW = $clog2(T), H = 5, W = 5;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [PHW-1:0] phase = '0;
  logic ld_valid = 0, reload = 0;
  logic [AW-1:0] img_base = '0, wbase = '0;
  logic [15:0] img_w = 16'(W);
  logic ia_en, ib_en;
  logic [AW-1:0] ia_addr, ib_addr;
  logic [DATA_W-1:0] ia_rdata = '0, ib_rdata = '0;
  logic [NPCORE-1:0] wa_en, wb_en;
  logic [AW-1:0] wa_addr [NPCORE];
  logic [AW-1:0] wb_addr [NPCORE];
  logic [DATA_W-1:0] wa_rdata [NPCORE];
  logic [DATA_W-1:0] wb_rdata [NPCORE];
  logic [PSUM_W-1:0] psum [NPCORE];
  int checks = 0, failures = 0;

  logic [7:0] img [2 * H * W];
  logic [7:0] wmem [NPCORE][18];

  computing_core #(.AW(AW)) dut (.*);

  always @(posedge clk) begin
    if (ia_en) ia_rdata <= img[ia_addr];
    if (ib_en) ib_rdata <= img[ib_addr];
    for (int j = 0; j < NPCORE; j++) begin
      if (wa_en[j]) wa_rdata[j] <= wmem[j][wa_addr[j]];
      if (wb_en[j]) wb_rdata[j] <= wmem[j][wb_addr[j]];
    end
  end

  // psums printed in the waveform, first channel, tiles in row-major order
  logic [7:0] fig_psum [NPCORE][9] = '{
    '{8'h9b, 8'hc8, 8'hf5, 8'h7c, 8'ha9, 8'hd6, 8'h5d, 8'h8a, 8'hb7},
    '{8'h0b, 8'h48, 8'h85, 8'h3c, 8'h79, 8'hb6, 8'h6d, 8'haa, 8'he7},
    '{8'h7b, 8'hc8, 8'h15, 8'hfc, 8'h49, 8'h96, 8'h7d, 8'hca, 8'h17},
    '{8'heb, 8'h48, 8'ha5, 8'hbc, 8'h19, 8'h76, 8'h8d, 8'hea, 8'h47}};

  initial begin
    repeat (4000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [7:0] exp_all [18][NPCORE];
    logic [7:0] e [NPCORE];
    int unsigned base_k [4] = '{8'h01, 8'h91, 8'h21, 8'hb1};
    foreach (img[i]) img[i] = 8'(i + 1);
    foreach (wmem[j, t]) wmem[j][t] = (t < 9) ? 8'(base_k[j] + t) : 8'($urandom);
    foreach (wa_rdata[j]) begin wa_rdata[j] = '0; wb_rdata[j] = '0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    // 18 load periods (2 channels x 9 tiles) and one drain period
    for (int p = 0; p < 19; p++) begin
      int c, y, x;
      bit ld;
      ld = (p < 18);
      c = p / 9; y = (p % 9) / 3; x = p % 3;
      if (ld) begin
        for (int j = 0; j < NPCORE; j++) begin
          int unsigned s;
          s = 0;
          for (int t = 0; t < 9; t++)
            s += wmem[j][c * 9 + t] * img[c * H * W + (y + t / 3) * W + x + t % 3];
          exp_all[p][j] = (c == 0) ? fig_psum[j][p] : 8'(s);
          // the printed values must agree with the arithmetic
          if (c == 0) begin checks++; if (fig_psum[j][p] != 8'(s)) failures++; end
        end
      end
      for (int ph = 0; ph < T; ph++) begin
        phase = PHW'(ph); ld_valid = ld; reload = ld && (p % 9 == 0);
        img_base = AW'(c * H * W + y * W + x); wbase = AW'(c * 9);
        @(negedge clk);
        // psums of the tile loaded in the previous period, from phase 4
        if (p > 0 && ph == 4) begin
          e = exp_all[p - 1];
          for (int j = 0; j < NPCORE; j++) begin
            checks++;
            if (psum[j] != e[j]) begin
              failures++; $display("FAIL period %0d psum%0d %h exp %h", p, j, psum[j], e[j]);
            end
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
