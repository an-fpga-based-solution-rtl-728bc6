// tb_pcore: one PCORE against a direct 3x3 dot product.
// First the tile and kernel of the published waveform's first step (pixels
// 01 02 03 / 06 07 08 / 0b 0c 0d, kernels 01..09, 91..99, 21..29, b1..b9,
// expected psums 9b, 0b, 7b, eb as printed), then random tiles and kernels.
// The psum must be ready from phase 4 and must hold until phase 3 of the
// next period.
`timescale 1ns/1ps
module tb_pcore;
  import conv_pkg::*;
  localparam int T = TILE_CYCLES, PHW = $clog2(T);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [PHW-1:0] phase = '0;
  tile_t weights = '0, tile = '0;
  logic [PSUM_W-1:0] psum;
  int checks = 0, failures = 0;

  pcore dut (.*);

  initial begin
    repeat (4000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [PSUM_W-1:0] dot(tile_t w, tile_t x);
    int unsigned s = 0;
    for (int t = 0; t < 9; t++) s += w[t] * x[t];
    return PSUM_W'(s);
  endfunction

  task automatic period(input tile_t w, input tile_t x, input logic [7:0] exp_psum, input bit use_exp);
    logic [PSUM_W-1:0] e;
    e = use_exp ? exp_psum : dot(w, x);
    weights = w; tile = x;
    for (int ph = 0; ph < T; ph++) begin
      phase = PHW'(ph);
      @(negedge clk);
      // after the edge that ends phase ph
      if (ph >= 3) begin
        checks++;
        if (psum !== e) begin failures++; $display("FAIL psum %h exp %h ph %0d", psum, e, ph); end
      end
    end
  endtask

  initial begin
    tile_t fig_tile;
    fig_tile = 72'h01_02_03_06_07_08_0b_0c_0d;
    repeat (2) @(negedge clk);
    rst_n = 1;
    period(72'h01_02_03_04_05_06_07_08_09, fig_tile, 8'h9b, 1);
    period(72'h91_92_93_94_95_96_97_98_99, fig_tile, 8'h0b, 1);
    period(72'h21_22_23_24_25_26_27_28_29, fig_tile, 8'h7b, 1);
    period(72'hb1_b2_b3_b4_b5_b6_b7_b8_b9, fig_tile, 8'heb, 1);
    for (int n = 0; n < 100; n++)
      period({$urandom, $urandom, 8'($urandom)}, {$urandom, $urandom, 8'($urandom)}, 8'h00, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
