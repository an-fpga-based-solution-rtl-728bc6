// tb_img_loader: fetches tiles from a model image BRAM.
// A 9x11 image of pseudo-random pixels sits in a two-port memory model with
// one cycle of read latency.  The phase counter runs as the controller runs
// it; in each period the testbench asks for the tile at a random (y, x) (some
// periods without a load) and checks, during the next period, that the tile
// output holds exactly those nine pixels in the waveform's byte order, and
// that it keeps the old tile after a period without a load.
`timescale 1ns/1ps
module tb_img_loader;
  import conv_pkg::*;
  localparam int AW = 8, T = TILE_CYCLES, PHW = $clog2(T), H = 9, W = 11;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [PHW-1:0] phase = '0;
  logic ld_valid = 0;
  logic [AW-1:0] base_addr = '0;
  logic [15:0] img_w = 16'(W);
  logic a_en, b_en;
  logic [AW-1:0] a_addr, b_addr;
  logic [DATA_W-1:0] a_rdata = '0, b_rdata = '0;
  tile_t tile;
  int checks = 0, failures = 0;
  logic [7:0] mem [256];

  img_loader #(.AW(AW)) dut (.*);

  always @(posedge clk) begin
    if (a_en) a_rdata <= mem[a_addr];
    if (b_en) b_rdata <= mem[b_addr];
  end

  initial begin
    repeat (4000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    tile_t expect_t, prev_t;
    bit    loaded;
    foreach (mem[i]) mem[i] = 8'($urandom);
    prev_t = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int p = 0; p < 60; p++) begin
      int y, x;
      y = $urandom % (H - 2); x = $urandom % (W - 2);
      loaded = (p % 5 != 3);
      for (int m = 0; m < 3; m++)
        for (int n = 0; n < 3; n++)
          expect_t[8 - (m * 3 + n)] = mem[(y + m) * W + x + n];
      for (int ph = 0; ph < T; ph++) begin
        phase = PHW'(ph); ld_valid = loaded; base_addr = AW'(y * W + x);
        @(negedge clk);
      end
      ld_valid = 0;
      checks++;
      if (loaded) begin
        if (tile != expect_t) begin failures++; $display("FAIL tile %h exp %h", tile, expect_t); end
        prev_t = expect_t;
      end else if (tile != prev_t) begin
        failures++; $display("FAIL tile changed without load");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
