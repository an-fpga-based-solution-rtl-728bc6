// tb_output_bram_bank: the four output BRAMs.
// The DMA side writes a bias pattern into every region, the accumulator side
// reads each word, adds a per-BRAM increment and writes it back (the
// read-modify-write the accumulators do), and the DMA side reads everything
// back and checks bias + increment, wrapped to 8 bits.
`timescale 1ns/1ps
module tb_output_bram_bank;
  import conv_pkg::*;
  localparam int D = 20, AW = 5;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic dma_en = 0, dma_we = 0;
  logic [REGION_W-1:0] dma_region = '0;
  logic [AW-1:0] dma_addr = '0;
  logic [31:0] dma_wdata = '0, dma_rdata;
  logic [NPCORE-1:0] acc_en = '0, acc_we = '0;
  logic [AW-1:0] acc_addr [NPCORE];
  logic [PSUM_W-1:0] acc_wdata [NPCORE];
  logic [PSUM_W-1:0] acc_rdata [NPCORE];
  int checks = 0, failures = 0;

  output_bram_bank #(.DEPTH(D), .AW(AW)) dut (.*);

  function automatic logic [7:0] bias(int r, int w); return 8'(r * 61 + w * 11 + 200); endfunction

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (acc_addr[j]) begin acc_addr[j] = '0; acc_wdata[j] = '0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < 4; r++)
      for (int w = 0; w < D; w++) begin
        @(negedge clk);
        dma_en = 1; dma_we = 1; dma_region = REGION_W'(RGN_OUT0 + r); dma_addr = AW'(w);
        dma_wdata = {24'd0, bias(r, w)};
      end
    @(negedge clk);
    dma_en = 0; dma_we = 0;
    for (int w = 0; w < D; w++) begin
      for (int j = 0; j < 4; j++) begin acc_en[j] = 1; acc_we[j] = 0; acc_addr[j] = AW'(w); end
      @(negedge clk);
      for (int j = 0; j < 4; j++) begin
        checks++;
        if (acc_rdata[j] != bias(j, w)) begin failures++; $display("FAIL acc read %0d %0d", j, w); end
        acc_we[j] = 1; acc_wdata[j] = acc_rdata[j] + 8'(j * 3 + 100);
      end
      @(negedge clk);
      acc_en = '0; acc_we = '0;
    end
    for (int r = 0; r < 4; r++)
      for (int w = 0; w < D; w++) begin
        dma_en = 1; dma_region = REGION_W'(RGN_OUT0 + r); dma_addr = AW'(w);
        @(negedge clk);
        checks++;
        if (dma_rdata != {24'd0, 8'(bias(r, w) + 8'(r * 3 + 100))}) begin
          failures++; $display("FAIL dma read %0d %0d %h", r, w, dma_rdata);
        end
      end
    // another bank's region reads as zero
    dma_region = REGION_W'(RGN_IMG0); dma_addr = 0;
    @(negedge clk);
    checks++;
    if (dma_rdata != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
