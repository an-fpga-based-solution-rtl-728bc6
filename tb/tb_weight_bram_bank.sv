// tb_weight_bram_bank: the sixteen weight BRAMs seen from both sides.
// The DMA side writes distinct data into each region (and one word into a
// output region, which must be ignored), reads it back (zero for the
// foreign region), then the core side takes the shared ports and reads every
// word on port A and port B and compares with what was written.
`timescale 1ns/1ps
module tb_weight_bram_bank;
  import conv_pkg::*;
  localparam int D = 24, AW = 5;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic dma_en = 0, dma_we = 0, core_own = 0;
  logic [REGION_W-1:0] dma_region = '0;
  logic [AW-1:0] dma_addr = '0;
  logic [31:0] dma_wdata = '0, dma_rdata;
  logic [16-1:0] ca_en = '0, cb_en = '0;
  logic [AW-1:0] ca_addr [16];
  logic [AW-1:0] cb_addr [16];
  logic [DATA_W-1:0] ca_rdata [16];
  logic [DATA_W-1:0] cb_rdata [16];
  int checks = 0, failures = 0;

  weight_bram_bank #(.DEPTH(D), .AW(AW), .NB(16)) dut (.*);

  function automatic logic [7:0] val(int r, int w); return 8'(r * 37 + w * 5 + 3); endfunction

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (ca_addr[i]) begin ca_addr[i] = '0; cb_addr[i] = '0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < 16; r++)
      for (int w = 0; w < D; w++) begin
        @(negedge clk);
        dma_en = 1; dma_we = 1; dma_region = REGION_W'(RGN_W0 + r); dma_addr = AW'(w);
        dma_wdata = {24'hABCDEF, val(r, w)};
      end
    // a write to a weight region must not land here
    @(negedge clk);
    dma_region = REGION_W'(RGN_OUT0); dma_addr = 0; dma_wdata = 32'h55;
    @(negedge clk);
    dma_we = 0;
    for (int r = 0; r < 17; r++)
      for (int w = 0; w < D; w++) begin
        int rg;
        rg = (r == 16) ? RGN_OUT0 : RGN_W0 + r;
        dma_region = REGION_W'(rg); dma_addr = AW'(w); dma_en = 1;
        @(negedge clk);
        checks++;
        if (dma_rdata != ((r == 16) ? 32'd0 : {24'd0, val(r, w)})) begin
          failures++; $display("FAIL dma read r%0d w%0d %h", r, w, dma_rdata);
        end
      end
    dma_en = 0;
    core_own = 1;
    for (int w = 0; w < D; w++) begin
      for (int i = 0; i < 16; i++) begin
        ca_en[i] = 1; cb_en[i] = 1; ca_addr[i] = AW'(w); cb_addr[i] = AW'(D - 1 - w);
      end
      @(negedge clk);
      for (int i = 0; i < 16; i++) begin
        checks += 2;
        if (ca_rdata[i] != val(i, w))         begin failures++; $display("FAIL ca %0d %0d", i, w); end
        if (cb_rdata[i] != val(i, D - 1 - w)) begin failures++; $display("FAIL cb %0d %0d", i, w); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
