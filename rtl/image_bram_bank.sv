// image_bram_bank: the four image BRAMs.
//
// Image BRAM i holds input channels i*C/4 .. (i+1)*C/4-1, channel after
// channel, each channel row-major: local channel c', row y, column x sits at
// word c'*H*W + y*W + x.  Each BRAM is as deep as the largest image the IP
// accepts divided by four, so a smaller layer leaves unused words at the end.
//
// Port A of every BRAM is shared: the DMA side owns it while the IP is idle
// (to load the image), the computing core owns it while the IP is busy.  Port B
// belongs to the computing core.  The core therefore reads two pixels per
// cycle per BRAM.  DMA-side accesses carry a region number; this bank answers
// regions RGN_IMG0..RGN_IMG0+3.  Read data of either side arrives one cycle
// after the request; the DMA-side read data is zero when another bank was
// addressed, so the three banks' read data can be ORed together.
module image_bram_bank
  import conv_pkg::*;
#(
  parameter int unsigned DEPTH = IMG_DEPTH,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic                clk,
  input  logic                rst_n,
  // DMA side (AXI4 slave behind it)
  input  logic                dma_en,
  input  logic                dma_we,
  input  logic [REGION_W-1:0] dma_region,
  input  logic [AW-1:0]       dma_addr,
  input  logic [AXI_DW-1:0]   dma_wdata,
  output logic [AXI_DW-1:0]   dma_rdata,
  // ownership of port A: 1 = computing cores
  input  logic                core_own,
  // computing-core side, two read ports per BRAM
  input  logic [NCORE-1:0]    ca_en,
  input  logic [AW-1:0]       ca_addr  [NCORE],
  output logic [DATA_W-1:0]   ca_rdata [NCORE],
  input  logic [NCORE-1:0]    cb_en,
  input  logic [AW-1:0]       cb_addr  [NCORE],
  output logic [DATA_W-1:0]   cb_rdata [NCORE]
);

  logic [NCORE-1:0]  hit, hit_q;
  logic [DATA_W-1:0] a_rdata [NCORE];

  for (genvar i = 0; i < NCORE; i++) begin : g_bram
    logic          a_en, a_we;
    logic [AW-1:0] a_addr;

    assign hit[i]  = dma_en && (dma_region == REGION_W'(RGN_IMG0 + i));
    assign a_en    = core_own ? ca_en[i]   : hit[i];
    assign a_we    = core_own ? 1'b0       : dma_we;
    assign a_addr  = core_own ? ca_addr[i] : dma_addr;

    bram_tdp #(.WIDTH(DATA_W), .DEPTH(DEPTH), .AW(AW)) u_bram (
      .clk     (clk),
      .a_en    (a_en),
      .a_we    (a_we),
      .a_addr  (a_addr),
      .a_wdata (dma_wdata[DATA_W-1:0]),
      .a_rdata (a_rdata[i]),
      .b_en    (cb_en[i]),
      .b_we    (1'b0),
      .b_addr  (cb_addr[i]),
      .b_wdata ('0),
      .b_rdata (cb_rdata[i])
    );
    assign ca_rdata[i] = a_rdata[i];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) hit_q <= '0;
    else        hit_q <= core_own ? '0 : hit;
  end

  always_comb begin
    dma_rdata = '0;
    for (int i = 0; i < int'(NCORE); i++)
      if (hit_q[i]) dma_rdata = AXI_DW'(a_rdata[i]);
  end

endmodule
