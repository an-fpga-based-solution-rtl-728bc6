// weight_bram_bank: the sixteen kernel (weight) BRAMs.
//
// Weight BRAM n = 4*i + j serves computing core i and its PCORE j.  It holds,
// for the channel quarter i and the kernel quarter j, the 3x3 kernel channels
// W[j*K/4 + k][i*C/4 + c'] for k = 0..K/4-1 and c' = 0..C/4-1, nine taps each,
// at word (k*C/4 + c')*9 + 3*row + col.  The four BRAMs of one core therefore
// give its four PCOREs the same channel of four different kernels.
//
// Ports are shared as in the image bank: port A is the DMA side's while the IP
// is idle and the core's while it is busy, port B is always the core's, both
// read-only on the core side.  DMA regions RGN_W0..RGN_W0+15 select a BRAM.
// Read data arrives one cycle after the request.
module weight_bram_bank
  import conv_pkg::*;
#(
  parameter int unsigned DEPTH = W_DEPTH,
  parameter int unsigned AW    = $clog2(IMG_DEPTH),  // width of the shared DMA address
  parameter int unsigned NB    = NCORE * NPCORE
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                dma_en,
  input  logic                dma_we,
  input  logic [REGION_W-1:0] dma_region,
  input  logic [AW-1:0]       dma_addr,
  input  logic [AXI_DW-1:0]   dma_wdata,
  output logic [AXI_DW-1:0]   dma_rdata,
  input  logic                core_own,
  input  logic [NB-1:0]       ca_en,
  input  logic [AW-1:0]       ca_addr  [NB],
  output logic [DATA_W-1:0]   ca_rdata [NB],
  input  logic [NB-1:0]       cb_en,
  input  logic [AW-1:0]       cb_addr  [NB],
  output logic [DATA_W-1:0]   cb_rdata [NB]
);

  localparam int unsigned BAW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [NB-1:0]     hit, hit_q;
  logic [DATA_W-1:0] a_rdata [NB];

  for (genvar n = 0; n < NB; n++) begin : g_bram
    logic           a_en, a_we;
    logic [AW-1:0]  a_addr;

    assign hit[n]  = dma_en && (dma_region == REGION_W'(RGN_W0 + n));
    assign a_en    = core_own ? ca_en[n]   : hit[n];
    assign a_we    = core_own ? 1'b0       : dma_we;
    assign a_addr  = core_own ? ca_addr[n] : dma_addr;

    bram_tdp #(.WIDTH(DATA_W), .DEPTH(DEPTH), .AW(BAW)) u_bram (
      .clk     (clk),
      .a_en    (a_en),
      .a_we    (a_we),
      .a_addr  (a_addr[BAW-1:0]),
      .a_wdata (dma_wdata[DATA_W-1:0]),
      .a_rdata (a_rdata[n]),
      .b_en    (cb_en[n]),
      .b_we    (1'b0),
      .b_addr  (cb_addr[n][BAW-1:0]),
      .b_wdata ('0),
      .b_rdata (cb_rdata[n])
    );
    assign ca_rdata[n] = a_rdata[n];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) hit_q <= '0;
    else        hit_q <= core_own ? '0 : hit;
  end

  always_comb begin
    dma_rdata = '0;
    for (int n = 0; n < int'(NB); n++)
      if (hit_q[n]) dma_rdata = AXI_DW'(a_rdata[n]);
  end

endmodule
