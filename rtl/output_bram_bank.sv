// output_bram_bank: the four output BRAMs.
//
// Output BRAM j holds output channels j*K/4 .. (j+1)*K/4-1, laid out like the
// image BRAMs (channel k' then row-major), so a result can serve directly as
// the next layer's image.  Word k'*Ho*Wo + y*Wo + x holds output channel
// j*K/4 + k', row y, column x, with Ho = H-2 and Wo = W-2.
//
// There is no bias logic: before a run the host writes each output channel's
// bias into all of that channel's words, and the accumulators add every psum
// on top of what is stored.  Port A is the DMA side's at all times (bias in,
// results out, regions RGN_OUT0..RGN_OUT0+3); port B is the read-modify-write
// port of accumulator j.  Read data arrives one cycle after the request.
module output_bram_bank
  import conv_pkg::*;
#(
  parameter int unsigned DEPTH = OUT_DEPTH,
  parameter int unsigned AW    = $clog2(IMG_DEPTH),
  parameter int unsigned WIDTH = PSUM_W
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                dma_en,
  input  logic                dma_we,
  input  logic [REGION_W-1:0] dma_region,
  input  logic [AW-1:0]       dma_addr,
  input  logic [AXI_DW-1:0]   dma_wdata,
  output logic [AXI_DW-1:0]   dma_rdata,
  // accumulator side
  input  logic [NPCORE-1:0]   acc_en,
  input  logic [NPCORE-1:0]   acc_we,
  input  logic [AW-1:0]       acc_addr  [NPCORE],
  input  logic [WIDTH-1:0]    acc_wdata [NPCORE],
  output logic [WIDTH-1:0]    acc_rdata [NPCORE]
);

  localparam int unsigned BAW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [NPCORE-1:0] hit, hit_q;
  logic [WIDTH-1:0]  a_rdata [NPCORE];

  for (genvar j = 0; j < NPCORE; j++) begin : g_bram
    assign hit[j] = dma_en && (dma_region == REGION_W'(RGN_OUT0 + j));

    bram_tdp #(.WIDTH(WIDTH), .DEPTH(DEPTH), .AW(BAW)) u_bram (
      .clk     (clk),
      .a_en    (hit[j]),
      .a_we    (dma_we),
      .a_addr  (dma_addr[BAW-1:0]),
      .a_wdata (dma_wdata[WIDTH-1:0]),
      .a_rdata (a_rdata[j]),
      .b_en    (acc_en[j]),
      .b_we    (acc_we[j]),
      .b_addr  (acc_addr[j][BAW-1:0]),
      .b_wdata (acc_wdata[j]),
      .b_rdata (acc_rdata[j])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) hit_q <= '0;
    else        hit_q <= hit;
  end

  always_comb begin
    dma_rdata = '0;
    for (int j = 0; j < int'(NPCORE); j++)
      if (hit_q[j]) dma_rdata = AXI_DW'(a_rdata[j]);
  end

endmodule
