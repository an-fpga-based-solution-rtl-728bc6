// conv_ip: convolution accelerator IP core, one convolutional layer per run.
//
// Given an H x W image of C channels and K kernels of 3x3xC (C and K
// multiples of four), the core produces the K-channel (H-2) x (W-2) feature
// map, stride 1, no padding, each output word holding its bias plus the
// weighted sum.  Four computing cores each take a quarter of the input
// channels; inside each core four PCOREs each take a quarter of the kernels,
// so 16 psums are made per tile period of TILE_CYC (8) cycles.  For every
// kernel quarter j an adder tree adds the four cores' psums and an
// accumulator adds the result into output BRAM j.  Loading the next tile
// overlaps with computing on the current one.
//
// Interfaces: an AXI4-Lite slave for the processing system (layer registers,
// start, status; see conv_controller), an AXI4 slave for the DMA engine
// (BRAM contents; see axi_bram_port), and busy/done status outputs.  A run:
// the DMA loads image, weights and the biases (into the output BRAMs), the
// processing system writes H, W, C, K and start, waits for done, and the DMA
// reads the output BRAMs.  A layer takes (K/4)*(C/4)*(H-2)*(W-2) + 1 tile
// periods plus one setup cycle.
module conv_ip
  import conv_pkg::*;
#(
  parameter int unsigned IMG_D    = IMG_DEPTH,
  parameter int unsigned W_D      = W_DEPTH,
  parameter int unsigned OUT_D    = OUT_DEPTH,
  parameter int unsigned TILE_CYC = TILE_CYCLES,
  parameter int unsigned IDW      = 4,
  parameter int unsigned AW       = $clog2(max3(IMG_D, W_D, OUT_D)),
  parameter int unsigned ADDR_W   = REGION_W + AW + 2
) (
  input  logic                clk,
  input  logic                rst_n,
  // AXI4-Lite slave: control registers
  input  logic [7:0]          ctl_awaddr,
  input  logic                ctl_awvalid,
  output logic                ctl_awready,
  input  logic [31:0]         ctl_wdata,
  input  logic                ctl_wvalid,
  output logic                ctl_wready,
  output logic [1:0]          ctl_bresp,
  output logic                ctl_bvalid,
  input  logic                ctl_bready,
  input  logic [7:0]          ctl_araddr,
  input  logic                ctl_arvalid,
  output logic                ctl_arready,
  output logic [31:0]         ctl_rdata,
  output logic [1:0]          ctl_rresp,
  output logic                ctl_rvalid,
  input  logic                ctl_rready,
  // AXI4 slave: BRAM access for the DMA
  input  logic [IDW-1:0]      dma_awid,
  input  logic [ADDR_W-1:0]   dma_awaddr,
  input  logic [7:0]          dma_awlen,
  input  logic [2:0]          dma_awsize,
  input  logic [1:0]          dma_awburst,
  input  logic                dma_awvalid,
  output logic                dma_awready,
  input  logic [AXI_DW-1:0]   dma_wdata,
  input  logic [AXI_DW/8-1:0] dma_wstrb,
  input  logic                dma_wlast,
  input  logic                dma_wvalid,
  output logic                dma_wready,
  output logic [IDW-1:0]      dma_bid,
  output logic [1:0]          dma_bresp,
  output logic                dma_bvalid,
  input  logic                dma_bready,
  input  logic [IDW-1:0]      dma_arid,
  input  logic [ADDR_W-1:0]   dma_araddr,
  input  logic [7:0]          dma_arlen,
  input  logic [2:0]          dma_arsize,
  input  logic [1:0]          dma_arburst,
  input  logic                dma_arvalid,
  output logic                dma_arready,
  output logic [IDW-1:0]      dma_rid,
  output logic [AXI_DW-1:0]   dma_rdata,
  output logic [1:0]          dma_rresp,
  output logic                dma_rlast,
  output logic                dma_rvalid,
  input  logic                dma_rready,
  // status
  output logic                busy,
  output logic                done
);

  localparam int unsigned PHW = $clog2(TILE_CYC);
  localparam int unsigned NB  = NCORE * NPCORE;

  // controller broadcast
  logic           core_own, ld_valid, reload, cmp_valid;
  logic [PHW-1:0] phase;
  logic [AW-1:0]  img_base, wbase, out_addr;
  logic [15:0]    img_w;

  // DMA-side memory port
  logic                mem_en, mem_we;
  logic [REGION_W-1:0] mem_region;
  logic [AW-1:0]       mem_addr;
  logic [AXI_DW-1:0]   mem_wdata, rd_img, rd_w, rd_out;

  // image BRAM ports
  logic [NCORE-1:0]  ia_en, ib_en;
  logic [AW-1:0]     ia_addr [NCORE];
  logic [AW-1:0]     ib_addr [NCORE];
  logic [DATA_W-1:0] ia_rdata [NCORE];
  logic [DATA_W-1:0] ib_rdata [NCORE];
  // weight BRAM ports, index 4*core + pcore
  logic [NB-1:0]     wa_en, wb_en;
  logic [AW-1:0]     wa_addr [NB];
  logic [AW-1:0]     wb_addr [NB];
  logic [DATA_W-1:0] wa_rdata [NB];
  logic [DATA_W-1:0] wb_rdata [NB];
  // psums: psum_c[core][pcore]; regrouped per kernel quarter for the trees
  logic [PSUM_W-1:0] psum_c [NCORE][NPCORE];
  logic [PSUM_W-1:0] psum_k [NPCORE][NCORE];
  logic [PSUM_W-1:0] ksum   [NPCORE];
  // output BRAM accumulator ports
  logic [NPCORE-1:0] ob_en, ob_we;
  logic [AW-1:0]     ob_addr  [NPCORE];
  logic [PSUM_W-1:0] ob_wdata [NPCORE];
  logic [PSUM_W-1:0] ob_rdata [NPCORE];

  conv_controller #(.AW(AW), .TILE_CYC(TILE_CYC), .PHW(PHW)) u_ctrl (
    .clk       (clk),
    .rst_n     (rst_n),
    .s_awaddr  (ctl_awaddr),
    .s_awvalid (ctl_awvalid),
    .s_awready (ctl_awready),
    .s_wdata   (ctl_wdata),
    .s_wvalid  (ctl_wvalid),
    .s_wready  (ctl_wready),
    .s_bresp   (ctl_bresp),
    .s_bvalid  (ctl_bvalid),
    .s_bready  (ctl_bready),
    .s_araddr  (ctl_araddr),
    .s_arvalid (ctl_arvalid),
    .s_arready (ctl_arready),
    .s_rdata   (ctl_rdata),
    .s_rresp   (ctl_rresp),
    .s_rvalid  (ctl_rvalid),
    .s_rready  (ctl_rready),
    .busy      (busy),
    .done      (done),
    .core_own  (core_own),
    .phase     (phase),
    .ld_valid  (ld_valid),
    .reload    (reload),
    .img_base  (img_base),
    .wbase     (wbase),
    .img_w     (img_w),
    .cmp_valid (cmp_valid),
    .out_addr  (out_addr)
  );

  axi_bram_port #(.AW(AW), .IDW(IDW), .ADDR_W(ADDR_W)) u_axi (
    .clk        (clk),
    .rst_n      (rst_n),
    .hold       (busy),
    .s_awid     (dma_awid),
    .s_awaddr   (dma_awaddr),
    .s_awlen    (dma_awlen),
    .s_awsize   (dma_awsize),
    .s_awburst  (dma_awburst),
    .s_awvalid  (dma_awvalid),
    .s_awready  (dma_awready),
    .s_wdata    (dma_wdata),
    .s_wstrb    (dma_wstrb),
    .s_wlast    (dma_wlast),
    .s_wvalid   (dma_wvalid),
    .s_wready   (dma_wready),
    .s_bid      (dma_bid),
    .s_bresp    (dma_bresp),
    .s_bvalid   (dma_bvalid),
    .s_bready   (dma_bready),
    .s_arid     (dma_arid),
    .s_araddr   (dma_araddr),
    .s_arlen    (dma_arlen),
    .s_arsize   (dma_arsize),
    .s_arburst  (dma_arburst),
    .s_arvalid  (dma_arvalid),
    .s_arready  (dma_arready),
    .s_rid      (dma_rid),
    .s_rdata    (dma_rdata),
    .s_rresp    (dma_rresp),
    .s_rlast    (dma_rlast),
    .s_rvalid   (dma_rvalid),
    .s_rready   (dma_rready),
    .mem_en     (mem_en),
    .mem_we     (mem_we),
    .mem_region (mem_region),
    .mem_addr   (mem_addr),
    .mem_wdata  (mem_wdata),
    .mem_rdata  (rd_img | rd_w | rd_out)
  );

  image_bram_bank #(.DEPTH(IMG_D), .AW(AW)) u_img_bram (
    .clk        (clk),
    .rst_n      (rst_n),
    .dma_en     (mem_en),
    .dma_we     (mem_we),
    .dma_region (mem_region),
    .dma_addr   (mem_addr),
    .dma_wdata  (mem_wdata),
    .dma_rdata  (rd_img),
    .core_own   (core_own),
    .ca_en      (ia_en),
    .ca_addr    (ia_addr),
    .ca_rdata   (ia_rdata),
    .cb_en      (ib_en),
    .cb_addr    (ib_addr),
    .cb_rdata   (ib_rdata)
  );

  weight_bram_bank #(.DEPTH(W_D), .AW(AW), .NB(NB)) u_w_bram (
    .clk        (clk),
    .rst_n      (rst_n),
    .dma_en     (mem_en),
    .dma_we     (mem_we),
    .dma_region (mem_region),
    .dma_addr   (mem_addr),
    .dma_wdata  (mem_wdata),
    .dma_rdata  (rd_w),
    .core_own   (core_own),
    .ca_en      (wa_en),
    .ca_addr    (wa_addr),
    .ca_rdata   (wa_rdata),
    .cb_en      (wb_en),
    .cb_addr    (wb_addr),
    .cb_rdata   (wb_rdata)
  );

  output_bram_bank #(.DEPTH(OUT_D), .AW(AW), .WIDTH(PSUM_W)) u_out_bram (
    .clk        (clk),
    .rst_n      (rst_n),
    .dma_en     (mem_en),
    .dma_we     (mem_we),
    .dma_region (mem_region),
    .dma_addr   (mem_addr),
    .dma_wdata  (mem_wdata),
    .dma_rdata  (rd_out),
    .acc_en     (ob_en),
    .acc_we     (ob_we),
    .acc_addr   (ob_addr),
    .acc_wdata  (ob_wdata),
    .acc_rdata  (ob_rdata)
  );

  for (genvar i = 0; i < NCORE; i++) begin : g_core
    logic [NPCORE-1:0] wa_en_c, wb_en_c;
    logic [AW-1:0]     wa_addr_c [NPCORE];
    logic [AW-1:0]     wb_addr_c [NPCORE];
    logic [DATA_W-1:0] wa_rdata_c [NPCORE];
    logic [DATA_W-1:0] wb_rdata_c [NPCORE];

    for (genvar j = 0; j < NPCORE; j++) begin : g_wmap
      assign wa_en[i*NPCORE+j]   = wa_en_c[j];
      assign wb_en[i*NPCORE+j]   = wb_en_c[j];
      assign wa_addr[i*NPCORE+j] = wa_addr_c[j];
      assign wb_addr[i*NPCORE+j] = wb_addr_c[j];
      assign wa_rdata_c[j]       = wa_rdata[i*NPCORE+j];
      assign wb_rdata_c[j]       = wb_rdata[i*NPCORE+j];
      assign psum_k[j][i]        = psum_c[i][j];
    end

    computing_core #(.AW(AW), .OUT_W(PSUM_W), .TILE_CYC(TILE_CYC), .PHW(PHW)) u_core (
      .clk      (clk),
      .rst_n    (rst_n),
      .phase    (phase),
      .ld_valid (ld_valid),
      .reload   (reload),
      .img_base (img_base),
      .wbase    (wbase),
      .img_w    (img_w),
      .ia_en    (ia_en[i]),
      .ia_addr  (ia_addr[i]),
      .ia_rdata (ia_rdata[i]),
      .ib_en    (ib_en[i]),
      .ib_addr  (ib_addr[i]),
      .ib_rdata (ib_rdata[i]),
      .wa_en    (wa_en_c),
      .wa_addr  (wa_addr_c),
      .wa_rdata (wa_rdata_c),
      .wb_en    (wb_en_c),
      .wb_addr  (wb_addr_c),
      .wb_rdata (wb_rdata_c),
      .psum     (psum_c[i])
    );
  end

  for (genvar j = 0; j < NPCORE; j++) begin : g_kq
    psum_adder_tree #(.OUT_W(PSUM_W), .TILE_CYC(TILE_CYC), .PHW(PHW)) u_tree (
      .clk   (clk),
      .rst_n (rst_n),
      .phase (phase),
      .psum  (psum_k[j]),
      .sum   (ksum[j])
    );

    accumulator #(.AW(AW), .OUT_W(PSUM_W), .TILE_CYC(TILE_CYC), .PHW(PHW)) u_acc (
      .clk       (clk),
      .rst_n     (rst_n),
      .phase     (phase),
      .cmp_valid (cmp_valid),
      .out_addr  (out_addr),
      .sum       (ksum[j]),
      .ob_en     (ob_en[j]),
      .ob_we     (ob_we[j]),
      .ob_addr   (ob_addr[j]),
      .ob_wdata  (ob_wdata[j]),
      .ob_rdata  (ob_rdata[j])
    );
  end

endmodule
