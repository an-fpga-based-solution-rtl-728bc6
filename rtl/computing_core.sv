// computing_core: the multi-kernel computing core.
//
// Core i works on the i-th quarter of the input channels.  Its image loader
// fetches one 3x3 tile per tile period from image BRAM i and shows it to all
// four PCOREs at once; its weight loader keeps one channel of four different
// kernels, one per PCORE, read from weight BRAMs 4i..4i+3 (PCORE j gets
// kernel j*K/4 + k).  So one tile gives four psums, one per kernel quarter.
// The loaders work one period ahead of the PCOREs (load stage and compute
// stage pipelined): in a period the PCOREs compute on the tile loaded in the
// previous period while the loaders fetch the next one.  psum[j] is valid from
// phase 4 of the period after the tile was loaded until phase 3 of the next.
module computing_core
  import conv_pkg::*;
#(
  parameter int unsigned AW       = $clog2(IMG_DEPTH),
  parameter int unsigned OUT_W    = PSUM_W,
  parameter int unsigned TILE_CYC = TILE_CYCLES,
  parameter int unsigned PHW      = $clog2(TILE_CYC)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [PHW-1:0]    phase,
  input  logic              ld_valid,
  input  logic              reload,
  input  logic [AW-1:0]     img_base,
  input  logic [AW-1:0]     wbase,
  input  logic [15:0]       img_w,
  // image BRAM of this core
  output logic              ia_en,
  output logic [AW-1:0]     ia_addr,
  input  logic [DATA_W-1:0] ia_rdata,
  output logic              ib_en,
  output logic [AW-1:0]     ib_addr,
  input  logic [DATA_W-1:0] ib_rdata,
  // the four weight BRAMs of this core
  output logic [NPCORE-1:0] wa_en,
  output logic [AW-1:0]     wa_addr  [NPCORE],
  input  logic [DATA_W-1:0] wa_rdata [NPCORE],
  output logic [NPCORE-1:0] wb_en,
  output logic [AW-1:0]     wb_addr  [NPCORE],
  input  logic [DATA_W-1:0] wb_rdata [NPCORE],
  // one psum per kernel quarter
  output logic [OUT_W-1:0]  psum [NPCORE]
);

  tile_t tile;
  tile_t weights [NPCORE];

  img_loader #(.AW(AW), .TILE_CYC(TILE_CYC), .PHW(PHW)) u_img_loader (
    .clk       (clk),
    .rst_n     (rst_n),
    .phase     (phase),
    .ld_valid  (ld_valid),
    .base_addr (img_base),
    .img_w     (img_w),
    .a_en      (ia_en),
    .a_addr    (ia_addr),
    .a_rdata   (ia_rdata),
    .b_en      (ib_en),
    .b_addr    (ib_addr),
    .b_rdata   (ib_rdata),
    .tile      (tile)
  );

  weight_loader #(.AW(AW), .TILE_CYC(TILE_CYC), .PHW(PHW)) u_weight_loader (
    .clk      (clk),
    .rst_n    (rst_n),
    .phase    (phase),
    .ld_valid (ld_valid),
    .reload   (reload),
    .wbase    (wbase),
    .a_en     (wa_en),
    .a_addr   (wa_addr),
    .a_rdata  (wa_rdata),
    .b_en     (wb_en),
    .b_addr   (wb_addr),
    .b_rdata  (wb_rdata),
    .weights  (weights)
  );

  for (genvar j = 0; j < NPCORE; j++) begin : g_pcore
    pcore #(.OUT_W(OUT_W), .TILE_CYC(TILE_CYC), .PHW(PHW)) u_pcore (
      .clk     (clk),
      .rst_n   (rst_n),
      .phase   (phase),
      .weights (weights[j]),
      .tile    (tile),
      .psum    (psum[j])
    );
  end

endmodule
