// accumulator: adds a summed psum into its output BRAM word.
//
// In a tile period flagged cmp_valid, the accumulator reads the output word
// at out_addr in phase 4 (PH_TREE) and in phase 5 (PH_WRITE) writes back the
// word plus the adder tree's sum, which is registered in phase 4 and so is
// ready in phase 5.  Read and write both use port B of output BRAM j.  Each
// output word is touched once per tile period at most, and the write
// completes before the next period's read, so back-to-back accumulation into
// the same word (a 1x1 output) is correct.  The word first holds the bias the
// host stored there, then bias plus every channel's contribution.
module accumulator
  import conv_pkg::*;
#(
  parameter int unsigned AW       = $clog2(IMG_DEPTH),
  parameter int unsigned OUT_W    = PSUM_W,
  parameter int unsigned TILE_CYC = TILE_CYCLES,
  parameter int unsigned PHW      = $clog2(TILE_CYC)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [PHW-1:0]   phase,
  input  logic             cmp_valid,
  input  logic [AW-1:0]    out_addr,
  input  logic [OUT_W-1:0] sum,
  // output BRAM port B
  output logic             ob_en,
  output logic             ob_we,
  output logic [AW-1:0]    ob_addr,
  output logic [OUT_W-1:0] ob_wdata,
  input  logic [OUT_W-1:0] ob_rdata
);

  logic rd, wr;
  assign rd       = cmp_valid && phase == PHW'(PH_TREE);
  assign wr       = cmp_valid && phase == PHW'(PH_WRITE);
  assign ob_en    = rd || wr;
  assign ob_we    = wr;
  assign ob_addr  = out_addr;
  assign ob_wdata = ob_rdata + sum;

endmodule
