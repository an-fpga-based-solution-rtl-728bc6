// psum_adder_tree: adds the same-kernel psums of the four computing cores.
//
// The four cores work on the four quarters of the input channels of the same
// output pixel and the same kernel, so their psums for kernel quarter j add up
// to that kernel's contribution over all C/4*4 channels of this step.  Two
// adders take the pairs (core 0 + core 1, core 2 + core 3) and a third adds
// the pair sums, as in the paper's multi-channel diagram.  The result is
// registered in phase 4 (PH_TREE) of the tile period and holds until the next
// phase 4.  Sums wrap at OUT_W bits like the psums.
module psum_adder_tree
  import conv_pkg::*;
#(
  parameter int unsigned OUT_W    = PSUM_W,
  parameter int unsigned TILE_CYC = TILE_CYCLES,
  parameter int unsigned PHW      = $clog2(TILE_CYC)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [PHW-1:0]   phase,
  input  logic [OUT_W-1:0] psum [NCORE],
  output logic [OUT_W-1:0] sum
);

  logic [OUT_W-1:0] s01, s23;
  assign s01 = psum[0] + psum[1];
  assign s23 = psum[2] + psum[3];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                       sum <= '0;
    else if (phase == PHW'(PH_TREE))  sum <= s01 + s23;
  end

endmodule
