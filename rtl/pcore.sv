// pcore: one kernel channel convolved with one 3x3 image tile.
//
// A PCORE holds three MAC units, one per kernel row.  In phases 0, 1 and 2 of
// a tile period MAC r adds the product of column `phase` of row r, so after
// three cycles each MAC holds a row's dot product; in phase 3 two adders sum
// the three rows into the psum register, which holds the result from phase 4
// until phase 3 of the next period.  The weights and the tile are held
// stable by the loaders for the whole period.
// The psum is the weighted sum reduced to PSUM_W bits (8 by default, the
// width of the psum signals in the paper's waveform): wrap-around arithmetic,
// so the low bits are exact however the sums are split.  The paper says a
// PCORE is a set of MAC units and adders; three MACs of three products each
// is this design's choice.
module pcore
  import conv_pkg::*;
#(
  parameter int unsigned OUT_W    = PSUM_W,
  parameter int unsigned TILE_CYC = TILE_CYCLES,
  parameter int unsigned PHW      = $clog2(TILE_CYC)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [PHW-1:0]   phase,
  input  tile_t            weights,
  input  tile_t            tile,
  output logic [OUT_W-1:0] psum
);

  localparam int unsigned ACC_W = 2 * DATA_W + 2;
  localparam int unsigned SUM_W = ACC_W + 2;

  logic [ACC_W-1:0]  acc [KSIZE];
  logic              mac_en;
  logic [1:0]        col;
  logic [SUM_W-1:0]  row_sum;

  assign mac_en = (phase <= PHW'(PH_MAC_LAST));
  assign col    = phase[1:0];

  for (genvar r = 0; r < KSIZE; r++) begin : g_mac
    mac #(.A_W(DATA_W), .ACC_W(ACC_W)) u_mac (
      .clk   (clk),
      .rst_n (rst_n),
      .en    (mac_en),
      .clr   (phase == '0),
      .a     (weights[TAPS-1-(r*KSIZE)-int'(col)]),
      .b     (tile[TAPS-1-(r*KSIZE)-int'(col)]),
      .acc   (acc[r])
    );
  end

  // adder modules: two adders fold the three row sums
  assign row_sum = SUM_W'(acc[0]) + SUM_W'(acc[1]) + SUM_W'(acc[2]);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                           psum <= '0;
    else if (phase == PHW'(PH_PSUM))      psum <= OUT_W'(row_sum);
  end

endmodule
