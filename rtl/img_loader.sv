// img_loader: fetches one 3x3 image tile per tile period for a computing core.
//
// The controller divides time into tile periods of TILE_CYC cycles and
// broadcasts the phase (0..TILE_CYC-1).  When ld_valid is set for a period,
// the loader reads the nine pixels of the tile whose top-left pixel is at
// word base_addr of its image BRAM: tap t = 3*row + col is at
// base_addr + row*img_w + col.  Both ports of the BRAM are used, taps 2p and
// 2p+1 in phase p (p = 0..4), and each word is captured the cycle after its
// read, so the shadow tile is complete after phase 5.  In the last phase of
// the period the shadow tile moves to the tile output, where it stays for the
// whole next period while the PCOREs use it and the next tile is fetched:
// this is the load stage of the two-stage pipeline.
// The paper gives the loader's job (hold nine inputs for all four PCOREs and
// fetch a new tile after every set of psums); the two-port schedule is ours.
module img_loader
  import conv_pkg::*;
#(
  parameter int unsigned AW       = $clog2(IMG_DEPTH),
  parameter int unsigned TILE_CYC = TILE_CYCLES,
  parameter int unsigned PHW      = $clog2(TILE_CYC)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [PHW-1:0]    phase,
  input  logic              ld_valid,   // a tile is loaded in this period
  input  logic [AW-1:0]     base_addr,  // word of the tile's top-left pixel
  input  logic [15:0]       img_w,      // image width W
  // image BRAM, two read ports
  output logic              a_en,
  output logic [AW-1:0]     a_addr,
  input  logic [DATA_W-1:0] a_rdata,
  output logic              b_en,
  output logic [AW-1:0]     b_addr,
  input  logic [DATA_W-1:0] b_rdata,
  // tile for the PCOREs, valid during the period after it was loaded
  output tile_t             tile
);

  initial assert (TILE_CYC >= MIN_TILE_CYCLES) else $fatal(1, "TILE_CYC too small");

  tile_t       shadow;
  logic        cap_q;
  logic [3:0]  cap_tap_q;   // tap read on port A in the previous cycle

  // Word offset of a tap inside the image.
  function automatic logic [AW-1:0] tap_off(logic [3:0] t, logic [15:0] w);
    logic [AW-1:0] row_off;
    unique case (t)
      4'd0, 4'd1, 4'd2: row_off = '0;
      4'd3, 4'd4, 4'd5: row_off = AW'(w);
      default:          row_off = AW'({w, 1'b0});
    endcase
    unique case (t)
      4'd0, 4'd3, 4'd6: return row_off;
      4'd1, 4'd4, 4'd7: return row_off + AW'(1);
      default:          return row_off + AW'(2);
    endcase
  endfunction

  logic [3:0] tap_a, tap_b;
  logic       rd;
  assign rd     = ld_valid && (phase <= PHW'(4));
  assign tap_a  = {phase[2:0], 1'b0};
  assign tap_b  = {phase[2:0], 1'b1};
  assign a_en   = rd;
  assign b_en   = rd && (tap_b < 4'(TAPS));
  assign a_addr = base_addr + tap_off(tap_a, img_w);
  assign b_addr = base_addr + tap_off(tap_b, img_w);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cap_q     <= 1'b0;
      cap_tap_q <= '0;
      shadow    <= '0;
      tile      <= '0;
    end else begin
      cap_q     <= rd;
      cap_tap_q <= tap_a;
      if (cap_q) begin
        shadow[TAPS-1-int'(cap_tap_q)] <= a_rdata;
        if (cap_tap_q + 4'd1 < 4'(TAPS))
          shadow[TAPS-2-int'(cap_tap_q)] <= b_rdata;
      end
      if (ld_valid && phase == PHW'(TILE_CYC - 1))
        tile <= shadow;
    end
  end

endmodule
