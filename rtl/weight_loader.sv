// weight_loader: fetches and holds the four kernel channels a core works with.
//
// The computing model is weight stationary: a PCORE keeps one 3x3 kernel
// channel for a whole pass over the image and only the image tiles change.
// When the controller flags a period with reload (the first tile of a new
// kernel/channel pair), the loader reads the nine taps at word wbase of each
// of the core's four weight BRAMs, two taps per cycle per BRAM (taps 2p and
// 2p+1 in phase p), into shadow registers, and in the last phase of that
// period copies them to the outputs, at the same moment the image loader hands
// over the first tile of the pass.  During that period the PCOREs still use the
// previous weights for the previous tile, so a reload costs no cycles.
// Output weights[j] feeds PCORE j; it holds kernel j*K/4 + k.
module weight_loader
  import conv_pkg::*;
#(
  parameter int unsigned AW       = $clog2(IMG_DEPTH),
  parameter int unsigned TILE_CYC = TILE_CYCLES,
  parameter int unsigned PHW      = $clog2(TILE_CYC)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [PHW-1:0]     phase,
  input  logic               ld_valid,
  input  logic               reload,      // fetch new weights in this period
  input  logic [AW-1:0]      wbase,       // word of tap 0 in every weight BRAM
  output logic [NPCORE-1:0]  a_en,
  output logic [AW-1:0]      a_addr [NPCORE],
  input  logic [DATA_W-1:0]  a_rdata [NPCORE],
  output logic [NPCORE-1:0]  b_en,
  output logic [AW-1:0]      b_addr [NPCORE],
  input  logic [DATA_W-1:0]  b_rdata [NPCORE],
  output tile_t              weights [NPCORE]
);

  initial assert (TILE_CYC >= MIN_TILE_CYCLES) else $fatal(1, "TILE_CYC too small");

  tile_t      shadow [NPCORE];
  logic       cap_q;
  logic [3:0] cap_tap_q;
  logic       rd;
  logic [3:0] tap_a, tap_b;

  assign rd    = ld_valid && reload && (phase <= PHW'(4));
  assign tap_a = {phase[2:0], 1'b0};
  assign tap_b = {phase[2:0], 1'b1};

  for (genvar j = 0; j < NPCORE; j++) begin : g_port
    assign a_en[j]   = rd;
    assign b_en[j]   = rd && (tap_b < 4'(TAPS));
    assign a_addr[j] = wbase + AW'(tap_a);
    assign b_addr[j] = wbase + AW'(tap_b);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cap_q     <= 1'b0;
      cap_tap_q <= '0;
      for (int j = 0; j < int'(NPCORE); j++) begin
        shadow[j]  <= '0;
        weights[j] <= '0;
      end
    end else begin
      cap_q     <= rd;
      cap_tap_q <= tap_a;
      for (int j = 0; j < int'(NPCORE); j++) begin
        if (cap_q) begin
          shadow[j][TAPS-1-int'(cap_tap_q)] <= a_rdata[j];
          if (cap_tap_q + 4'd1 < 4'(TAPS))
            shadow[j][TAPS-2-int'(cap_tap_q)] <= b_rdata[j];
        end
        if (ld_valid && reload && phase == PHW'(TILE_CYC - 1))
          weights[j] <= shadow[j];
      end
    end
  end

endmodule
