// conv_controller: layer registers and the tile sequencer.
//
// The processing system configures a layer through an AXI4-Lite slave:
// image height H, width W, channel count C and kernel count K (C and K
// multiples of four), then writes 1 to CTRL.start.  The controller then takes
// the BRAMs' shared ports for the computing cores (core_own), and steps through
// the layer one tile period of TILE_CYC cycles at a time, broadcasting the
// phase counter.  Loop order, outermost first: kernel index k (0..K/4-1),
// channel index c' within a quarter (0..C/4-1), output row, output column; the
// same (k, c') is processed by all four cores and all four PCOREs at once.
//
// Load stage: in each period one tile is loaded (ld_valid), starting at image
// word c'*H*W + y*W + x of every image BRAM; in the first period of each
// (k, c') pair the weight loaders are told to reload (weight word
// (k*C/4 + c')*9).  Compute stage: the period after a tile was loaded,
// cmp_valid and out_addr = k*Ho*Wo + y*Wo + x direct the accumulators.  So a
// layer keeps busy for K/4 * C/4 * Ho * Wo + 1 periods plus one setup cycle; at the
// end STATUS.done is set and the done output rises.  A layer with C or K not a
// positive multiple of four, or H or W below 3, ends at once with
// STATUS.error.
//
// Registers (byte offsets): 0x00 CTRL (bit0 start, write only), 0x04 STATUS
// (bit0 busy, bit1 done, bit2 error), 0x08 H, 0x0C W, 0x10 C, 0x14 K,
// 0x18 cycles of the last run.  AXI4-Lite: a write is taken when address and
// data are both valid; one outstanding read and one write; responses OKAY.
// Dimensions are not checked against the BRAM depths.
module conv_controller
  import conv_pkg::*;
#(
  parameter int unsigned AW       = $clog2(IMG_DEPTH),
  parameter int unsigned TILE_CYC = TILE_CYCLES,
  parameter int unsigned PHW      = $clog2(TILE_CYC)
) (
  input  logic              clk,
  input  logic              rst_n,
  // AXI4-Lite slave
  input  logic [7:0]        s_awaddr,
  input  logic              s_awvalid,
  output logic              s_awready,
  input  logic [31:0]       s_wdata,
  input  logic              s_wvalid,
  output logic              s_wready,
  output logic [1:0]        s_bresp,
  output logic              s_bvalid,
  input  logic              s_bready,
  input  logic [7:0]        s_araddr,
  input  logic              s_arvalid,
  output logic              s_arready,
  output logic [31:0]       s_rdata,
  output logic [1:0]        s_rresp,
  output logic              s_rvalid,
  input  logic              s_rready,
  // status
  output logic              busy,
  output logic              done,
  // to the computing cores, adder trees and accumulators
  output logic              core_own,
  output logic [PHW-1:0]    phase,
  output logic              ld_valid,
  output logic              reload,
  output logic [AW-1:0]     img_base,
  output logic [AW-1:0]     wbase,
  output logic [15:0]       img_w,
  output logic              cmp_valid,
  output logic [AW-1:0]     out_addr
);

  initial assert (TILE_CYC >= MIN_TILE_CYCLES) else $fatal(1, "TILE_CYC too small");

  typedef enum logic [1:0] {S_IDLE, S_SETUP, S_RUN} state_t;
  state_t state;

  logic [15:0] reg_h, reg_w, reg_c, reg_k;
  logic        st_done, st_err;
  logic [31:0] cycles;

  // ---------------------------------------------------------------- AXI-Lite
  logic wr_fire, start_req;
  assign wr_fire   = s_awvalid && s_wvalid && !s_bvalid;
  assign s_awready = wr_fire;
  assign s_wready  = wr_fire;
  assign s_bresp   = 2'b00;
  assign s_rresp   = 2'b00;
  assign s_arready = !s_rvalid;
  assign start_req = wr_fire && s_awaddr == REG_CTRL && s_wdata[0] && state == S_IDLE;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_bvalid <= 1'b0;
      s_rvalid <= 1'b0;
      s_rdata  <= '0;
      reg_h    <= 16'd0;
      reg_w    <= 16'd0;
      reg_c    <= 16'd0;
      reg_k    <= 16'd0;
    end else begin
      if (wr_fire) begin
        s_bvalid <= 1'b1;
        if (state == S_IDLE) begin
          unique case (s_awaddr)
            REG_IMG_H: reg_h <= s_wdata[15:0];
            REG_IMG_W: reg_w <= s_wdata[15:0];
            REG_CH:    reg_c <= s_wdata[15:0];
            REG_KN:    reg_k <= s_wdata[15:0];
            default: ;
          endcase
        end
      end else if (s_bready) begin
        s_bvalid <= 1'b0;
      end
      if (s_arvalid && s_arready) begin
        s_rvalid <= 1'b1;
        unique case (s_araddr)
          REG_STATUS: s_rdata <= {29'd0, st_err, st_done, busy};
          REG_IMG_H:  s_rdata <= {16'd0, reg_h};
          REG_IMG_W:  s_rdata <= {16'd0, reg_w};
          REG_CH:     s_rdata <= {16'd0, reg_c};
          REG_KN:     s_rdata <= {16'd0, reg_k};
          REG_CYCLES: s_rdata <= cycles;
          default:    s_rdata <= '0;
        endcase
      end else if (s_rready) begin
        s_rvalid <= 1'b0;
      end
    end
  end

  // --------------------------------------------------------------- sequencer
  logic [15:0] wo, ho, c4, k4;
  logic [AW-1:0] hw, howo;                    // H*W and Ho*Wo
  logic [15:0] ox, oy, cp, kk;                // load-stage loop counters
  logic [AW-1:0] ch_base, img_row, kout_base, out_row;
  logic          last_period;
  logic          dims_ok;

  assign busy     = (state != S_IDLE);
  assign done     = st_done;
  assign core_own = busy;
  assign img_w    = reg_w;
  assign img_base = img_row + AW'(ox);
  assign reload   = (ox == 16'd0) && (oy == 16'd0);
  assign dims_ok  = reg_c >= 16'd4 && reg_c[1:0] == 2'b00 &&
                    reg_k >= 16'd4 && reg_k[1:0] == 2'b00 &&
                    reg_h >= 16'd3 && reg_w >= 16'd3;
  assign last_period = (phase == PHW'(TILE_CYC - 1));

  logic [AW-1:0] out_addr_ld;
  assign out_addr_ld = out_row + AW'(ox);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      st_done   <= 1'b0;
      st_err    <= 1'b0;
      cycles    <= '0;
      phase     <= '0;
      ld_valid  <= 1'b0;
      cmp_valid <= 1'b0;
      out_addr  <= '0;
      wo <= '0; ho <= '0; c4 <= '0; k4 <= '0;
      hw <= '0; howo <= '0;
      ox <= '0; oy <= '0; cp <= '0; kk <= '0;
      ch_base <= '0; img_row <= '0; kout_base <= '0; out_row <= '0;
      wbase <= '0;
    end else begin
      if (busy) cycles <= cycles + 32'd1;
      unique case (state)
        S_IDLE: begin
          if (start_req) begin
            st_done <= 1'b0;
            st_err  <= 1'b0;
            cycles  <= '0;
            if (dims_ok) begin
              state <= S_SETUP;
              wo    <= reg_w - 16'd2;
              ho    <= reg_h - 16'd2;
              c4    <= reg_c >> 2;
              k4    <= reg_k >> 2;
              hw    <= AW'(32'(reg_h) * 32'(reg_w));
              howo  <= AW'(32'(reg_h - 16'd2) * 32'(reg_w - 16'd2));
            end else begin
              st_done <= 1'b1;
              st_err  <= 1'b1;
            end
          end
        end
        S_SETUP: begin
          state     <= S_RUN;
          phase     <= '0;
          ld_valid  <= 1'b1;
          cmp_valid <= 1'b0;
          ox <= '0; oy <= '0; cp <= '0; kk <= '0;
          ch_base <= '0; img_row <= '0; kout_base <= '0; out_row <= '0;
          wbase <= '0;
        end
        S_RUN: begin
          phase <= last_period ? '0 : phase + PHW'(1);
          if (last_period) begin
            // hand the loaded tile to the compute stage
            cmp_valid <= ld_valid;
            out_addr  <= out_addr_ld;
            if (!ld_valid) begin
              state   <= S_IDLE;
              st_done <= 1'b1;
            end
            if (ld_valid) begin
              if (ox != wo - 16'd1) begin
                ox <= ox + 16'd1;
              end else begin
                ox <= '0;
                if (oy != ho - 16'd1) begin
                  oy      <= oy + 16'd1;
                  img_row <= img_row + AW'(reg_w);
                  out_row <= out_row + AW'(wo);
                end else begin
                  oy    <= '0;
                  wbase <= wbase + AW'(TAPS);
                  if (cp != c4 - 16'd1) begin
                    cp      <= cp + 16'd1;
                    ch_base <= ch_base + hw;
                    img_row <= ch_base + hw;
                    out_row <= kout_base;
                  end else begin
                    cp      <= '0;
                    ch_base <= '0;
                    img_row <= '0;
                    if (kk != k4 - 16'd1) begin
                      kk        <= kk + 16'd1;
                      kout_base <= kout_base + howo;
                      out_row   <= kout_base + howo;
                    end else begin
                      ld_valid <= 1'b0;
                    end
                  end
                end
              end
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
