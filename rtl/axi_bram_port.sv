// axi_bram_port: AXI4 slave through which a DMA engine reaches the BRAMs.
//
// The DMA writes images, kernels and biases into the BRAMs and reads results
// back over AXI4 (memory mapped).  Each 32-bit beat carries one BRAM word in
// its low bits.  A byte address splits into {region, word, 2'b00}: region
// 0..3 are the image BRAMs, 4..19 the weight BRAMs (4*core + pcore),
// 20..23 the output BRAMs; word is the word inside that BRAM.
// The slave serves one transaction at a time, writes first when both are
// pending: INCR and FIXED bursts of 1..256 beats (WRAP is treated as INCR),
// one write beat per cycle, one read beat every two cycles; responses OKAY.
// Write strobes are ignored.  While hold is set (the IP is computing) no new
// transaction is accepted.  Memory side: a single request port (mem_en,
// mem_we, region, word, data) whose read data returns the next cycle.
// The assertions at the end use rst_n in `disable iff`, which lint tools
// report as the reset being used both asynchronously and synchronously; the
// flip-flops themselves use it only as an asynchronous reset.
module axi_bram_port
  import conv_pkg::*;
#(
  parameter int unsigned AW     = $clog2(IMG_DEPTH),   // word address bits of a region
  parameter int unsigned IDW    = 4,
  parameter int unsigned ADDR_W = REGION_W + AW + 2
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                hold,
  // AXI4 slave
  input  logic [IDW-1:0]      s_awid,
  input  logic [ADDR_W-1:0]   s_awaddr,
  input  logic [7:0]          s_awlen,
  input  logic [2:0]          s_awsize,
  input  logic [1:0]          s_awburst,
  input  logic                s_awvalid,
  output logic                s_awready,
  input  logic [AXI_DW-1:0]   s_wdata,
  input  logic [AXI_DW/8-1:0] s_wstrb,
  input  logic                s_wlast,
  input  logic                s_wvalid,
  output logic                s_wready,
  output logic [IDW-1:0]      s_bid,
  output logic [1:0]          s_bresp,
  output logic                s_bvalid,
  input  logic                s_bready,
  input  logic [IDW-1:0]      s_arid,
  input  logic [ADDR_W-1:0]   s_araddr,
  input  logic [7:0]          s_arlen,
  input  logic [2:0]          s_arsize,
  input  logic [1:0]          s_arburst,
  input  logic                s_arvalid,
  output logic                s_arready,
  output logic [IDW-1:0]      s_rid,
  output logic [AXI_DW-1:0]   s_rdata,
  output logic [1:0]          s_rresp,
  output logic                s_rlast,
  output logic                s_rvalid,
  input  logic                s_rready,
  // BRAM side
  output logic                mem_en,
  output logic                mem_we,
  output logic [REGION_W-1:0] mem_region,
  output logic [AW-1:0]       mem_addr,
  output logic [AXI_DW-1:0]   mem_wdata,
  input  logic [AXI_DW-1:0]   mem_rdata
);

  typedef enum logic [2:0] {A_IDLE, A_WDATA, A_WRESP, A_RADDR, A_RDATA} state_t;
  state_t state;

  logic [IDW-1:0]        id_q;
  logic [REGION_W+AW-1:0] waddr_q;     // {region, word}
  logic [7:0]            cnt_q;        // beats left after the current one
  logic                  fixed_q;
  logic                  fresh_q;      // first cycle of A_RDATA: data comes from the BRAM
  logic [AXI_DW-1:0]     rbuf_q;

  assign s_awready = (state == A_IDLE) && !hold;
  assign s_arready = (state == A_IDLE) && !hold && !s_awvalid;
  assign s_wready  = (state == A_WDATA);
  assign s_bvalid  = (state == A_WRESP);
  assign s_bid     = id_q;
  assign s_bresp   = 2'b00;
  assign s_rvalid  = (state == A_RDATA);
  assign s_rid     = id_q;
  assign s_rresp   = 2'b00;
  assign s_rlast   = (state == A_RDATA) && (cnt_q == 8'd0);
  assign s_rdata   = fresh_q ? mem_rdata : rbuf_q;

  assign mem_region = waddr_q[REGION_W+AW-1 -: REGION_W];
  assign mem_addr   = waddr_q[AW-1:0];
  assign mem_wdata  = s_wdata;
  assign mem_we     = (state == A_WDATA) && s_wvalid;
  assign mem_en     = mem_we || (state == A_RADDR);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= A_IDLE;
      id_q    <= '0;
      waddr_q <= '0;
      cnt_q   <= '0;
      fixed_q <= 1'b0;
      fresh_q <= 1'b0;
      rbuf_q  <= '0;
    end else begin
      fresh_q <= 1'b0;
      unique case (state)
        A_IDLE: begin
          if (s_awvalid && s_awready) begin
            state   <= A_WDATA;
            id_q    <= s_awid;
            waddr_q <= s_awaddr[ADDR_W-1:2];
            cnt_q   <= s_awlen;
            fixed_q <= (s_awburst == 2'b00);
          end else if (s_arvalid && s_arready) begin
            state   <= A_RADDR;
            id_q    <= s_arid;
            waddr_q <= s_araddr[ADDR_W-1:2];
            cnt_q   <= s_arlen;
            fixed_q <= (s_arburst == 2'b00);
          end
        end
        A_WDATA: begin
          if (s_wvalid) begin
            if (!fixed_q) waddr_q[AW-1:0] <= waddr_q[AW-1:0] + AW'(1);
            cnt_q <= cnt_q - 8'd1;
            if (s_wlast || cnt_q == 8'd0) state <= A_WRESP;
          end
        end
        A_WRESP: begin
          if (s_bready) state <= A_IDLE;
        end
        A_RADDR: begin
          state   <= A_RDATA;
          fresh_q <= 1'b1;
        end
        A_RDATA: begin
          if (fresh_q) rbuf_q <= mem_rdata;
          if (s_rready) begin
            if (cnt_q == 8'd0) begin
              state <= A_IDLE;
            end else begin
              state <= A_RADDR;
              cnt_q <= cnt_q - 8'd1;
              if (!fixed_q) waddr_q[AW-1:0] <= waddr_q[AW-1:0] + AW'(1);
            end
          end
        end
        default: state <= A_IDLE;
      endcase
    end
  end

  // AXI rules for the slave's own outputs: a response, once shown, stays with
  // the same content until it is taken.
  a_bvalid_hold: assert property (@(posedge clk) disable iff (!rst_n)
    (s_bvalid && !s_bready) |=> (s_bvalid && $stable(s_bid)));
  a_rvalid_hold: assert property (@(posedge clk) disable iff (!rst_n)
    (s_rvalid && !s_rready) |=> (s_rvalid && $stable(s_rdata) && $stable(s_rlast)));

endmodule
