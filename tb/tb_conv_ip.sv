// tb_conv_ip: end-to-end test of the convolution IP at its default sizes.
//
// The testbench plays the processing system (AXI4-Lite register writes and
// reads) and the DMA engine (AXI4 bursts into and out of the BRAMs).  For each
// layer it generates an image, kernels and biases, computes the expected
// feature map with a plain loop nest, loads everything through the AXI4 port,
// starts the layer, waits for done, checks the cycle count against
// (K/4*C/4*(H-2)*(W-2) + 1) tile periods of 8 cycles plus one setup cycle,
// reads every output word back and compares.
// Layers: a 5x5x4 image with the waveform pattern (pixel = 1..25 per channel,
// kernels 01..09, 91..99, 21..29, b1..b9), a 7x6x8 image with 8 kernels and
// random data, a layer with invalid dimensions (must end with the error bit),
// and finally the full 224x224x8 layer with eight 3x3x8 kernels.
// It also counts how often each mechanism happened: weight reloads, periods
// where loading and computing overlap, accumulation over several channel
// steps and kernel passes, bias accumulation, the DMA port being held off
// while the core runs, and the error exit; one that never happens is a failure.
`timescale 1ns/1ps
module tb_conv_ip;
  import conv_pkg::*;

  localparam int unsigned AW     = $clog2(max3(IMG_DEPTH, W_DEPTH, OUT_DEPTH));
  localparam int unsigned ADDR_W = REGION_W + AW + 2;
  localparam int unsigned PMASK  = (1 << PSUM_W) - 1;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [7:0]  ctl_awaddr = '0, ctl_araddr = '0;
  logic        ctl_awvalid = 0, ctl_wvalid = 0, ctl_bready = 0, ctl_arvalid = 0, ctl_rready = 0;
  logic [31:0] ctl_wdata = '0;
  logic        ctl_awready, ctl_wready, ctl_bvalid, ctl_arready, ctl_rvalid;
  logic [1:0]  ctl_bresp, ctl_rresp;
  logic [31:0] ctl_rdata;

  logic [3:0]        dma_awid = '0, dma_arid = '0, dma_bid, dma_rid;
  logic [ADDR_W-1:0] dma_awaddr = '0, dma_araddr = '0;
  logic [7:0]        dma_awlen = '0, dma_arlen = '0;
  logic [2:0]        dma_awsize = 3'd2, dma_arsize = 3'd2;
  logic [1:0]        dma_awburst = 2'b01, dma_arburst = 2'b01;
  logic              dma_awvalid = 0, dma_wvalid = 0, dma_wlast = 0, dma_bready = 0;
  logic              dma_arvalid = 0, dma_rready = 0;
  logic [31:0]       dma_wdata = '0;
  logic [3:0]        dma_wstrb = 4'hf;
  logic              dma_awready, dma_wready, dma_bvalid, dma_arready, dma_rvalid, dma_rlast;
  logic [1:0]        dma_bresp, dma_rresp;
  logic [31:0]       dma_rdata;
  logic              busy, done;

  conv_ip dut (.*);

  int checks = 0, failures = 0;
  int n_reload = 0, n_overlap = 0, n_chan_acc = 0, n_kpass = 0, n_bias = 0;
  int n_hold = 0, n_error = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // ------------------------------------------------------------ watchdog
  initial begin
    repeat (12_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // --------------------------------------------------------- mechanisms
  always @(posedge clk) begin
    if (dut.u_ctrl.phase == PHW_MAX()) begin
      if (dut.ld_valid && dut.reload)        n_reload++;
      if (dut.ld_valid && dut.cmp_valid)     n_overlap++;
      if (dut.ld_valid && dut.u_ctrl.cp != 0) n_chan_acc++;
      if (dut.ld_valid && dut.u_ctrl.kk != 0) n_kpass++;
    end
    if (busy && dma_arvalid && !dma_arready) n_hold++;
  end
  function automatic logic [$clog2(TILE_CYCLES)-1:0] PHW_MAX();
    return $clog2(TILE_CYCLES)'(TILE_CYCLES - 1);
  endfunction

  // ------------------------------------------------------ AXI4-Lite host
  task automatic reg_wr(input logic [7:0] a, input logic [31:0] d);
    @(negedge clk);
    ctl_awaddr = a; ctl_wdata = d; ctl_awvalid = 1; ctl_wvalid = 1; #1;
    while (!ctl_awready) begin @(negedge clk); #1; end
    @(negedge clk);
    ctl_awvalid = 0; ctl_wvalid = 0; ctl_bready = 1; #1;
    while (!ctl_bvalid) begin @(negedge clk); #1; end
    @(negedge clk);
    ctl_bready = 0;
  endtask

  task automatic reg_rd(input logic [7:0] a, output logic [31:0] d);
    @(negedge clk);
    ctl_araddr = a; ctl_arvalid = 1; #1;
    while (!ctl_arready) begin @(negedge clk); #1; end
    @(negedge clk);
    ctl_arvalid = 0; ctl_rready = 1; #1;
    while (!ctl_rvalid) begin @(negedge clk); #1; end
    d = ctl_rdata;
    @(negedge clk);
    ctl_rready = 0;
  endtask

  // ----------------------------------------------------------- DMA model
  function automatic logic [ADDR_W-1:0] baddr(input int region, input int word);
    return {REGION_W'(region), AW'(word), 2'b00};
  endfunction

  task automatic dma_wr(input int region, input int word, input int n, ref int unsigned d[$]);
    int b = 0;
    while (b < n) begin
      int len = (n - b > 256) ? 256 : n - b;
      @(negedge clk);
      dma_awaddr = baddr(region, word + b); dma_awlen = 8'(len - 1); dma_awvalid = 1; #1;
      while (!dma_awready) begin @(negedge clk); #1; end
      @(negedge clk);
      dma_awvalid = 0;
      for (int i = 0; i < len; i++) begin
        dma_wdata = d[b + i]; dma_wlast = (i == len - 1); dma_wvalid = 1; #1;
        while (!dma_wready) begin @(negedge clk); #1; end
        @(negedge clk);
      end
      dma_wvalid = 0; dma_wlast = 0; dma_bready = 1; #1;
      while (!dma_bvalid) begin @(negedge clk); #1; end
      @(negedge clk);
      dma_bready = 0;
      b += len;
    end
  endtask

  task automatic dma_rd(input int region, input int word, input int n, ref int unsigned d[$]);
    int b = 0;
    d.delete();
    while (b < n) begin
      int len = (n - b > 256) ? 256 : n - b;
      @(negedge clk);
      dma_araddr = baddr(region, word + b); dma_arlen = 8'(len - 1); dma_arvalid = 1; #1;
      while (!dma_arready) begin @(negedge clk); #1; end
      @(negedge clk);
      dma_arvalid = 0; dma_rready = 1;
      for (int i = 0; i < len; i++) begin
        #1;
        while (!dma_rvalid) begin @(negedge clk); #1; end
        d.push_back(dma_rdata);
        if (dma_rlast != (i == len - 1)) begin checks++; failures++; $display("FAIL: rlast"); end
        @(negedge clk);
      end
      dma_rready = 0;
      b += len;
    end
  endtask

  // ------------------------------------------------------------- a layer
  int unsigned img [];     // [c][y][x]
  int unsigned wt  [];     // [k][c][t]
  int unsigned bias[];     // [k]

  task automatic run_layer(input int H, input int W, input int C, input int K, input int pattern);
    int Ho = H - 2, Wo = W - 2, C4 = C / 4, K4 = K / 4;
    int unsigned q[$];
    int unsigned exp_out;
    logic [31:0] st, cyc;
    int errs = 0;
    int nt;
    img  = new[C * H * W];
    wt   = new[K * C * 9];
    bias = new[K];
    foreach (img[i]) img[i] = (pattern != 0) ? 32'(i % (H * W) + 1) : ($urandom % 256);
    for (int k = 0; k < K; k++)
      for (int c = 0; c < C; c++)
        for (int t = 0; t < 9; t++) begin
          int unsigned base_k [4] = '{8'h01, 8'h91, 8'h21, 8'hb1};
          wt[(k * C + c) * 9 + t] = (pattern != 0) ? base_k[k % 4] + t : ($urandom % 256);
        end
    foreach (bias[k]) bias[k] = (pattern != 0) ? 0 : ($urandom % 256);
    foreach (bias[k]) if (bias[k] != 0) n_bias++;

    // image: BRAM i holds channels i*C4 .. i*C4+C4-1
    for (int i = 0; i < 4; i++) begin
      q.delete();
      for (int cp = 0; cp < C4; cp++)
        for (int p = 0; p < H * W; p++) q.push_back(img[(i * C4 + cp) * H * W + p]);
      dma_wr(RGN_IMG0 + i, 0, C4 * H * W, q);
    end
    // weights: BRAM 4i+j holds kernels j*K4+k', channels i*C4+c'
    for (int i = 0; i < 4; i++)
      for (int j = 0; j < 4; j++) begin
        q.delete();
        for (int kp = 0; kp < K4; kp++)
          for (int cp = 0; cp < C4; cp++)
            for (int t = 0; t < 9; t++) q.push_back(wt[((j * K4 + kp) * C + i * C4 + cp) * 9 + t]);
        dma_wr(RGN_W0 + 4 * i + j, 0, K4 * C4 * 9, q);
      end
    // bias preload: every word of an output channel starts at its bias
    for (int j = 0; j < 4; j++) begin
      q.delete();
      for (int kp = 0; kp < K4; kp++)
        for (int p = 0; p < Ho * Wo; p++) q.push_back(bias[j * K4 + kp]);
      dma_wr(RGN_OUT0 + j, 0, K4 * Ho * Wo, q);
    end

    reg_wr(REG_IMG_H, 32'(H));
    reg_wr(REG_IMG_W, 32'(W));
    reg_wr(REG_CH, 32'(C));
    reg_wr(REG_KN, 32'(K));
    reg_wr(REG_CTRL, 32'd1);
    // a DMA read issued while the core runs must wait until it is done
    fork
      begin
        int unsigned r[$];
        dma_rd(RGN_OUT0, 0, 1, r);
      end
    join_none
    wait (done == 1'b1);
    wait fork;
    reg_rd(REG_STATUS, st);
    check(st[2:0] == 3'b010, $sformatf("status %h after %0dx%0dx%0d K=%0d", st, H, W, C, K));
    reg_rd(REG_CYCLES, cyc);
    nt = K4 * C4 * Ho * Wo;
    check(cyc == 32'(1 + (nt + 1) * TILE_CYCLES),
          $sformatf("cycles %0d, expected %0d", cyc, 1 + (nt + 1) * TILE_CYCLES));
    $display("layer %0dx%0dx%0d, K=%0d: %0d psums in %0d cycles", H, W, C, K, K * C * Ho * Wo, cyc);

    for (int j = 0; j < 4; j++) begin
      dma_rd(RGN_OUT0 + j, 0, K4 * Ho * Wo, q);
      for (int kp = 0; kp < K4; kp++)
        for (int y = 0; y < Ho; y++)
          for (int x = 0; x < Wo; x++) begin
            int k = j * K4 + kp;
            exp_out = bias[k];
            for (int c = 0; c < C; c++)
              for (int m = 0; m < 3; m++)
                for (int n = 0; n < 3; n++)
                  exp_out += img[(c * H + y + m) * W + x + n] * wt[(k * C + c) * 9 + m * 3 + n];
            exp_out &= PMASK;
            checks++;
            if (q[(kp * Ho + y) * Wo + x] != exp_out) begin
              failures++;
              if (errs++ < 10) $display("FAIL: out k=%0d y=%0d x=%0d got %h exp %h",
                                        k, y, x, q[(kp * Ho + y) * Wo + x], exp_out);
            end
          end
    end
  endtask

  initial begin
    logic [31:0] st;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    run_layer(5, 5, 4, 4, 1);
    run_layer(7, 6, 8, 8, 0);

    // invalid layer: C not a multiple of four
    reg_wr(REG_CH, 32'd6);
    reg_wr(REG_CTRL, 32'd1);
    reg_rd(REG_STATUS, st);
    check(st[2:0] == 3'b110, $sformatf("error status %h", st));
    if (st[2]) n_error++;

    run_layer(224, 224, 8, 8, 0);

    $display("mechanisms: weight reloads %0d, load/compute overlap %0d, channel steps %0d, kernel passes %0d, biases %0d, DMA held %0d, error exits %0d",
             n_reload, n_overlap, n_chan_acc, n_kpass, n_bias, n_hold, n_error);
    check(n_reload > 3,   "weight reload never happened");
    check(n_overlap > 0,  "load/compute overlap never happened");
    check(n_chan_acc > 0, "channel accumulation never happened");
    check(n_kpass > 0,    "second kernel pass never happened");
    check(n_bias > 0,     "no bias was used");
    check(n_hold > 0,     "DMA port never held off");
    check(n_error > 0,    "error exit never happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
