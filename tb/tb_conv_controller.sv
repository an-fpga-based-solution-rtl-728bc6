// tb_conv_controller: register interface and tile sequence of the controller.
// Registers are written and read back over AXI4-Lite.  A layer is started
// and, at the last phase of every tile period, the load-stage outputs
// (ld_valid, reload, img_base, wbase) and compute-stage outputs (cmp_valid,
// out_addr) are compared with a reference loop nest (k, c', y, x), the
// compute stage lagging the load stage by one period.  Then the period count,
// done/busy, the cycle register, and the error exit for bad dimensions.
`timescale 1ns/1ps
module tb_conv_controller;
  import conv_pkg::*;
  localparam int AW = 12, T = TILE_CYCLES, PHW = $clog2(T);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [7:0] s_awaddr = '0, s_araddr = '0;
  logic s_awvalid = 0, s_wvalid = 0, s_bready = 0, s_arvalid = 0, s_rready = 0;
  logic [31:0] s_wdata = '0, s_rdata;
  logic s_awready, s_wready, s_bvalid, s_arready, s_rvalid;
  logic [1:0] s_bresp, s_rresp;
  logic busy, done, core_own, ld_valid, reload, cmp_valid;
  logic [PHW-1:0] phase;
  logic [AW-1:0] img_base, wbase, out_addr;
  logic [15:0] img_w;
  int checks = 0, failures = 0;

  conv_controller #(.AW(AW)) dut (.*);

  task automatic chk(input bit ok, input string m);
    checks++;
    if (!ok) begin failures++; if (failures < 15) $display("FAIL %s", m); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic reg_wr(input logic [7:0] a, input logic [31:0] d);
    @(negedge clk);
    s_awaddr = a; s_wdata = d; s_awvalid = 1; s_wvalid = 1; #1;
    while (!s_awready) begin @(negedge clk); #1; end
    @(negedge clk);
    s_awvalid = 0; s_wvalid = 0; s_bready = 1; #1;
    while (!s_bvalid) begin @(negedge clk); #1; end
    @(negedge clk);
    s_bready = 0;
  endtask

  task automatic reg_rd(input logic [7:0] a, output logic [31:0] d);
    @(negedge clk);
    s_araddr = a; s_arvalid = 1; #1;
    while (!s_arready) begin @(negedge clk); #1; end
    @(negedge clk);
    s_arvalid = 0; s_rready = 1; #1;
    while (!s_rvalid) begin @(negedge clk); #1; end
    d = s_rdata;
    @(negedge clk);
    s_rready = 0;
  endtask

  // reference sequence, filled before the run
  typedef struct packed { logic ld; logic rl; logic [31:0] ib; logic [31:0] wb; logic [31:0] oa; } step_t;
  step_t seq [$];
  int period = 0;
  int mism = 0;
  step_t prev_s;

  always @(posedge clk)
    if (busy && dut.state == 2'd2 && phase == PHW'(T - 1)) begin
      step_t s;
      s = (period < seq.size()) ? seq[period] : '0;
      chk(ld_valid == s.ld, $sformatf("ld_valid period %0d", period));
      if (s.ld) begin
        chk(reload == s.rl, $sformatf("reload period %0d", period));
        chk(img_base == AW'(s.ib), $sformatf("img_base period %0d: %0d exp %0d", period, img_base, s.ib));
        if (s.rl) chk(wbase == AW'(s.wb), $sformatf("wbase period %0d", period));
      end
      chk(cmp_valid == (period > 0 && prev_s.ld), $sformatf("cmp_valid period %0d", period));
      if (period > 0 && prev_s.ld) chk(out_addr == AW'(prev_s.oa), $sformatf("out_addr period %0d", period));
      chk(core_own, "core_own low while running");
      prev_s = s;
      period++;
    end

  initial begin
    logic [31:0] d;
    int H, W, C, K;
    H = 6; W = 5; C = 8; K = 12;
    for (int k = 0; k < K / 4; k++)
      for (int cp = 0; cp < C / 4; cp++)
        for (int y = 0; y < H - 2; y++)
          for (int x = 0; x < W - 2; x++)
          begin
            step_t st;
            st.ld = 1; st.rl = (x == 0 && y == 0);
            st.ib = 32'(cp * H * W + y * W + x);
            st.wb = 32'((k * (C / 4) + cp) * 9);
            st.oa = 32'(k * (H - 2) * (W - 2) + y * (W - 2) + x);
            seq.push_back(st);
          end
    repeat (2) @(negedge clk);
    rst_n = 1;
    reg_wr(REG_IMG_H, H); reg_wr(REG_IMG_W, W); reg_wr(REG_CH, C); reg_wr(REG_KN, K);
    reg_rd(REG_IMG_H, d); chk(d == H, "H readback");
    reg_rd(REG_IMG_W, d); chk(d == W, "W readback");
    reg_rd(REG_CH, d);    chk(d == C, "C readback");
    reg_rd(REG_KN, d);    chk(d == K, "K readback");
    reg_rd(REG_STATUS, d); chk(d[2:0] == 3'b000, "idle status");
    reg_wr(REG_CTRL, 1);
    reg_rd(REG_STATUS, d); chk(d[0] == 1'b1, "busy after start");
    // dimension registers are frozen while busy
    reg_wr(REG_IMG_W, 99);
    reg_rd(REG_IMG_W, d); chk(d == W, "W changed while busy");
    wait (done);
    @(negedge clk);
    chk(period == seq.size() + 1, $sformatf("periods %0d exp %0d", period, seq.size() + 1));
    chk(!busy && !core_own, "busy after done");
    reg_rd(REG_STATUS, d); chk(d[2:0] == 3'b010, "done status");
    reg_rd(REG_CYCLES, d); chk(d == 32'(1 + (seq.size() + 1) * T), $sformatf("cycles %0d", d));
    // bad dimensions: K = 6
    reg_wr(REG_KN, 6);
    reg_wr(REG_CTRL, 1);
    reg_rd(REG_STATUS, d); chk(d[2:0] == 3'b110, "error status");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
